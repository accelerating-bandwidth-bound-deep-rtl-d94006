// pim_unit: one StepStone PIM unit (one per bank group in the StepStone-BG configuration).
//
// The host controls the unit through memory-mapped registers and starts coarse-grained
// kernels, after which the unit runs on its own, generating its own DRAM addresses:
//   FILL  reads COUNT cache blocks of this PIM's local DRAM region, starting at A_START and
//         stepping only on blocks that map to this PIM, into the scratchpad from word SP_BASE.
//   DRAIN writes COUNT blocks from the scratchpad back to the local region the same way.
//   GEMM  walks every block of the weight matrix A in [A_START, A_END] that maps to this PIM
//         and to the block group / partition pinned by the extra constraint rows (XMASKi,
//         XTGT). Each A block is one matrix row and 16 consecutive columns. Its row within the
//         group is the address's free MROW bits (ROWMASK) and its column block the free MCOL
//         bits (COLMASK), both compressed with a bit-extract; these select the C line
//         C_BASE + r*NPASS + p and the B lines B_BASE + (c*16 + k)*NPASS + p in the scratchpad,
//         where NPASS = ceil(N / W) passes cover a batch wider than the SIMD unit. For each
//         pass the unit loads the C line into the SIMD accumulators, performs 16 broadcast
//         multiply-accumulates (one per A word) and writes the C line back.
// DRAM reads are issued ahead of use into the operand buffer, up to OPQ_DEPTH in flight, so
// DRAM latency and the AGEN are hidden behind computation.
//
// Register map (32-bit, word index on reg_addr; reg_addr[19] = 1 selects the scratchpad word
// window, usable when the unit is idle, which lets the host read or write B and C directly):
//   0 CMD (write 1 FILL, 2 DRAIN, 3 GEMM)   1 STATUS (bit0 busy, bit1 done, bit2 cfg error,
//   bit3 a request left this PIM's bank group; write 1 to bit1 clears done)   2 A_START
//   3 A_END (cache-block addresses)  4 SP_BASE (word)
//   5 COUNT  6 B_BASE (line)  7 C_BASE (line)  8 NPASS  9 COLMASK  10 ROWMASK
//   11..14 XMASK0..3  15 XTGT  16 CYCLES of the last kernel  17 BLOCKS of the last kernel
// Reads return on reg_rvalid one cycle after reg_re.
// Memory port: one request per handshake (mem_req_valid & mem_req_ready); reads are answered
// in order on mem_rsp_valid, writes get no answer.
// GEMM timing: 19 cycles per A block and pass (C read, C load with the first B read, 16
// MACs, C write) once the operand buffer holds the next block.
//
// From the paper: the block list (host interface, control/status registers, address
// generator, operand buffer, vector unit, scratchpad, memory interface), the coarse-grained
// FILL/GEMM/DRAIN kernels of Algorithm 1, the group-ordered execution and partition skipping
// by address-generation rules, and the sizes. This design's own choices: the register map,
// the command encoding, the scratchpad layout, the broadcast dataflow and its timing, and a
// simple state machine in place of the paper's 20-stage pipeline.
module pim_unit
  import stepstone_pkg::*;
#(
  parameter int unsigned W         = 8,
  parameter int unsigned SP_BYTES  = 8192,
  parameter int unsigned OPQ_DEPTH = 4,
  parameter pimid_t      PIM_ID    = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  // host interface (memory-mapped registers)
  input  logic         reg_we,
  input  logic         reg_re,
  input  logic [19:0]  reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic         reg_rvalid,
  output logic [31:0]  reg_rdata,
  output logic         busy,
  output logic         done,
  // memory interface (this PIM's bank group)
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output logic         mem_req_we,
  output baddr_t       mem_req_ba,
  output block_t       mem_req_wdata,
  input  logic         mem_rsp_valid,
  input  block_t       mem_rsp_rdata
);
  localparam int unsigned LINES = SP_BYTES / (4 * W);
  localparam int unsigned LA_W  = $clog2(LINES);
  localparam int unsigned WA_W  = $clog2(SP_BYTES / 4);
  localparam int unsigned CW    = (W < BLK_WORDS) ? W : BLK_WORDS;   // words moved per cycle
  localparam int unsigned NCH   = BLK_WORDS / CW;                    // chunks per block
  localparam int unsigned IDX_W = 16;
  localparam int unsigned QCW   = $clog2(OPQ_DEPTH + 1);

  // ---------------- registers ----------------
  baddr_t       r_a_start, r_a_end, r_colmask, r_rowmask;
  baddr_t       r_xmask [N_EXTRA];
  logic [N_EXTRA-1:0] r_xtgt;
  logic [WA_W-1:0]    r_sp_base;
  logic [31:0]  r_count, r_npass, r_cycles, r_blocks;
  logic [LA_W-1:0] r_b_base, r_c_base;
  logic         r_done, r_err, r_map_err;
  pimid_t       req_pim_id;

  typedef enum logic [1:0] {U_IDLE, U_FILL, U_DRAIN, U_GEMM} ustate_e;
  ustate_e ust;

  // ---------------- AGEN ----------------
  logic   ag_load, ag_abort, ag_busy, ag_done, ag_err, ag_valid, ag_ready;
  baddr_t ag_ba, ag_free;
  cons_t  ag_cons, ag_red;
  logic   ag_started;     // AGEN load has taken effect (busy is meaningful)

  stepstone_agen u_agen (
    .clk, .rst_n, .load(ag_load), .abort(ag_abort), .cons(ag_cons),
    .start_ba(r_a_start), .end_ba((ust == U_GEMM) ? r_a_end : '1),
    .busy(ag_busy), .done(ag_done), .cfg_error(ag_err),
    .out_valid(ag_valid), .out_ready(ag_ready), .out_ba(ag_ba),
    .red_cons(ag_red), .free_mask(ag_free)
  );

  always_comb begin
    ag_cons = '0;
    for (int i = 0; i < PIMID_W; i++) begin
      ag_cons.mask[i] = pim_mask(i);
      ag_cons.tgt[i]  = PIM_ID[i];
    end
    if (ust == U_GEMM)
      for (int i = 0; i < N_EXTRA; i++) begin
        ag_cons.mask[PIMID_W+i] = r_xmask[i];
        ag_cons.tgt[PIMID_W+i]  = r_xtgt[i];
      end
  end

  // ---------------- operand buffer + index queue ----------------
  logic                 dq_push, dq_pop, dq_full, dq_empty;
  block_t               dq_dout;
  logic [QCW-1:0]       dq_count;
  logic                 iq_push, iq_pop, iq_full, iq_empty;
  logic [2*IDX_W-1:0]   iq_din, iq_dout;
  logic [QCW-1:0]       iq_count;

  operand_fifo #(.WIDTH($bits(block_t)), .DEPTH(OPQ_DEPTH)) u_opnd (
    .clk, .rst_n, .push(dq_push), .din(mem_rsp_rdata), .full(dq_full),
    .pop(dq_pop), .dout(dq_dout), .empty(dq_empty), .count(dq_count));
  operand_fifo #(.WIDTH(2*IDX_W), .DEPTH(OPQ_DEPTH)) u_idxq (
    .clk, .rst_n, .push(iq_push), .din(iq_din), .full(iq_full),
    .pop(iq_pop), .dout(iq_dout), .empty(iq_empty), .count(iq_count));

  assign dq_push = mem_rsp_valid;
  // index of a block inside the group: compressed free MCOL / MROW bits
  assign iq_din  = {IDX_W'(pext(ag_ba, r_rowmask & ag_free)), IDX_W'(pext(ag_ba, r_colmask & ag_free))};

  // ---------------- scratchpad ----------------
  logic               sp_re;
  logic [LA_W-1:0]    sp_raddr, sp_waddr;
  logic [W-1:0][31:0] sp_rdata, sp_wdata;
  logic [W-1:0]       sp_we;

  scratchpad #(.W(W), .SP_BYTES(SP_BYTES)) u_sp (
    .clk, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
    .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata));

  // ---------------- vector unit ----------------
  logic               v_load, v_mac;
  logic [31:0]        v_a;
  logic [W-1:0][31:0] v_acc;

  simd_unit #(.W(W)) u_simd (
    .clk, .rst_n, .load_acc(v_load), .acc_in(sp_rdata), .mac(v_mac),
    .a(v_a), .b(sp_rdata), .acc(v_acc));

  // ---------------- kernel state ----------------
  typedef enum logic [2:0] {G_IDLE, G_CRD, G_CLD, G_MAC, G_CWR} gstate_e;
  gstate_e gst;
  logic [3:0]   k;               // word of the A block
  logic [31:0]  pass;
  logic [31:0]  issued, blocks_done;
  logic [WA_W-1:0] wa;           // scratchpad word pointer (FILL / DRAIN)
  logic [$clog2(NCH+1)-1:0] ci;  // chunk index within a block
  logic         d_rd_pend;       // DRAIN: a chunk read was issued last cycle
  logic         d_full;          // DRAIN: block assembled, waiting to be written
  block_t       d_blk;

  logic [IDX_W-1:0] g_bidx, g_ridx;
  assign {g_ridx, g_bidx} = iq_dout;

  logic [LA_W-1:0] c_line, b_line;
  assign c_line = LA_W'(r_c_base + LA_W'(32'(g_ridx) * r_npass + pass));
  // B line of word k+1 (read one cycle ahead of its use) or of word 0 from G_CLD
  logic [3:0] k_rd;
  assign k_rd   = (gst == G_CLD) ? 4'd0 : k + 4'd1;
  assign b_line = LA_W'(r_b_base + LA_W'((32'(g_bidx) * 16 + 32'(k_rd)) * r_npass + pass));

  logic rd_issue;    // a DRAM read is issued this cycle (FILL / GEMM)
  assign rd_issue = (ust == U_FILL || ust == U_GEMM) && ag_valid && mem_req_ready &&
                    (iq_count < QCW'(OPQ_DEPTH)) && (ust != U_FILL || issued < r_count);
  assign ag_ready = rd_issue || (ust == U_DRAIN && d_full && mem_req_ready);
  assign iq_push  = rd_issue;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_ba    = ag_ba;
    mem_req_wdata = d_blk;
    if (ust == U_FILL || ust == U_GEMM) begin
      mem_req_valid = ag_valid && (iq_count < QCW'(OPQ_DEPTH)) && (ust != U_FILL || issued < r_count);
    end else if (ust == U_DRAIN) begin
      mem_req_valid = ag_valid && d_full;
      mem_req_we    = 1'b1;
    end
  end

  // FILL consumer: one chunk of the head block per cycle
  logic fill_wr;
  assign fill_wr = (ust == U_FILL) && !dq_empty;

  // DRAIN: read chunks while the block buffer is not full
  logic drain_rd;
  assign drain_rd = (ust == U_DRAIN) && !d_full && !d_rd_pend && (blocks_done < r_count) &&
                    ag_started;

  // host scratchpad window
  logic host_sp;
  assign host_sp = reg_addr[19] && (ust == U_IDLE);
  logic [WA_W-1:0] host_wa;
  assign host_wa = reg_addr[WA_W-1:0];

  always_comb begin
    sp_re    = 1'b0;
    sp_raddr = '0;
    sp_we    = '0;
    sp_waddr = '0;
    sp_wdata = '0;
    v_load   = 1'b0;
    v_mac    = 1'b0;
    v_a      = dq_dout[32*k +: 32];
    dq_pop   = 1'b0;
    iq_pop   = 1'b0;
    unique case (ust)
      U_IDLE: begin
        if (reg_re && host_sp) begin
          sp_re    = 1'b1;
          sp_raddr = LA_W'(host_wa / W);
        end
        if (reg_we && host_sp) begin
          sp_waddr = LA_W'(host_wa / W);
          sp_we[host_wa % W] = 1'b1;
          sp_wdata = {W{reg_wdata}};
        end
      end
      U_FILL: if (fill_wr) begin
        sp_waddr = LA_W'(wa / W);
        for (int l = 0; l < W; l++)
          if (l >= int'(wa % W) && l < int'(wa % W) + CW) begin
            sp_we[l]    = 1'b1;
            sp_wdata[l] = dq_dout[32*(int'(ci)*CW + l - int'(wa % W)) +: 32];
          end
        if (ci == NCH - 1) begin
          dq_pop = 1'b1;
          iq_pop = 1'b1;
        end
      end
      U_DRAIN: if (drain_rd) begin
        sp_re    = 1'b1;
        sp_raddr = LA_W'(wa / W);
      end
      U_GEMM: unique case (gst)
        G_CRD: begin
          sp_re    = 1'b1;
          sp_raddr = c_line;
        end
        G_CLD: begin
          v_load   = 1'b1;
          sp_re    = 1'b1;
          sp_raddr = b_line;
        end
        G_MAC: begin
          v_mac = 1'b1;
          if (k != 4'd15) begin
            sp_re    = 1'b1;
            sp_raddr = b_line;
          end
        end
        G_CWR: begin
          sp_we    = '1;
          sp_waddr = c_line;
          sp_wdata = v_acc;
          if (pass + 1 >= r_npass) begin
            dq_pop = 1'b1;
            iq_pop = 1'b1;
          end
        end
        default: ;
      endcase
      default: ;
    endcase
  end

  // ---------------- sequencing ----------------
  logic [$clog2(W)-1:0] d_off;   // word offset of the chunk being captured

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ust <= U_IDLE; gst <= G_IDLE;
      ag_load <= 1'b0; ag_abort <= 1'b0; ag_started <= 1'b0;
      k <= '0; pass <= '0; issued <= '0; blocks_done <= '0; wa <= '0; ci <= '0;
      d_rd_pend <= 1'b0; d_full <= 1'b0; d_blk <= '0; d_off <= '0;
      r_a_start <= '0; r_a_end <= '0; r_colmask <= '0; r_rowmask <= '0;
      for (int i = 0; i < N_EXTRA; i++) r_xmask[i] <= '0;
      r_xtgt <= '0; r_sp_base <= '0; r_count <= '0; r_npass <= 32'd1;
      r_b_base <= '0; r_c_base <= '0; r_cycles <= '0; r_blocks <= '0;
      r_done <= 1'b0; r_err <= 1'b0; r_map_err <= 1'b0;
    end else begin
      ag_load  <= 1'b0;
      ag_abort <= 1'b0;
      ag_started <= ag_load ? 1'b0 : (ag_started || ust != U_IDLE);
      if (ust != U_IDLE) r_cycles <= r_cycles + 1;
      if (mem_req_valid && req_pim_id != PIM_ID) r_map_err <= 1'b1;

      // register writes (configuration only while idle, STATUS any time)
      if (reg_we && !reg_addr[19]) begin
        if (reg_addr[4:0] == 5'd1 && reg_wdata[1]) r_done <= 1'b0;
        if (ust == U_IDLE) unique case (reg_addr[4:0])
          5'd0: if (reg_wdata[1:0] != 2'd0) begin
            ust <= (reg_wdata[1:0] == CMD_FILL)  ? U_FILL :
                   (reg_wdata[1:0] == CMD_DRAIN) ? U_DRAIN : U_GEMM;
            ag_load <= 1'b1;
            ag_started <= 1'b0;
            issued <= '0; blocks_done <= '0; ci <= '0; wa <= r_sp_base;
            pass <= '0; k <= '0; gst <= G_IDLE; d_full <= 1'b0; d_rd_pend <= 1'b0;
            r_cycles <= '0; r_done <= 1'b0; r_err <= 1'b0; r_map_err <= 1'b0;
          end
          5'd2:  r_a_start <= baddr_t'(reg_wdata);
          5'd3:  r_a_end   <= baddr_t'(reg_wdata);
          5'd4:  r_sp_base <= WA_W'(reg_wdata);
          5'd5:  r_count   <= reg_wdata;
          5'd6:  r_b_base  <= LA_W'(reg_wdata);
          5'd7:  r_c_base  <= LA_W'(reg_wdata);
          5'd8:  r_npass   <= reg_wdata;
          5'd9:  r_colmask <= baddr_t'(reg_wdata);
          5'd10: r_rowmask <= baddr_t'(reg_wdata);
          5'd11: r_xmask[0] <= baddr_t'(reg_wdata);
          5'd12: r_xmask[1] <= baddr_t'(reg_wdata);
          5'd13: r_xmask[2] <= baddr_t'(reg_wdata);
          5'd14: r_xmask[3] <= baddr_t'(reg_wdata);
          5'd15: r_xtgt    <= N_EXTRA'(reg_wdata);
          default: ;
        endcase
      end

      if (rd_issue) issued <= issued + 1;

      unique case (ust)
        U_IDLE: ;
        U_FILL: begin
          if (fill_wr) begin
            wa <= wa + WA_W'(CW);
            if (ci == NCH - 1) begin
              ci <= '0;
              blocks_done <= blocks_done + 1;
            end else ci <= ci + 1'b1;
          end
          if (ag_started && (blocks_done == r_count || (!ag_busy && iq_empty))) begin
            ag_abort <= 1'b1;
            ust <= U_IDLE; r_done <= 1'b1; r_blocks <= blocks_done; r_err <= ag_err;
          end
        end
        U_DRAIN: begin
          d_rd_pend <= drain_rd;
          if (drain_rd) begin
            d_off <= $clog2(W)'(wa % W);
            wa    <= wa + WA_W'(CW);
          end
          if (d_rd_pend) begin
            for (int l = 0; l < CW; l++)
              d_blk[32*(int'(ci)*CW + l) +: 32] <= sp_rdata[int'(d_off) + l];
            if (ci == NCH - 1) begin
              ci <= '0;
              d_full <= 1'b1;
            end else ci <= ci + 1'b1;
          end
          if (d_full && ag_valid && mem_req_ready) begin
            d_full <= 1'b0;
            blocks_done <= blocks_done + 1;
          end
          if (ag_started && (blocks_done == r_count || (!ag_busy && !d_full))) begin
            ag_abort <= 1'b1;
            ust <= U_IDLE; r_done <= 1'b1; r_blocks <= blocks_done; r_err <= ag_err;
          end
        end
        U_GEMM: begin
          unique case (gst)
            G_IDLE: if (!iq_empty && !dq_empty) gst <= G_CRD;
            G_CRD:  gst <= G_CLD;
            G_CLD:  begin k <= '0; gst <= G_MAC; end
            G_MAC:  begin
              k <= k + 1'b1;
              if (k == 4'd15) gst <= G_CWR;
            end
            G_CWR:  begin
              // go straight on with the next pass or the next buffered block
              if (pass + 1 >= r_npass) begin
                pass <= '0;
                blocks_done <= blocks_done + 1;
                gst <= (iq_count >= QCW'(2) && dq_count >= QCW'(2)) ? G_CRD : G_IDLE;
              end else begin
                pass <= pass + 1;
                gst <= G_CRD;
              end
            end
            default: gst <= G_IDLE;
          endcase
          if (ag_started && !ag_busy && iq_empty && gst == G_IDLE) begin
            ust <= U_IDLE; r_done <= 1'b1; r_blocks <= blocks_done; r_err <= ag_err;
          end
        end
        default: ust <= U_IDLE;
      endcase
    end
  end

  // ---------------- register read ----------------
  logic            rd_sp_q;
  logic [$clog2(W)-1:0] rd_off_q;
  logic [31:0]     rd_reg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rvalid <= 1'b0;
      rd_sp_q    <= 1'b0;
      rd_off_q   <= '0;
      rd_reg_q   <= '0;
    end else begin
      reg_rvalid <= reg_re;
      rd_sp_q    <= reg_re && host_sp;
      rd_off_q   <= $clog2(W)'(host_wa % W);
      unique case (reg_addr[4:0])
        5'd1:  rd_reg_q <= {28'b0, r_map_err, r_err, r_done, ust != U_IDLE};
        5'd2:  rd_reg_q <= 32'(r_a_start);
        5'd3:  rd_reg_q <= 32'(r_a_end);
        5'd5:  rd_reg_q <= r_count;
        5'd8:  rd_reg_q <= r_npass;
        5'd16: rd_reg_q <= r_cycles;
        5'd17: rd_reg_q <= r_blocks;
        default: rd_reg_q <= '0;
      endcase
    end
  end
  assign reg_rdata = rd_sp_q ? sp_rdata[rd_off_q] : rd_reg_q;
  assign busy = (ust != U_IDLE);
  assign done = r_done;

  // A response may only arrive for a read that is in flight, so the operand buffer never
  // overflows.
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> !dq_full);
  // Every address this PIM generates must map to this PIM under the CPU's address mapping.
  // The decoder also drives STATUS bit3, a sticky flag the host can poll.
  pim_id_map u_idmap (.pa({mem_req_ba, 6'b0}), .pim_id(req_pim_id), .ch(), .rk(), .bg());
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid |-> req_pim_id == PIM_ID);
endmodule
