// copy_engine: host-side DMA of the PIM controller that accelerates localization and
// reduction.
//
// StepStone needs private copies of the input matrix B in every PIM that shares it
// (localization / replication) and must sum the partial results of C that several PIMs
// produce (reduction). The host software works out, from the address mapping, which PIM-local
// addresses a cache block goes to or comes from; this engine then moves the data without
// using CPU cores:
//   REPLICATE (op 0): read block src[0] once and write it to dst[0] .. dst[ndst-1].
//   REDUCE    (op 1): read blocks src[0] .. src[nsrc-1], add them word by word in fp32 and
//                     write the sum to dst[0].
// Reads are issued back to back and answered in order; 16 fp32 adders fold each returned
// block into an accumulator, so a reduction costs one memory access per source block.
// Interface: start pulses with op/nsrc/ndst/src/dst stable; busy while working; done pulses
// when the last write has been accepted. Memory port as in pim_unit.
// The paper gives the function ("a simple DMA engine at the PIM controller"; each block of B
// read once and copied to all its PIM-local addresses; reductions follow the same flow); the
// descriptor format and the datapath are this design's choice.
module copy_engine
  import stepstone_pkg::*;
#(
  parameter int unsigned MAXD = 16,
  localparam int unsigned DW  = $clog2(MAXD + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         op,          // 0 replicate, 1 reduce
  input  logic [DW-1:0] nsrc,
  input  logic [DW-1:0] ndst,
  input  baddr_t       src [MAXD],
  input  baddr_t       dst [MAXD],
  output logic         busy,
  output logic         done,
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output logic         mem_req_we,
  output baddr_t       mem_req_ba,
  output block_t       mem_req_wdata,
  input  logic         mem_rsp_valid,
  input  block_t       mem_rsp_rdata
);
  typedef enum logic [1:0] {C_IDLE, C_READ, C_WRITE} cstate_e;
  cstate_e st;
  logic [DW-1:0] nrd, nwr, issued, got, wrote;
  block_t        acc, sum;

  for (genvar w = 0; w < BLK_WORDS; w++) begin : g_add
    fp32_add u_add (.a(acc[32*w +: 32]), .b(mem_rsp_rdata[32*w +: 32]), .y(sum[32*w +: 32]));
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_ba    = '0;
    mem_req_wdata = acc;
    if (st == C_READ && issued < nrd) begin
      mem_req_valid = 1'b1;
      mem_req_ba    = src[issued];
    end else if (st == C_WRITE) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_ba    = dst[wrote];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; nrd <= '0; nwr <= '0;
      issued <= '0; got <= '0; wrote <= '0; acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          nrd    <= op ? nsrc : DW'(1);
          nwr    <= op ? DW'(1) : ndst;
          issued <= '0; got <= '0; wrote <= '0;
          st     <= C_READ;
        end
        C_READ: begin
          if (mem_req_valid && mem_req_ready) issued <= issued + 1'b1;
          if (mem_rsp_valid) begin
            acc <= (got == '0) ? mem_rsp_rdata : sum;
            got <= got + 1'b1;
            if (got + 1'b1 == nrd) st <= C_WRITE;
          end
        end
        C_WRITE: if (mem_req_ready) begin
          wrote <= wrote + 1'b1;
          if (wrote + 1'b1 == nwr) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
  assign busy = (st != C_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> (op ? nsrc : ndst) != '0);
endmodule
