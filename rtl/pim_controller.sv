// pim_controller: host-side StepStone PIM controller, next to the CPU memory controller.
//
// The CPU drives it through a simple register bus. Accesses with cpu_addr[24] = 0 are
// forwarded to the memory-mapped registers of PIM cpu_addr[23:20] (register or scratchpad
// word cpu_addr[19:0], see pim_unit); this is the "PIM control signal" path. Each PIM's busy
// and done lines come back as the "status update" and are visible as two bit vectors, so the
// CPU can poll all 16 units with one read. Accesses with cpu_addr[24] = 1 reach the
// controller's own registers, which program the copy engine:
//   0 PIM_DONE (read)  1 PIM_BUSY (read)  2 CE_CTRL (write bit0 start, bit1 op; read bit0
//   busy)  3 CE_NSRC  4 CE_NDST  5 CE_COUNT (descriptors completed)  0x40+i CE_SRC[i]
//   0x80+i CE_DST[i]
// Reads return on cpu_rvalid one cycle after cpu_re.
// The paper names the controller, the copy engine inside it and the control/status paths to
// the PIMs; the bus, the register map and the polling vectors are this design's choice. The
// CPU's DDR4 memory controller, which carries both paths to the DIMMs, is outside this block:
// the copy engine's memory port is brought out.
module pim_controller
  import stepstone_pkg::*;
#(
  parameter int unsigned NP   = NUM_PIMS,
  parameter int unsigned MAXD = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // CPU side
  input  logic          cpu_we,
  input  logic          cpu_re,
  input  logic [24:0]   cpu_addr,
  input  logic [31:0]   cpu_wdata,
  output logic          cpu_rvalid,
  output logic [31:0]   cpu_rdata,
  // PIM side (register bus + status)
  output logic [NP-1:0] pim_reg_we,
  output logic [NP-1:0] pim_reg_re,
  output logic [19:0]   pim_reg_addr,
  output logic [31:0]   pim_reg_wdata,
  input  logic [NP-1:0] pim_reg_rvalid,
  input  logic [31:0]   pim_reg_rdata [NP],
  input  logic [NP-1:0] pim_busy,
  input  logic [NP-1:0] pim_done,
  // copy engine memory port (through the CPU memory controller)
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_we,
  output baddr_t        mem_req_ba,
  output block_t        mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  block_t        mem_rsp_rdata
);
  localparam int unsigned DW  = $clog2(MAXD + 1);
  localparam int unsigned PSW = (NP > 1) ? $clog2(NP) : 1;

  logic          local_acc;
  logic [PSW-1:0] psel;
  assign local_acc = cpu_addr[24];
  assign psel      = PSW'(cpu_addr[23:20]);

  // forwarding to PIMs
  always_comb begin
    pim_reg_we    = '0;
    pim_reg_re    = '0;
    pim_reg_addr  = cpu_addr[19:0];
    pim_reg_wdata = cpu_wdata;
    if (!local_acc) begin
      pim_reg_we[psel] = cpu_we;
      pim_reg_re[psel] = cpu_re;
    end
  end

  // copy engine registers
  logic          ce_start, ce_op, ce_busy, ce_done;
  logic [DW-1:0] ce_nsrc, ce_ndst;
  baddr_t        ce_src [MAXD];
  baddr_t        ce_dst [MAXD];
  logic [31:0]   ce_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ce_start <= 1'b0; ce_op <= 1'b0; ce_nsrc <= DW'(1); ce_ndst <= DW'(1); ce_count <= '0;
      for (int i = 0; i < MAXD; i++) begin
        ce_src[i] <= '0;
        ce_dst[i] <= '0;
      end
    end else begin
      ce_start <= 1'b0;
      if (ce_done) ce_count <= ce_count + 1;
      if (cpu_we && local_acc && !ce_busy && !ce_start) begin
        if (cpu_addr[7:0] == 8'd2) begin
          ce_start <= cpu_wdata[0];
          ce_op    <= cpu_wdata[1];
        end
        if (cpu_addr[7:0] == 8'd3) ce_nsrc <= DW'(cpu_wdata);
        if (cpu_addr[7:0] == 8'd4) ce_ndst <= DW'(cpu_wdata);
        if (cpu_addr[7:6] == 2'b01 && cpu_addr[5:0] < 6'(MAXD)) ce_src[cpu_addr[5:0]] <= baddr_t'(cpu_wdata);
        if (cpu_addr[7:6] == 2'b10 && cpu_addr[5:0] < 6'(MAXD)) ce_dst[cpu_addr[5:0]] <= baddr_t'(cpu_wdata);
      end
    end
  end

  copy_engine #(.MAXD(MAXD)) u_ce (
    .clk, .rst_n, .start(ce_start), .op(ce_op), .nsrc(ce_nsrc), .ndst(ce_ndst),
    .src(ce_src), .dst(ce_dst), .busy(ce_busy), .done(ce_done),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_ba, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata);

  // read path
  logic           rd_local_q;
  logic [PSW-1:0] rd_psel_q;
  logic [31:0]    rd_local_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cpu_rvalid <= 1'b0;
      rd_local_q <= 1'b0;
      rd_psel_q  <= '0;
      rd_local_data_q <= '0;
    end else begin
      cpu_rvalid <= cpu_re;
      rd_local_q <= local_acc;
      rd_psel_q  <= psel;
      unique case (cpu_addr[7:0])
        8'd0:    rd_local_data_q <= 32'(pim_done);
        8'd1:    rd_local_data_q <= 32'(pim_busy);
        8'd2:    rd_local_data_q <= {31'b0, ce_busy || ce_start};
        8'd5:    rd_local_data_q <= ce_count;
        default: rd_local_data_q <= '0;
      endcase
    end
  end
  assign cpu_rdata = rd_local_q ? rd_local_data_q : pim_reg_rdata[rd_psel_q];

  // a forwarded read must be answered by the selected PIM in the next cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   cpu_re && !local_acc |=> pim_reg_rvalid[rd_psel_q]);
endmodule
