// stepstone_top: a StepStone-BG main-memory GEMM accelerator system.
//
// Sixteen PIM units, one per DRAM bank group of a two-channel, two-rank memory system
// (PIM ID = {CH, RK, BG1, BG0} under the Skylake XOR mapping), and the host-side PIM
// controller with its copy engine. The CPU programs everything through the controller's
// register bus: it localizes B (copy engine REPLICATE or direct scratchpad writes), starts
// FILL / GEMM / DRAIN kernels in every PIM that holds part of the weight matrix, polls the
// PIM_DONE vector, and reduces the partial C results (copy engine REDUCE).
//
// The DRAM itself and the CPU's memory controller are not part of this RTL. Each PIM's memory
// port (its bank group's data path) and the copy engine's port (the CPU memory controller)
// are brought out, indexed by PIM ID. All ports address the same physical space.
//
// Defaults are the paper's StepStone-BG numbers: 16 PIMs, 8-wide SIMD, 8 KB scratchpad per
// PIM. W / SP_BYTES of 32 / 32768 give the StepStone-DV unit and 256 / 262144 the StepStone-CH
// unit, though the mapping of units to the memory hierarchy here stays bank-group level.
// The operand buffer depth is this design's choice.
module stepstone_top
  import stepstone_pkg::*;
#(
  parameter int unsigned W         = 8,
  parameter int unsigned SP_BYTES  = 8192,
  parameter int unsigned OPQ_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CPU register bus
  input  logic                 cpu_we,
  input  logic                 cpu_re,
  input  logic [24:0]          cpu_addr,
  input  logic [31:0]          cpu_wdata,
  output logic                 cpu_rvalid,
  output logic [31:0]          cpu_rdata,
  // per-PIM memory ports (bank-group data paths)
  output logic [NUM_PIMS-1:0]  pim_mem_req_valid,
  input  logic [NUM_PIMS-1:0]  pim_mem_req_ready,
  output logic [NUM_PIMS-1:0]  pim_mem_req_we,
  output baddr_t               pim_mem_req_ba    [NUM_PIMS],
  output block_t               pim_mem_req_wdata [NUM_PIMS],
  input  logic [NUM_PIMS-1:0]  pim_mem_rsp_valid,
  input  block_t               pim_mem_rsp_rdata [NUM_PIMS],
  // copy engine port (through the CPU memory controller)
  output logic                 ce_mem_req_valid,
  input  logic                 ce_mem_req_ready,
  output logic                 ce_mem_req_we,
  output baddr_t               ce_mem_req_ba,
  output block_t               ce_mem_req_wdata,
  input  logic                 ce_mem_rsp_valid,
  input  block_t               ce_mem_rsp_rdata
);
  logic [NUM_PIMS-1:0] reg_we, reg_re, reg_rvalid, busy, done;
  logic [19:0]         reg_addr;
  logic [31:0]         reg_wdata;
  logic [31:0]         reg_rdata [NUM_PIMS];

  pim_controller #(.NP(NUM_PIMS)) u_ctrl (
    .clk, .rst_n, .cpu_we, .cpu_re, .cpu_addr, .cpu_wdata, .cpu_rvalid, .cpu_rdata,
    .pim_reg_we(reg_we), .pim_reg_re(reg_re), .pim_reg_addr(reg_addr),
    .pim_reg_wdata(reg_wdata), .pim_reg_rvalid(reg_rvalid), .pim_reg_rdata(reg_rdata),
    .pim_busy(busy), .pim_done(done),
    .mem_req_valid(ce_mem_req_valid), .mem_req_ready(ce_mem_req_ready),
    .mem_req_we(ce_mem_req_we), .mem_req_ba(ce_mem_req_ba), .mem_req_wdata(ce_mem_req_wdata),
    .mem_rsp_valid(ce_mem_rsp_valid), .mem_rsp_rdata(ce_mem_rsp_rdata));

  for (genvar p = 0; p < NUM_PIMS; p++) begin : g_pim
    pim_unit #(.W(W), .SP_BYTES(SP_BYTES), .OPQ_DEPTH(OPQ_DEPTH), .PIM_ID(pimid_t'(p))) u_pim (
      .clk, .rst_n,
      .reg_we(reg_we[p]), .reg_re(reg_re[p]), .reg_addr, .reg_wdata,
      .reg_rvalid(reg_rvalid[p]), .reg_rdata(reg_rdata[p]), .busy(busy[p]), .done(done[p]),
      .mem_req_valid(pim_mem_req_valid[p]), .mem_req_ready(pim_mem_req_ready[p]),
      .mem_req_we(pim_mem_req_we[p]), .mem_req_ba(pim_mem_req_ba[p]),
      .mem_req_wdata(pim_mem_req_wdata[p]),
      .mem_rsp_valid(pim_mem_rsp_valid[p]), .mem_rsp_rdata(pim_mem_rsp_rdata[p]));
  end
endmodule
