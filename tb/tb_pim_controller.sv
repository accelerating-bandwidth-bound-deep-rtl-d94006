// tb_pim_controller: checks the host-side PIM controller with 16 register-file stand-ins for
// the PIMs. Covers forwarding of writes and reads to the selected PIM only, the read-data
// multiplexer, the PIM_DONE / PIM_BUSY status vectors, and a copy-engine REPLICATE and REDUCE
// programmed through the controller's own registers.
module tb_pim_controller;
  import stepstone_pkg::*;
  import gemm_ref_pkg::*;
  localparam int NP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cpu_we = 0, cpu_re = 0, cpu_rvalid;
  logic [24:0] cpu_addr = '0;
  logic [31:0] cpu_wdata = '0, cpu_rdata;
  logic [NP-1:0] pim_reg_we, pim_reg_re, pim_reg_rvalid, pim_busy = '0, pim_done = '0;
  logic [19:0] pim_reg_addr;
  logic [31:0] pim_reg_wdata, pim_reg_rdata [NP];
  logic req_valid, req_we;
  logic [0:0] req_ready, rsp_v;
  baddr_t req_ba, bav [1];
  block_t req_wdata, wdv [1], rdv [1];
  int id_errors;
  int checks = 0, failures = 0;

  pim_controller #(.NP(NP)) dut (
    .clk, .rst_n, .cpu_we, .cpu_re, .cpu_addr, .cpu_wdata, .cpu_rvalid, .cpu_rdata,
    .pim_reg_we, .pim_reg_re, .pim_reg_addr, .pim_reg_wdata, .pim_reg_rvalid, .pim_reg_rdata,
    .pim_busy, .pim_done,
    .mem_req_valid(req_valid), .mem_req_ready(req_ready[0]), .mem_req_we(req_we),
    .mem_req_ba(req_ba), .mem_req_wdata(req_wdata), .mem_rsp_valid(rsp_v[0]),
    .mem_rsp_rdata(rdv[0]));
  assign bav[0] = req_ba;
  assign wdv[0] = req_wdata;
  dram_model #(.NPORTS(1), .CHECK_ID(1'b0)) u_dram (
    .clk, .req_valid(req_valid), .req_ready, .req_we(req_we), .req_ba(bav), .req_wdata(wdv),
    .rsp_valid(rsp_v), .rsp_rdata(rdv), .id_errors);

  // PIM stand-ins: 32 registers each, read latency one cycle
  logic [31:0] regs [NP][32];
  for (genvar p = 0; p < NP; p++) begin : g_stub
    always @(posedge clk) begin
      pim_reg_rvalid[p] <= pim_reg_re[p];
      pim_reg_rdata[p]  <= regs[p][pim_reg_addr[4:0]];
      if (pim_reg_we[p]) regs[p][pim_reg_addr[4:0]] <= pim_reg_wdata;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [24:0] a, input logic [31:0] d);
    @(negedge clk); cpu_we = 1; cpu_addr = a; cpu_wdata = d;
    @(negedge clk); cpu_we = 0;
  endtask
  task automatic rd(input logic [24:0] a, output logic [31:0] d);
    @(negedge clk); cpu_re = 1; cpu_addr = a;
    @(negedge clk); cpu_re = 0;
    checks++;
    if (!cpu_rvalid) begin failures++; $display("no rvalid"); end
    d = cpu_rdata;
  endtask

  initial begin
    logic [31:0] v;
    for (int p = 0; p < NP; p++) for (int r = 0; r < 32; r++) regs[p][r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) for (int r = 0; r < 8; r++)
      wr({1'b0, 4'(p), 20'(r)}, 32'(p * 100 + r + 1));
    for (int p = 0; p < NP; p++) for (int r = 0; r < 8; r++) begin
      checks++;
      if (regs[p][r] != 32'(p * 100 + r + 1)) begin failures++; $display("pim %0d reg %0d not written", p, r); end
      rd({1'b0, 4'(p), 20'(r)}, v);
      checks++;
      if (v != 32'(p * 100 + r + 1)) begin failures++; $display("pim %0d reg %0d read %0d", p, r, v); end
    end
    for (int t = 0; t < 10; t++) begin
      automatic logic [15:0] d = 16'($urandom), b = 16'($urandom);
      pim_done = d; pim_busy = b;
      rd(25'h1000000, v);
      checks++; if (v != 32'(d)) begin failures++; $display("done vector"); end
      rd(25'h1000001, v);
      checks++; if (v != 32'(b)) begin failures++; $display("busy vector"); end
    end
    // copy engine: replicate one block to 3 places, then reduce them into one
    begin
      block_t b;
      for (int w = 0; w < 16; w++) b[32*w +: 32] = int2f(w - 5);
      u_dram.poke(baddr_t'(100), b);
      wr(25'h1000040, 100);
      wr(25'h1000080, 200); wr(25'h1000081, 201); wr(25'h1000082, 202);
      wr(25'h1000004, 3);
      wr(25'h1000002, 32'h1);
      do rd(25'h1000002, v); while (v[0]);
      for (int i = 0; i < 3; i++) begin
        checks++; if (u_dram.peek(baddr_t'(200 + i)) != b) begin failures++; $display("replica %0d", i); end
      end
      wr(25'h1000040, 200); wr(25'h1000041, 201); wr(25'h1000042, 202);
      wr(25'h1000080, 300);
      wr(25'h1000003, 3);
      wr(25'h1000002, 32'h3);
      do rd(25'h1000002, v); while (v[0]);
      for (int w = 0; w < 16; w++) begin
        checks++;
        if (u_dram.peek(baddr_t'(300))[32*w +: 32] != int2f(3 * (w - 5))) begin failures++; $display("reduce word %0d", w); end
      end
      rd(25'h1000005, v);
      checks++; if (v != 2) begin failures++; $display("ce count %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
