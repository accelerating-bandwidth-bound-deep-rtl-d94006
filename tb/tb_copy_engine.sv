// tb_copy_engine: checks the localization / reduction DMA against the DRAM model.
// REPLICATE: one random block copied to 1..16 random destinations, the source read exactly
// once. REDUCE: 1..16 blocks of small-integer fp32 words summed word by word and written to
// one destination, compared with an integer sum. Also checks that the engine issues one read
// per source block and one write per destination.
module tb_copy_engine;
  import stepstone_pkg::*;
  import gemm_ref_pkg::*;
  localparam int MAXD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, op = 0, busy, done;
  logic [4:0] nsrc = 1, ndst = 1;
  baddr_t src [MAXD], dst [MAXD];
  logic req_valid, req_we, rsp_valid;
  logic [0:0] req_ready, rsp_v;
  baddr_t req_ba, bav [1];
  block_t req_wdata, wdv [1], rdv [1];
  int id_errors;
  int checks = 0, failures = 0, nreads = 0, nwrites = 0;

  copy_engine #(.MAXD(MAXD)) dut (
    .clk, .rst_n, .start, .op, .nsrc, .ndst, .src, .dst, .busy, .done,
    .mem_req_valid(req_valid), .mem_req_ready(req_ready[0]), .mem_req_we(req_we),
    .mem_req_ba(req_ba), .mem_req_wdata(req_wdata), .mem_rsp_valid(rsp_v[0]),
    .mem_rsp_rdata(rdv[0]));
  assign bav[0] = req_ba;
  assign wdv[0] = req_wdata;
  dram_model #(.NPORTS(1), .CHECK_ID(1'b0)) u_dram (
    .clk, .req_valid(req_valid), .req_ready, .req_we(req_we), .req_ba(bav), .req_wdata(wdv),
    .rsp_valid(rsp_v), .rsp_rdata(rdv), .id_errors);

  always @(posedge clk) if (req_valid && req_ready[0]) begin
    if (req_we) nwrites++;
    else nreads++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic go(input logic o);
    @(negedge clk);
    op = o; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      block_t b;
      automatic int n = $urandom_range(1, MAXD);
      for (int w = 0; w < 16; w++) b[32*w +: 32] = $urandom;
      src[0] = baddr_t'(t * 1000);
      u_dram.poke(src[0], b);
      for (int i = 0; i < n; i++) dst[i] = baddr_t'(t * 1000 + 1 + i * 7);
      ndst = 5'(n);
      nreads = 0; nwrites = 0;
      go(1'b0);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (u_dram.peek(dst[i]) != b) begin failures++; $display("replicate %0d dst %0d", t, i); end
      end
      checks++;
      if (nreads != 1 || nwrites != n) begin failures++; $display("replicate %0d: %0d reads %0d writes", t, nreads, nwrites); end
    end
    for (int t = 0; t < 30; t++) begin
      automatic int n = $urandom_range(1, MAXD);
      int s [16];
      for (int w = 0; w < 16; w++) s[w] = 0;
      for (int i = 0; i < n; i++) begin
        block_t b;
        for (int w = 0; w < 16; w++) begin
          automatic int v = $urandom_range(0, 2000) - 1000;
          s[w] += v;
          b[32*w +: 32] = int2f(v);
        end
        src[i] = baddr_t'(50000 + t * 100 + i);
        u_dram.poke(src[i], b);
      end
      dst[0] = baddr_t'(90000 + t);
      nsrc = 5'(n);
      nreads = 0; nwrites = 0;
      go(1'b1);
      for (int w = 0; w < 16; w++) begin
        checks++;
        if (u_dram.peek(dst[0])[32*w +: 32] != int2f(s[w])) begin
          failures++;
          $display("reduce %0d word %0d: %h expected %h", t, w, u_dram.peek(dst[0])[32*w +: 32], int2f(s[w]));
        end
      end
      checks++;
      if (nreads != n || nwrites != 1) begin failures++; $display("reduce %0d: %0d reads %0d writes", t, nreads, nwrites); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
