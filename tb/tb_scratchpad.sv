// tb_scratchpad: random per-word writes and line reads of the 8 KB, 8-word-line scratchpad
// against an array model; checks the one-cycle read latency and that a same-cycle read of a
// line being written returns the old contents.
module tb_scratchpad;
  localparam int W = 8, SP_BYTES = 8192, LINES = SP_BYTES / (4 * W);
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [W-1:0][31:0] rdata, wdata = '0;
  logic [W-1:0] we = '0;
  logic [W-1:0][31:0] model [LINES];
  int checks = 0, failures = 0;

  scratchpad #(.W(W), .SP_BYTES(SP_BYTES)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every line
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk);
      we = '1; waddr = 8'(i);
      for (int l = 0; l < W; l++) wdata[l] = $urandom;
      model[i] = wdata;
    end
    @(negedge clk); we = '0;
    for (int t = 0; t < 4000; t++) begin
      logic [W-1:0][31:0] expv;
      @(negedge clk);
      re = 1; raddr = 8'($urandom_range(0, LINES - 1));
      we = W'($urandom); waddr = ($urandom_range(0, 3) == 0) ? raddr : 8'($urandom_range(0, LINES - 1));
      for (int l = 0; l < W; l++) wdata[l] = $urandom;
      expv = model[raddr];
      for (int l = 0; l < W; l++) if (we[l]) model[waddr][l] = wdata[l];
      @(negedge clk);
      re = 0; we = '0;
      checks++;
      if (rdata != expv) begin
        failures++;
        if (failures < 5) $display("line %0d read %h expected %h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
