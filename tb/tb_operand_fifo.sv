// tb_operand_fifo: random push/pop traffic on a 4-deep operand buffer against a queue model,
// checking order, the full/empty flags and the occupancy count every cycle.
module tb_operand_fifo;
  localparam int WIDTH = 40, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [WIDTH-1:0] din = '0, dout;
  logic [2:0] count;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0;

  operand_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fulls = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      checks++;
      if (count != 3'(q.size()) || full != (q.size() == DEPTH) || empty != (q.size() == 0) ||
          (q.size() > 0 && dout != q[0])) begin
        failures++;
        if (failures < 5) $display("t=%0d count %0d model %0d", t, count, q.size());
      end
      if (full) fulls++;
      push = (q.size() < DEPTH) && ($urandom_range(0, 99) < 55);
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < 45);
      din  = {$urandom, 8'($urandom)};
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
