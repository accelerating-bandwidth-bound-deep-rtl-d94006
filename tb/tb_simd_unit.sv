// tb_simd_unit: checks the 8-lane fp32 multiply-accumulate unit.
// Random sequences of load and broadcast MACs on small integers (exact in fp32) are compared
// with an integer model; directed cases check round-to-nearest-even on ties, cancellation to
// zero, overflow to infinity and the single-cycle accumulate timing.
module tb_simd_unit;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_acc = 0, mac = 0;
  logic [W-1:0][31:0] acc_in = '0, b = '0, acc;
  logic [31:0] a = '0;
  int checks = 0, failures = 0;
  int model [W];

  simd_unit #(.W(W)) dut (.*);

  function automatic logic [31:0] int2f(input int v);
    int m, e;
    logic s;
    if (v == 0) return 32'h0;
    s = (v < 0);
    m = s ? -v : v;
    e = 0;
    for (int i = 0; i < 31; i++) if (m >> i != 0) e = i;
    return {s, 8'(127 + e), 23'((m << (23 - e)) & 32'h7fffff)};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lane_check(input int l, input logic [31:0] e, input string what);
    checks++;
    if (acc[l] != e) begin
      failures++;
      $display("%s lane %0d: %h expected %h", what, l, acc[l], e);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      for (int l = 0; l < W; l++) begin
        model[l] = $urandom_range(0, 200) - 100;
        acc_in[l] = int2f(model[l]);
      end
      load_acc = 1;
      @(negedge clk);
      load_acc = 0;
      for (int k = 0; k < 16; k++) begin
        automatic int av = $urandom_range(0, 60) - 30;
        a = int2f(av);
        for (int l = 0; l < W; l++) begin
          automatic int bv = $urandom_range(0, 60) - 30;
          b[l] = int2f(bv);
          model[l] += av * bv;
        end
        mac = 1;
        @(negedge clk);
        mac = 0;
        // result visible right after the clock edge: one MAC per cycle
        for (int l = 0; l < W; l++) lane_check(l, int2f(model[l]), "random");
      end
    end
    // directed rounding / special cases, a = 1.0
    a = 32'h3f800000;
    acc_in = {W{32'h3f800000}};                  // 1.0
    load_acc = 1; @(negedge clk); load_acc = 0;
    b[0] = 32'h33800000;                          // 2^-24: tie, rounds to even -> 1.0
    b[1] = 32'h34400000;                          // 1.5 * 2^-23: tie, rounds up -> 1 + 2^-22
    b[2] = 32'hbf800000;                          // -1.0: exact zero
    b[3] = 32'h7f000000;                          // 2^127: stays finite
    b[4] = 32'h00400000;                          // subnormal input flushed: 1.0
    b[5] = 32'h3f800000;                          // 1.0
    b[6] = 32'h40400000;                          // 3.0
    b[7] = 32'h7f800000;                          // +inf
    mac = 1; @(negedge clk); mac = 0;
    lane_check(0, 32'h3f800000, "tie-even");
    lane_check(1, 32'h3f800002, "tie-up");
    lane_check(2, 32'h00000000, "cancel");
    lane_check(3, 32'h7f000000, "big");
    lane_check(4, 32'h3f800000, "ftz");
    lane_check(5, 32'h40000000, "two");
    lane_check(6, 32'h40800000, "four");
    lane_check(7, 32'h7f800000, "inf");
    a = 32'h7f000000;                             // 2^127 * 2^127 overflows to +inf
    b[3] = 32'h40000000;
    mac = 1; @(negedge clk); mac = 0;
    lane_check(3, 32'h7f800000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
