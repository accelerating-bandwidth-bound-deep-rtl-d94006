// tb_pim_id_map: checks the Skylake PIM ID decoder against the bit lists of the mapping,
// written out here independently, for random and walking-one physical addresses.
module tb_pim_id_map;
  import stepstone_pkg::*;
  logic [ADDR_W-1:0] pa;
  pimid_t pim_id;
  logic ch, rk;
  logic [1:0] bg;
  int checks = 0, failures = 0;

  pim_id_map dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] a);
    logic e_bg0, e_bg1, e_rk, e_ch;
    pa = a;
    #1;
    e_bg0 = a[7] ^ a[14];
    e_bg1 = a[15] ^ a[19];
    e_rk  = a[16] ^ a[20];
    e_ch  = a[8] ^ a[9] ^ a[12] ^ a[13] ^ a[18] ^ a[19];
    checks++;
    if (pim_id != {e_ch, e_rk, e_bg1, e_bg0} || ch != e_ch || rk != e_rk || bg != {e_bg1, e_bg0}) begin
      failures++;
      $display("pa %h: got %b expected %b", a, pim_id, {e_ch, e_rk, e_bg1, e_bg0});
    end
  endtask

  initial begin
    for (int b = 0; b < 32; b++) check(32'd1 << b);
    for (int t = 0; t < 500; t++) check($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
