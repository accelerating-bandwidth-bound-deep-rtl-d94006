// pim_id_map: CPU physical-address to PIM ID decoder under the Skylake XOR mapping.
//
// Each PIM ID bit is the XOR of a fixed set of physical address bits (Fig. 5(a) of the source
// paper): BG0 = a7^a14, BG1 = a15^a19, RK = a16^a20, CH = a8^a9^a12^a13^a18^a19, and
// pim_id = {CH, RK, BG1, BG0}. With one StepStone-BG PIM per bank group this names one of 16
// PIMs (2 channels x 2 ranks x 4 bank groups). The block is purely combinational; it is used by
// the host-side copy engine to steer blocks and by testbenches to check PIM locality.
module pim_id_map
  import stepstone_pkg::*;
(
  input  logic [ADDR_W-1:0] pa,
  output pimid_t            pim_id,
  output logic              ch,
  output logic              rk,
  output logic [1:0]        bg
);
  assign ch     = ^(pa & MASK_CH);
  assign rk     = ^(pa & MASK_RK);
  assign bg     = {^(pa & MASK_BG1), ^(pa & MASK_BG0)};
  assign pim_id = {ch, rk, bg};
endmodule
