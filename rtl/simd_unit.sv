// simd_unit: the PIM vector unit, a W-lane fp32 multiply-accumulate array.
//
// Each lane holds one accumulator. load_acc copies a W-word row of C (from the scratchpad)
// into the accumulators; mac adds a * b[l] to lane l, where a is one element of the weight
// matrix A broadcast to all lanes and b is a W-word row of the localized input matrix B. Lanes
// therefore span the batch dimension N, so the reuse of each weight grows with N up to the
// SIMD width, as the paper states for StepStone ("arithmetic intensity scales with N up to the
// SIMD width"). Multiply and add are combinational and the accumulators are registered: one
// mac per cycle, result visible on acc the cycle after. The broadcast organisation and the
// single-cycle datapath are this design's choices; the paper gives only the width (8 lanes for
// StepStone-BG, 32 for -DV, 256 for -CH).
module simd_unit #(
  parameter int unsigned W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load_acc,
  input  logic [W-1:0][31:0]   acc_in,
  input  logic                 mac,
  input  logic [31:0]          a,
  input  logic [W-1:0][31:0]   b,
  output logic [W-1:0][31:0]   acc
);
  logic [W-1:0][31:0] prod, sum;

  for (genvar l = 0; l < W; l++) begin : g_lane
    fp32_mul u_mul (.a(a), .b(b[l]), .y(prod[l]));
    fp32_add u_add (.a(acc[l]), .b(prod[l]), .y(sum[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (load_acc) acc <= acc_in;
    else if (mac)      acc <= sum;
  end

  // load and mac in the same cycle would drop one of them.
  assert property (@(posedge clk) disable iff (!rst_n) !(load_acc && mac));
endmodule
