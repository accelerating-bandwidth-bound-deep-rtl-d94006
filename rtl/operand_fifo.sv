// operand_fifo: the PIM's DRAM operand buffer, a small first-in first-out queue.
//
// Holds cache blocks of the weight matrix A (and, in a second instance, their scratchpad
// indices) between the DRAM read responses and the vector unit, so reads can be issued ahead
// of the computation and DRAM latency is hidden. Valid/ready on both sides; count tells the
// requester how many entries are taken so it never has more reads in flight than free slots.
// Push and pop may happen in the same cycle. Depth 4 is this design's choice: the paper's
// block diagram draws the buffer but gives no size.
module operand_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [CW-1:0]    count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rp, wp;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full  = (count == CW'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= inc(wp);
      if (pop && !empty) rp <= inc(rp);
      count <= count + CW'(push && !full) - CW'(pop && !empty);
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[wp] <= din;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
