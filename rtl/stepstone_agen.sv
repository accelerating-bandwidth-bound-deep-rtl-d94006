// stepstone_agen: StepStone memory-side address generator.
//
// Walks, in ascending order and one address per cycle, every cache-block address in
// [start_ba, end_ba] whose parity constraints all hold: for each row r, parity(addr & mask[r])
// must equal tgt[r]. A PIM loads its four PIM-ID rows (the CPU's XOR address mapping with its
// own ID as targets) plus up to N_EXTRA rows that pin the block-group ID and, when a group is
// split into row or column partitions, the partition bits. The generated stream is exactly the
// "stones" of the matrix that are local to this PIM and belong to the selected group.
//
// How it works. The paper's increment-correct-and-check logic keeps the parity of the address
// bits behind each ID bit, corrects adjacent bits of the same ID instantly and forwards the
// carry across chains of ID bits. This block computes the same next address in closed form:
//   1. On load the constraint rows are brought to reduced echelon form (stepstone_pkg::
//      gj_reduce). Each row then owns one pivot bit, its lowest, and every other bit it names is
//      a free bit. Valid addresses are exactly "any free bits, pivots set by parity", and they
//      are ordered as their free bits are.
//   2. Next address: set all pivot bits to 1 and add one, so the carry jumps over the pivots
//      (carry forwarding); clear the pivots; then set each pivot to the parity its row needs
//      (instant correction). One adder and one parity tree per row, no iteration, so the next
//      address is always ready in the cycle after the previous one was taken.
// The first address is the smallest valid address >= start_ba (first_valid below).
//
// Interface: load (one-cycle pulse) captures cons/start_ba/end_ba; abort returns to idle; the stream appears on
// out_valid/out_ba with an out_ready handshake, one address per cycle while out_ready is high;
// busy stays high until the last address has been taken, and done pulses once then.
// Timing: load -> first out_valid is 2 cycles (reduce, then locate the first address).
// The closed-form computation and its timing are this design's choice; the paper gives the rules
// (instant correction, carry forwarding) and the claim that no pipeline bubble results.
module stepstone_agen
  import stepstone_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  logic   abort,        // stop the stream (count-limited transfers)
  input  cons_t  cons,
  input  baddr_t start_ba,
  input  baddr_t end_ba,
  output logic   busy,
  output logic   done,
  output logic   cfg_error,    // constraint rows contradict each other
  output logic   out_valid,
  input  logic   out_ready,
  output baddr_t out_ba,
  output cons_t  red_cons,     // reduced constraints, for index extraction downstream
  output baddr_t free_mask     // address bits that are not pivots
);

  typedef enum logic [1:0] {S_IDLE, S_FIRST, S_RUN} state_e;
  state_e state;

  cons_t  red_q;
  baddr_t piv_q;
  baddr_t start_q, end_q, cur_q;
  logic   cur_ok_q;           // cur_q holds a valid address (no overflow)

  logic   red_ok;
  cons_t  red_d;
  always_comb red_d = gj_reduce(cons, red_ok);

  // Set each pivot from the parity of its row's free bits.
  function automatic baddr_t fix_pivots(input baddr_t f, input cons_t r, input baddr_t piv);
    baddr_t y;
    baddr_t pbit;
    y = f & ~piv;
    for (int i = 0; i < N_ROWS; i++) begin
      pbit = r.mask[i] & (~r.mask[i] + baddr_t'(1));
      if ((^(y & r.mask[i])) != r.tgt[i]) y = y | pbit;
    end
    return y;
  endfunction

  // Next valid address strictly above a valid address a; ovf set when none fits in BA_W bits.
  function automatic logic [BA_W:0] next_valid(input baddr_t a, input cons_t r, input baddr_t piv);
    logic [BA_W:0] x;
    x = {1'b0, a | piv} + {{BA_W{1'b0}}, 1'b1};
    return {x[BA_W], fix_pivots(x[BA_W-1:0], r, piv)};
  endfunction

  // Smallest valid address >= s. A candidate keeps s above some bit j, raises bit j from 0 to
  // 1 (or, for j = -1, is s itself) and completes the bits below j as small as possible. It is
  // feasible when every row whose pivot is at or above j already holds on those upper bits;
  // rows with a lower pivot can always be met. The lowest feasible j gives the answer.
  function automatic logic [BA_W:0] first_valid(input baddr_t s, input cons_t r, input baddr_t piv);
    baddr_t pre, keep, pbit;
    logic   feas, found;
    baddr_t best;
    found = 1'b0;
    best  = '0;
    for (int j = BA_W - 1; j >= -1; j--) begin
      if (j < 0) begin
        pre  = s;
        keep = '1;
      end else begin
        pre  = s | (baddr_t'(1) << j);
        keep = ~((baddr_t'(1) << j) - baddr_t'(1));
      end
      feas = (j < 0) || !s[j];
      for (int i = 0; i < N_ROWS; i++) begin
        pbit = r.mask[i] & (~r.mask[i] + baddr_t'(1));
        if ((pbit & keep) != '0 && (^(pre & keep & r.mask[i])) != r.tgt[i]) feas = 1'b0;
      end
      if (feas) begin
        found = 1'b1;
        best  = fix_pivots(pre & keep, r, piv);
      end
    end
    return {!found, best};
  endfunction

  logic [BA_W:0] first_d, nx_cur;
  always_comb begin
    first_d = first_valid(start_q, red_q, piv_q);
    nx_cur  = next_valid(cur_q, red_q, piv_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      red_q     <= '0;
      piv_q     <= '0;
      start_q   <= '0;
      end_q     <= '0;
      cur_q     <= '0;
      cur_ok_q  <= 1'b0;
      cfg_error <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (abort) state <= S_IDLE;
      else unique case (state)
        S_IDLE: if (load) begin
          red_q     <= red_d;
          piv_q     <= pivots_of(red_d);
          start_q   <= start_ba;
          end_q     <= end_ba;
          cfg_error <= !red_ok;
          state     <= red_ok ? S_FIRST : S_IDLE;
          done      <= !red_ok;
        end
        S_FIRST: begin
          cur_q    <= first_d[BA_W-1:0];
          cur_ok_q <= !first_d[BA_W];
          state <= S_RUN;
        end
        S_RUN: begin
          if (!cur_ok_q || cur_q > end_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (out_ready) begin
            cur_q    <= nx_cur[BA_W-1:0];
            cur_ok_q <= !nx_cur[BA_W];
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_RUN) && cur_ok_q && (cur_q <= end_q);
  assign out_ba    = cur_q;
  assign red_cons  = red_q;
  assign free_mask = ~piv_q;

endmodule
