// gemm_ref_pkg: testbench-side reference helpers for StepStone GEMM tests (not part of the
// design). Builds small-integer fp32 operands (so every product and sum is exact and the
// expected result can be formed with integer arithmetic), evaluates parity constraints by brute
// force, and plays the role of the host software that localizes B for a PIM and block group.
package gemm_ref_pkg;
  import stepstone_pkg::*;

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

  function automatic bit satisfies(input baddr_t a, input cons_t c);
    for (int i = 0; i < N_ROWS; i++)
      if ((^(a & c.mask[i])) != c.tgt[i]) return 1'b0;
    return 1'b1;
  endfunction

  // Constraint set of one PIM plus extra group / partition rows.
  function automatic cons_t make_cons(input int pid, input baddr_t xm [N_EXTRA],
                                      input logic [N_EXTRA-1:0] xt);
    cons_t c;
    c = '0;
    for (int i = 0; i < PIMID_W; i++) begin
      c.mask[i] = pim_mask(i);
      c.tgt[i]  = pid[i];
    end
    for (int i = 0; i < N_EXTRA; i++) begin
      c.mask[PIMID_W+i] = xm[i];
      c.tgt[PIMID_W+i]  = xt[i];
    end
    return c;
  endfunction
endpackage
