// tb_stepstone_agen: self-checking test of the StepStone address generator.
//
// For each case the expected stream is found by brute force: every cache-block address in the
// range is tested against the raw (unreduced) parity constraints. The generated stream must
// match it address for address, and must arrive at one address per cycle once started.
// Cases: the paper's Fig. 5 example (a 16x512 fp32 matrix at address 0, Skylake mapping, every
// PIM and both group-ID bits), randomised targets with partition rows, random start/end
// offsets, contradictory constraints, and back-pressure on out_ready.
module tb_stepstone_agen;
  import stepstone_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   load = 1'b0;
  logic   abort = 1'b0;
  cons_t  cons;
  baddr_t start_ba, end_ba;
  logic   busy, done, cfg_error, out_valid, out_ready;
  baddr_t out_ba;
  cons_t  red_cons;
  baddr_t free_mask;

  int checks = 0;
  int failures = 0;

  stepstone_agen dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit satisfies(input baddr_t a, input cons_t c);
    for (int i = 0; i < N_ROWS; i++)
      if ((^(a & c.mask[i])) != c.tgt[i]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic run_case(input cons_t c, input baddr_t s, input baddr_t e, input bit stall,
                          input string name);
    baddr_t exp_q[$];
    int got, cyc, first_cyc, last_cyc;
    bit err;
    for (baddr_t a = s; a <= e; a++) if (satisfies(a, c)) exp_q.push_back(a);
    @(negedge clk);
    cons = c; start_ba = s; end_ba = e; load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    got = 0; cyc = 0; err = 1'b0; first_cyc = -1; last_cyc = 0;
    while (!done && cyc < 100000) begin
      out_ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        if (got >= exp_q.size() || out_ba != exp_q[got]) begin
          if (!err) $display("%s: mismatch at #%0d got %h", name, got, out_ba);
          err = 1'b1;
        end
        if (first_cyc < 0) first_cyc = cyc;
        last_cyc = cyc;
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (err || got != exp_q.size()) begin
      failures++;
      $display("%s: FAIL got %0d expected %0d", name, got, exp_q.size());
    end
    if (!stall && got > 1) begin
      checks++;
      if (last_cyc - first_cyc != got - 1) begin
        failures++;
        $display("%s: rate FAIL %0d addresses in %0d cycles", name, got, last_cyc - first_cyc + 1);
      end
    end
  endtask

  cons_t c;
  initial begin
    out_ready = 1'b1;
    cons = '0; start_ba = '0; end_ba = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Fig. 5: 16 x 512 fp32 matrix at PA 0 -> block addresses 0..511.
    // Group ID rows: GP0 = a14, GP1 = a12^a13^a18^a19 (physical bits, shifted to block bits).
    for (int pid = 0; pid < NUM_PIMS; pid++)
      for (int g = 0; g < 4; g++) begin
        c = '0;
        for (int i = 0; i < PIMID_W; i++) begin
          c.mask[i] = pim_mask(i);
          c.tgt[i]  = pid[i];
        end
        c.mask[PIMID_W]   = baddr_t'(1) << (14 - 6);
        c.tgt[PIMID_W]    = g[0];
        c.mask[PIMID_W+1] = (baddr_t'(1) << 6) | (baddr_t'(1) << 7) | (baddr_t'(1) << 12) | (baddr_t'(1) << 13);
        c.tgt[PIMID_W+1]  = g[1];
        run_case(c, 0, 511, 1'b0, $sformatf("fig5 pim%0d grp%0d", pid, g));
      end

    // PIM-ID rows only, larger region, random PIM, random start/end.
    for (int t = 0; t < 40; t++) begin
      baddr_t s, e;
      c = '0;
      for (int i = 0; i < PIMID_W; i++) begin
        c.mask[i] = pim_mask(i);
        c.tgt[i]  = 1'($urandom);
      end
      for (int i = PIMID_W; i < N_ROWS; i++)
        if ($urandom_range(0, 1) != 0) begin
          c.mask[i] = baddr_t'($urandom) & baddr_t'(20'hfffff);
          c.tgt[i]  = 1'($urandom);
        end
      s = baddr_t'($urandom_range(0, 3000));
      e = s + baddr_t'($urandom_range(0, 6000));
      run_case(c, s, e, t % 3 == 0, $sformatf("rand%0d", t));
    end

    // Contradictory rows: the same mask with two targets.
    c = '0;
    c.mask[0] = 26'h5; c.tgt[0] = 1'b0;
    c.mask[1] = 26'h5; c.tgt[1] = 1'b1;
    @(negedge clk); cons = c; start_ba = 0; end_ba = 100; load = 1'b1;
    @(negedge clk); load = 1'b0;
    @(negedge clk);
    checks++;
    if (!cfg_error || busy) begin
      failures++;
      $display("contradiction not flagged");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
