// tb_stepstone_top: end-to-end test of the StepStone-BG system at its default sizes
// (16 PIMs, 8-wide SIMD, 8 KB scratchpads) running one complete GEMM, C = A x B, with the
// weight matrix A (M x K fp32, row-major at physical address 0) left in place in the CPU's
// XOR-interleaved memory. The testbench is the host software of the group-based flow:
//   1. Work out the block groups: a PIM-ID bit whose XOR set holds both row (MROW) and
//      column (MCOL) address bits of A splits each PIM's share into groups. A column bit is
//      pinned by one more constraint row to split every group into two column partitions.
//   2. localize(B): for every row of B, one copy-engine REPLICATE writes it to the PIM-local
//      B region of each (PIM, group, partition) that uses it.
//   3. localize(C): clear the C area of every scratchpad through the direct scratchpad window.
//   4. For each group and partition: FILL B into all scratchpads, then GEMM in all PIMs.
//   5. DRAIN C of every PIM to its local C region, then reduce(C): one copy-engine REDUCE per
//      row of C sums the partial rows of the PIMs that share it.
// C is compared with an integer reference (operands are small integers, exact in fp32). The
// testbench counts each mechanism (replication, reduction, fill, drain, GEMM, partition
// switch, multi-pass batch, AGEN address skips, operand-buffer full, DRAM back-pressure,
// direct scratchpad access) and fails if one never happened. It also checks the GEMM cycle
// count of every PIM (19 cycles per block and pass) and that no PIM touched another PIM's
// memory.
module tb_stepstone_top;
  import stepstone_pkg::*;
  import gemm_ref_pkg::*;

  localparam int M = 64, K = 512, N = 16, W = 8;
  localparam int NP = (N + W - 1) / W;
  localparam int CB = K / 16;                  // column blocks per row
  localparam int NBLK = M * CB;
  localparam baddr_t COLMASK = baddr_t'(CB - 1);
  localparam baddr_t ROWMASK = baddr_t'((M - 1) * CB);
  localparam baddr_t B_SRC = baddr_t'(32'h20000);
  localparam baddr_t C_OUT = baddr_t'(32'h30000);
  localparam baddr_t LB_START = baddr_t'(32'h4000);   // PIM-local B regions
  localparam baddr_t LC_START = baddr_t'(32'h6000);   // PIM-local C regions
  localparam int C_LINE = 128;                 // scratchpad line where C starts

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_we = 0, cpu_re = 0, cpu_rvalid;
  logic [24:0] cpu_addr = '0;
  logic [31:0] cpu_wdata = '0, cpu_rdata;
  logic [NUM_PIMS:0] req_valid, req_ready, req_we, rsp_valid;
  baddr_t req_ba [NUM_PIMS+1];
  block_t req_wdata [NUM_PIMS+1], rsp_rdata [NUM_PIMS+1];
  baddr_t p_ba [NUM_PIMS];
  block_t p_wd [NUM_PIMS], p_rd [NUM_PIMS];
  int id_errors;

  stepstone_top dut (
    .clk, .rst_n, .cpu_we, .cpu_re, .cpu_addr, .cpu_wdata, .cpu_rvalid, .cpu_rdata,
    .pim_mem_req_valid(req_valid[NUM_PIMS-1:0]), .pim_mem_req_ready(req_ready[NUM_PIMS-1:0]),
    .pim_mem_req_we(req_we[NUM_PIMS-1:0]), .pim_mem_req_ba(p_ba), .pim_mem_req_wdata(p_wd),
    .pim_mem_rsp_valid(rsp_valid[NUM_PIMS-1:0]), .pim_mem_rsp_rdata(p_rd),
    .ce_mem_req_valid(req_valid[NUM_PIMS]), .ce_mem_req_ready(req_ready[NUM_PIMS]),
    .ce_mem_req_we(req_we[NUM_PIMS]), .ce_mem_req_ba(req_ba[NUM_PIMS]),
    .ce_mem_req_wdata(req_wdata[NUM_PIMS]), .ce_mem_rsp_valid(rsp_valid[NUM_PIMS]),
    .ce_mem_rsp_rdata(rsp_rdata[NUM_PIMS]));

  for (genvar p = 0; p < NUM_PIMS; p++) begin : g_port
    assign req_ba[p]    = p_ba[p];
    assign req_wdata[p] = p_wd[p];
    assign p_rd[p]      = rsp_rdata[p];
  end

  dram_model #(.NPORTS(NUM_PIMS + 1)) u_dram (
    .clk, .req_valid, .req_ready, .req_we, .req_ba, .req_wdata, .rsp_valid, .rsp_rdata,
    .id_errors);

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism monitors ----------------
  int n_skip = 0, n_opq_full = 0, n_backpressure = 0;
  baddr_t last_rd [NUM_PIMS];
  logic   last_ok [NUM_PIMS];
  initial for (int p = 0; p < NUM_PIMS; p++) last_ok[p] = 1'b0;
  always @(posedge clk) begin
    for (int p = 0; p < NUM_PIMS; p++)
      if (req_valid[p] && req_ready[p] && !req_we[p]) begin
        if (last_ok[p] && req_ba[p] > last_rd[p] + 1) n_skip++;
        last_rd[p] = req_ba[p];
        last_ok[p] = 1'b1;
      end
    if (req_valid[NUM_PIMS-1:0] & ~req_ready[NUM_PIMS-1:0]) n_backpressure++;
    if (dut.g_pim[0].u_pim.iq_count == 3'd4) n_opq_full++;
  end

  // ---------------- host bus ----------------
  task automatic wr(input logic [24:0] a, input logic [31:0] d);
    @(negedge clk); cpu_we = 1; cpu_addr = a; cpu_wdata = d;
    @(negedge clk); cpu_we = 0;
  endtask
  task automatic rd(input logic [24:0] a, output logic [31:0] d);
    @(negedge clk); cpu_re = 1; cpu_addr = a;
    @(negedge clk); cpu_re = 0;
    d = cpu_rdata;
  endtask
  function automatic logic [24:0] preg(input int p, input int r);
    return {1'b0, 4'(p), 20'(r)};
  endfunction
  localparam logic [24:0] CTRL = 25'h1000000;

  task automatic wait_pims();
    logic [31:0] v;
    do rd(CTRL + 1, v); while (v[15:0] != 0);
    rd(CTRL + 0, v);
    checks++;
    if (v[15:0] != 16'hffff) begin failures++; $display("PIM_DONE %h", v); end
  endtask
  task automatic wait_ce();
    logic [31:0] v;
    do rd(CTRL + 2, v); while (v[0]);
  endtask

  // ---------------- data and host-side bookkeeping ----------------
  int A [M][K];
  int B [K][N];
  baddr_t gmask [N_EXTRA];
  int ngrp_bits;
  baddr_t llist [NUM_PIMS][$];        // PIM-local block addresses from LB_START
  baddr_t clist [NUM_PIMS][$];        // PIM-local block addresses from LC_START
  int rows_of [NUM_PIMS][4][$];       // rows of (PIM, group), ascending
  int cbs_of  [NUM_PIMS][4][2][$];    // column blocks of (PIM, group, partition)
  int n_fill = 0, n_gemm = 0, n_drain = 0, n_rep = 0, n_red = 0, n_part = 0, n_multi = 0, n_win = 0;

  function automatic cons_t cons_of(input int p, input int g, input int cp);
    baddr_t xm [N_EXTRA];
    logic [N_EXTRA-1:0] xt;
    for (int i = 0; i < N_EXTRA; i++) xm[i] = '0;
    xt = '0;
    for (int i = 0; i < ngrp_bits; i++) begin
      xm[i] = gmask[i];
      xt[i] = g[i];
    end
    xm[ngrp_bits] = baddr_t'(CB / 2);       // column partition: top MCOL bit
    xt[ngrp_bits] = cp[0];
    return make_cons(p, xm, xt);
  endfunction

  initial begin
    logic [31:0] v;
    cons_t c;
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) A[i][j] = $urandom_range(0, 8) - 4;
    for (int j = 0; j < K; j++) for (int n = 0; n < N; n++) B[j][n] = $urandom_range(0, 8) - 4;
    for (int a = 0; a < NBLK; a++) begin
      block_t b;
      for (int w = 0; w < 16; w++) b[32*w +: 32] = int2f(A[a / CB][(a % CB) * 16 + w]);
      u_dram.poke(baddr_t'(a), b);
    end
    for (int j = 0; j < K; j++) begin
      block_t b;
      for (int w = 0; w < 16; w++) b[32*w +: 32] = int2f(B[j][w]);
      u_dram.poke(B_SRC + baddr_t'(j), b);
    end

    // 1. group bits
    ngrp_bits = 0;
    for (int i = 0; i < N_EXTRA; i++) gmask[i] = '0;
    for (int j = 0; j < PIMID_W; j++)
      if ((pim_mask(j) & COLMASK) != 0 && (pim_mask(j) & ROWMASK) != 0) begin
        gmask[ngrp_bits] = pim_mask(j) & ROWMASK;
        ngrp_bits++;
      end
    checks++;
    if (ngrp_bits != 2) begin failures++; $display("expected 2 group bits, found %0d", ngrp_bits); end
    for (int p = 0; p < NUM_PIMS; p++) begin
      for (baddr_t a = LB_START; llist[p].size() < 1024; a++)
        if (pim_id_of({a, 6'b0}) == pimid_t'(p)) llist[p].push_back(a);
      for (baddr_t a = LC_START; clist[p].size() < 64; a++)
        if (pim_id_of({a, 6'b0}) == pimid_t'(p)) clist[p].push_back(a);
      for (int g = 0; g < 4; g++)
        for (int cp = 0; cp < 2; cp++) begin
          c = cons_of(p, g, cp);
          for (int a = 0; a < NBLK; a++)
            if (satisfies(baddr_t'(a), c)) begin
              automatic int r = a / CB, q = a % CB;
              automatic bit seen = 0;
              foreach (rows_of[p][g][x]) if (rows_of[p][g][x] == r) seen = 1;
              if (!seen) rows_of[p][g].push_back(r);
              seen = 0;
              foreach (cbs_of[p][g][cp][x]) if (cbs_of[p][g][cp][x] == q) seen = 1;
              if (!seen) cbs_of[p][g][cp].push_back(q);
            end
        end
    end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 2. localize(B) with the copy engine
    for (int j = 0; j < K; j++) begin
      automatic int nd = 0;
      wr(CTRL + 8'h40, 32'(B_SRC + baddr_t'(j)));
      for (int p = 0; p < NUM_PIMS; p++)
        for (int g = 0; g < 4; g++)
          for (int cp = 0; cp < 2; cp++)
            foreach (cbs_of[p][g][cp][x])
              if (cbs_of[p][g][cp][x] == j / 16) begin
                automatic int li = (g * 2 + cp) * 64 + x * 16 + j % 16;
                wr(CTRL + 8'h80 + 25'(nd), 32'(llist[p][li]));
                nd++;
              end
      if (j == 0) $display("B row 0 is replicated to %0d PIM-local addresses (%0d group bits)", nd, ngrp_bits);
      wr(CTRL + 4, 32'(nd));
      wr(CTRL + 2, 32'h1);
      wait_ce();
      n_rep++;
    end

    // 3. localize(C): zero the C lines through the scratchpad window
    for (int p = 0; p < NUM_PIMS; p++)
      for (int w = 0; w < 4 * 4 * NP * W; w++) begin
        wr(preg(p, 32'h80000 + C_LINE * W + w), 32'h0);
        n_win++;
      end

    // 4. groups and column partitions
    for (int g = 0; g < 4; g++)
      for (int cp = 0; cp < 2; cp++) begin
        for (int p = 0; p < NUM_PIMS; p++) begin
          wr(preg(p, 2), 32'(llist[p][(g * 2 + cp) * 64]));
          wr(preg(p, 4), 0);
          wr(preg(p, 5), 64);
          wr(preg(p, 0), 1);
        end
        wait_pims();
        n_fill++;
        for (int p = 0; p < NUM_PIMS; p++) begin
          c = cons_of(p, g, cp);
          wr(preg(p, 2), 0);
          wr(preg(p, 3), NBLK - 1);
          wr(preg(p, 6), 0);
          wr(preg(p, 7), 32'(C_LINE + g * 4 * NP));
          wr(preg(p, 8), NP);
          wr(preg(p, 9), 32'(COLMASK));
          wr(preg(p, 10), 32'(ROWMASK));
          for (int i = 0; i < N_EXTRA; i++) wr(preg(p, 11 + i), 32'(c.mask[PIMID_W + i]));
          wr(preg(p, 15), 32'(c.tgt[PIMID_W +: N_EXTRA]));
          wr(preg(p, 0), 3);
        end
        wait_pims();
        n_gemm++;
        if (cp == 1) n_part++;
        if (NP > 1) n_multi++;
        for (int p = 0; p < NUM_PIMS; p++) begin
          automatic int nb = rows_of[p][g].size() * cbs_of[p][g][cp].size();
          rd(preg(p, 17), v);
          checks++;
          if (int'(v) != nb) begin failures++; $display("pim %0d g%0d cp%0d: %0d blocks, expected %0d", p, g, cp, v, nb); end
          rd(preg(p, 16), v);
          checks++;
          if (int'(v) > 19 * NP * nb + 40) begin failures++; $display("pim %0d: GEMM took %0d cycles for %0d blocks", p, v, nb); end
        end
      end

    // 5. DRAIN C, then reduce(C)
    for (int p = 0; p < NUM_PIMS; p++) begin
      wr(preg(p, 2), 32'(LC_START));
      wr(preg(p, 4), C_LINE * W);
      wr(preg(p, 5), 4 * 4 * NP * W / 16);
      wr(preg(p, 0), 2);
    end
    wait_pims();
    n_drain++;
    for (int i = 0; i < M; i++) begin
      automatic int ns = 0;
      for (int p = 0; p < NUM_PIMS; p++)
        for (int g = 0; g < 4; g++)
          foreach (rows_of[p][g][x])
            if (rows_of[p][g][x] == i) begin
              // one C row = NP lines = one cache block when NP * W == 16
              wr(CTRL + 8'h40 + 25'(ns), 32'(clist[p][g * 4 + x]));
              ns++;
            end
      wr(CTRL + 8'h80, 32'(C_OUT + baddr_t'(i)));
      wr(CTRL + 3, 32'(ns));
      wr(CTRL + 2, 32'h3);
      wait_ce();
      n_red++;
    end

    // check C
    for (int i = 0; i < M; i++)
      for (int n = 0; n < N; n++) begin
        automatic int s = 0;
        for (int j = 0; j < K; j++) s += A[i][j] * B[j][n];
        checks++;
        if (u_dram.peek(C_OUT + baddr_t'(i))[32*n +: 32] != int2f(s)) begin
          failures++;
          if (failures < 10) $display("C[%0d][%0d] = %h expected %h", i, n, u_dram.peek(C_OUT + baddr_t'(i))[32*n +: 32], int2f(s));
        end
      end
    checks++;
    if (id_errors != 0) failures++;

    $display("mechanisms: replicate=%0d reduce=%0d fill=%0d gemm=%0d drain=%0d col_partition=%0d multi_pass=%0d agen_skip=%0d opq_full=%0d dram_backpressure=%0d sp_window=%0d",
             n_rep, n_red, n_fill, n_gemm, n_drain, n_part, n_multi, n_skip, n_opq_full, n_backpressure, n_win);
    checks++; if (n_rep == 0) failures++;
    checks++; if (n_red == 0) failures++;
    checks++; if (n_fill == 0) failures++;
    checks++; if (n_gemm == 0) failures++;
    checks++; if (n_drain == 0) failures++;
    checks++; if (n_part == 0) failures++;
    checks++; if (n_multi == 0) failures++;
    checks++; if (n_skip == 0) failures++;
    checks++; if (n_opq_full == 0) failures++;
    checks++; if (n_backpressure == 0) failures++;
    checks++; if (n_win == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
