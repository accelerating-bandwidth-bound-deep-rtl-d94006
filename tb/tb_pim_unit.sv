// tb_pim_unit: self-checking test of one StepStone-BG PIM unit (PIM 0, default sizes: 8-wide
// SIMD, 8 KB scratchpad) against the behavioural DRAM model.
//
// Workload: the paper's Fig. 5 example, a 16 x 512 fp32 weight matrix A at physical address 0
// under the Skylake mapping, multiplied by a localized B. The testbench acts as host software:
// it works out (by brute force over all blocks) which A blocks belong to PIM 0 and a block
// group, ranks their rows and column blocks, lays out B and C in the scratchpad, runs the
// kernels through the register interface and compares C with an integer reference.
//   Test 1: group 0, N = 4. B reaches the scratchpad through DRAM and a FILL kernel, C is
//           cleared through the scratchpad window, and after GEMM a DRAIN kernel writes C to
//           DRAM, where it is checked.
//   Test 2: group 3, N = 12 (two passes of the 8-wide SIMD unit) and a column partition
//           (one MCOL bit pinned by an extra constraint row); B and C through the window.
// Both tests also check the number of A blocks processed and the kernel cycle count
// (19 cycles per block and pass, plus a small start-up allowance).
module tb_pim_unit;
  import stepstone_pkg::*;
  import gemm_ref_pkg::*;

  localparam int W = 8;
  localparam int M = 16, K = 512;
  localparam int NBLK = M * K / 16;
  localparam baddr_t COLMASK = baddr_t'(32'h1f);    // MCOL: PA bits 10..6
  localparam baddr_t ROWMASK = baddr_t'(32'h1e0);   // MROW: PA bits 14..11

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic reg_we = 0, reg_re = 0, reg_rvalid, busy, done;
  logic [19:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic mem_req_valid, mem_req_we;
  logic [0:0] req_ready, rsp_valid;
  baddr_t mem_req_ba;
  block_t mem_req_wdata;
  baddr_t bav [1];
  block_t wdv [1], rdv [1];
  int id_errors;

  pim_unit dut (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rvalid, .reg_rdata, .busy, .done,
    .mem_req_valid, .mem_req_ready(req_ready[0]), .mem_req_we, .mem_req_ba, .mem_req_wdata,
    .mem_rsp_valid(rsp_valid[0]), .mem_rsp_rdata(rdv[0]));

  assign bav[0] = mem_req_ba;
  assign wdv[0] = mem_req_wdata;
  dram_model #(.NPORTS(1)) u_dram (
    .clk, .req_valid(mem_req_valid), .req_ready, .req_we(mem_req_we), .req_ba(bav),
    .req_wdata(wdv), .rsp_valid, .rsp_rdata(rdv), .id_errors);

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = 20'(a); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk);
    reg_re = 1; reg_addr = 20'(a);
    @(negedge clk);
    reg_re = 0;
    d = reg_rdata;
  endtask
  task automatic run(input int cmd, output int cycles, output int blocks);
    logic [31:0] s, st;
    wr(0, 32'(cmd));
    do rd(1, st); while (st[0]);
    rd(16, s); cycles = int'(s);
    rd(17, s); blocks = int'(s);
    // done set; no configuration error; no request outside this PIM's bank group
    checks++;
    if (st[3:1] != 3'b001) begin
      failures++;
      $display("FAIL: status after command %0d is %h", cmd, st);
    end
  endtask

  int A [M][K];
  int B [K][16];

  task automatic one_test(input int grp, input int N, input bit use_fill, input bit col_part,
                          input string name);
    baddr_t xm [N_EXTRA];
    logic [N_EXTRA-1:0] xt;
    cons_t c;
    int rows[$], cbs[$], nb, np, cyc, blk, exp_c;
    int rank_r [M];
    int rank_c [K/16];
    logic [31:0] v;
    np = (N + W - 1) / W;
    for (int i = 0; i < N_EXTRA; i++) xm[i] = '0;
    xt = '0;
    xm[0] = baddr_t'(32'h100);            // GP0 = PA bit 14
    xt[0] = grp[0];
    xm[1] = baddr_t'(32'h0c0);            // GP1 = PA bits 12, 13 (18, 19 are 0 here)
    xt[1] = grp[1];
    if (col_part) begin
      xm[2] = baddr_t'(32'h010);          // column partition: PA bit 10 = 0
      xt[2] = 1'b0;
    end
    c = make_cons(0, xm, xt);
    nb = 0;
    for (int r = 0; r < M; r++) rank_r[r] = -1;
    for (int q = 0; q < K/16; q++) rank_c[q] = -1;
    for (int a = 0; a < NBLK; a++)
      if (satisfies(baddr_t'(a), c)) begin
        nb++;
        if (rank_r[a / (K/16)] < 0) begin rank_r[a / (K/16)] = rows.size(); rows.push_back(a / (K/16)); end
        if (rank_c[a % (K/16)] < 0) begin rank_c[a % (K/16)] = cbs.size(); cbs.push_back(a % (K/16)); end
      end
    // scratchpad layout: B from line 0, C from line 200
    if (use_fill) begin
      // localize B into PIM 0's DRAM region at block 0x4000, then FILL
      baddr_t p;
      int widx;
      block_t blkd;
      cons_t pc;
      for (int i = 0; i < N_EXTRA; i++) xm[i] = '0;
      pc = make_cons(0, xm, '0);
      p = baddr_t'(32'h4000);
      widx = 0;
      blkd = '0;
      for (int q = 0; q < cbs.size(); q++)
        for (int k = 0; k < 16; k++)
          for (int pp = 0; pp < np; pp++)
            for (int l = 0; l < W; l++) begin
              int n = pp * W + l;
              blkd[32*widx +: 32] = (n < N) ? int2f(B[cbs[q]*16 + k][n]) : 32'h0;
              widx++;
              if (widx == 16) begin
                while (!satisfies(p, pc)) p++;
                u_dram.poke(p, blkd);
                p++;
                widx = 0;
              end
            end
      wr(2, 32'h4000); wr(4, 0); wr(5, cbs.size() * 16 * np * W / 16);
      run(1, cyc, blk);
      if (blk != cbs.size() * np * W) begin failures++; $display("%s: FILL blocks %0d", name, blk); end
    end else begin
      for (int q = 0; q < cbs.size(); q++)
        for (int k = 0; k < 16; k++)
          for (int n = 0; n < np * W; n++)
            wr(32'h80000 + ((q * 16 + k) * np + n / W) * W + n % W,
               (n < N) ? int2f(B[cbs[q]*16 + k][n]) : 32'h0);
    end
    for (int r = 0; r < rows.size() * np * W; r++) wr(32'h80000 + 200 * W + r, 32'h0);
    // GEMM
    wr(2, 0); wr(3, NBLK - 1); wr(6, 0); wr(7, 200); wr(8, np);
    wr(9, 32'(COLMASK)); wr(10, 32'(ROWMASK));
    for (int i = 0; i < N_EXTRA; i++) wr(11 + i, 32'(c.mask[PIMID_W+i]));
    wr(15, 32'(c.tgt[PIMID_W +: N_EXTRA]));
    run(3, cyc, blk);
    checks++;
    if (blk != nb) begin failures++; $display("%s: GEMM blocks %0d expected %0d", name, blk, nb); end
    checks++;
    if (cyc < 16 * np * nb || cyc > 19 * np * nb + 40) begin
      failures++;
      $display("%s: GEMM cycles %0d for %0d blocks x %0d passes", name, cyc, nb, np);
    end
    $display("%s: %0d blocks, %0d passes, %0d cycles", name, nb, np, cyc);
    // read back C
    if (use_fill) begin
      wr(2, 32'h8000); wr(4, 200 * W); wr(5, rows.size() * np * W / 16);
      run(2, cyc, blk);
    end
    for (int ri = 0; ri < rows.size(); ri++)
      for (int n = 0; n < N; n++) begin
        exp_c = 0;
        for (int a = 0; a < NBLK; a++)
          if (satisfies(baddr_t'(a), c) && a / (K/16) == rows[ri])
            for (int k = 0; k < 16; k++)
              exp_c += A[rows[ri]][(a % (K/16)) * 16 + k] * B[(a % (K/16)) * 16 + k][n];
        if (use_fill) begin
          // C lines were drained to PIM 0's local blocks from 0x8000 on, 16 words each
          int widx = (ri * np + n / W) * W + n % W;
          baddr_t p = baddr_t'(32'h8000);
          cons_t pc;
          baddr_t z [N_EXTRA];
          for (int i = 0; i < N_EXTRA; i++) z[i] = '0;
          pc = make_cons(0, z, '0);
          for (int s = 0; s <= widx / 16; s++) begin
            while (!satisfies(p, pc)) p++;
            if (s != widx / 16) p++;
          end
          v = u_dram.peek(p)[32*(widx % 16) +: 32];
        end else
          rd(32'h80000 + 200 * W + (ri * np + n / W) * W + n % W, v);
        checks++;
        if (v != int2f(exp_c)) begin
          failures++;
          if (failures < 10) $display("%s: C[%0d][%0d] = %h expected %h (%0d)", name, rows[ri], n, v, int2f(exp_c), exp_c);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) A[i][j] = $urandom_range(0, 6) - 3;
    for (int j = 0; j < K; j++) for (int n = 0; n < 16; n++) B[j][n] = $urandom_range(0, 6) - 3;
    for (int a = 0; a < NBLK; a++) begin
      block_t b;
      for (int w = 0; w < 16; w++) b[32*w +: 32] = int2f(A[(a*16 + w) / K][(a*16 + w) % K]);
      u_dram.poke(baddr_t'(a), b);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    one_test(0, 4, 1'b1, 1'b0, "grp0 N=4 fill/drain");
    one_test(3, 12, 1'b0, 1'b1, "grp3 N=12 colpart");
    checks++;
    if (id_errors != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
