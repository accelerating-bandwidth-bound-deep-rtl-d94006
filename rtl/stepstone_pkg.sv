// stepstone_pkg: types, constants and helper functions shared by the StepStone PIM blocks.
//
// Data are 32-bit words (IEEE-754 single precision) grouped into 64-byte cache blocks of 16
// words, as in the paper's figures. Addresses handed between blocks are cache-block addresses
// (physical address bits [ADDR_W-1:6]). The address mapping is the Skylake XOR mapping the
// paper uses by default; each PIM ID bit is the parity of a set of physical address bits.
//
// The functions gj_reduce and pext implement the arithmetic behind the address generator:
// gj_reduce brings a set of parity constraints to reduced echelon form with each row's lowest
// bit as its pivot, and pext compresses the bits of a value selected by a mask (a "parallel
// bit extract"), which turns a PIM-local address into a dense scratchpad index.
package stepstone_pkg;

  localparam int unsigned ADDR_W     = 32;           // physical address bits (assumed)
  localparam int unsigned BLK_OFS_W  = 6;            // 64-byte cache block
  localparam int unsigned BA_W       = ADDR_W - BLK_OFS_W;  // cache-block address bits
  localparam int unsigned WORD_W     = 32;           // fp32 words
  localparam int unsigned BLK_WORDS  = 16;           // words per cache block
  localparam int unsigned PIMID_W    = 4;            // {CH, RK, BG1, BG0}
  localparam int unsigned NUM_PIMS   = 1 << PIMID_W; // 16 StepStone-BG PIMs
  localparam int unsigned N_EXTRA    = 4;            // group / partition constraint rows
  localparam int unsigned N_ROWS     = PIMID_W + N_EXTRA;

  typedef logic [WORD_W-1:0]              word_t;
  typedef logic [BA_W-1:0]                baddr_t;
  typedef logic [BLK_WORDS*WORD_W-1:0]    block_t;   // word i in bits [32*i +: 32]
  typedef logic [PIMID_W-1:0]             pimid_t;

  // Skylake physical-address XOR masks (Fig. 5(a)), over full physical address bits.
  localparam logic [ADDR_W-1:0] MASK_BG0 = (32'd1 << 7)  | (32'd1 << 14);
  localparam logic [ADDR_W-1:0] MASK_BG1 = (32'd1 << 15) | (32'd1 << 19);
  localparam logic [ADDR_W-1:0] MASK_RK  = (32'd1 << 16) | (32'd1 << 20);
  localparam logic [ADDR_W-1:0] MASK_CH  = (32'd1 << 8)  | (32'd1 << 9)  | (32'd1 << 12) |
                                           (32'd1 << 13) | (32'd1 << 18) | (32'd1 << 19);

  // Same masks over cache-block address bits, indexed by PIM ID bit.
  function automatic baddr_t pim_mask(input int unsigned i);
    logic [ADDR_W-1:0] m;
    case (i)
      0: m = MASK_BG0;
      1: m = MASK_BG1;
      2: m = MASK_RK;
      default: m = MASK_CH;
    endcase
    return baddr_t'(m >> BLK_OFS_W);
  endfunction

  // PIM ID of a physical address.
  function automatic pimid_t pim_id_of(input logic [ADDR_W-1:0] pa);
    return {^(pa & MASK_CH), ^(pa & MASK_RK), ^(pa & MASK_BG1), ^(pa & MASK_BG0)};
  endfunction

  // Host-visible PIM command codes (written to the CMD register).
  typedef enum logic [1:0] {
    CMD_FILL  = 2'd1,   // DRAM local region -> scratchpad
    CMD_DRAIN = 2'd2,   // scratchpad -> DRAM local region
    CMD_GEMM  = 2'd3    // sub-GEMM over one block group / partition
  } pim_cmd_e;

  // A set of parity constraints: row r requires parity(addr & mask[r]) == tgt[r].
  typedef struct packed {
    baddr_t [N_ROWS-1:0] mask;
    logic   [N_ROWS-1:0] tgt;
  } cons_t;

  // Reduced row-echelon form with the LSB as the first column. After reduction every non-zero
  // row has a distinct lowest set bit (its pivot) and no other row contains that pivot bit.
  // ok is cleared when a row reduces to zero with target 1 (no address can satisfy the set).
  function automatic cons_t gj_reduce(input cons_t c, output logic ok);
    cons_t r;
    logic [N_ROWS-1:0] used;
    logic found;
    int unsigned sel;
    r = c;
    used = '0;
    for (int b = 0; b < BA_W; b++) begin
      found = 1'b0;
      sel = 0;
      for (int i = 0; i < N_ROWS; i++)
        if (!found && !used[i] && r.mask[i][b]) begin
          found = 1'b1;
          sel = i;
        end
      if (found) begin
        used[sel] = 1'b1;
        for (int i = 0; i < N_ROWS; i++)
          if (i != sel && r.mask[i][b]) begin
            r.mask[i] = r.mask[i] ^ r.mask[sel];
            r.tgt[i]  = r.tgt[i]  ^ r.tgt[sel];
          end
      end
    end
    ok = 1'b1;
    for (int i = 0; i < N_ROWS; i++)
      if (r.mask[i] == '0 && r.tgt[i]) ok = 1'b0;
    return r;
  endfunction

  // Lowest set bit of each reduced row, ORed together: the dependent (pivot) address bits.
  function automatic baddr_t pivots_of(input cons_t r);
    baddr_t p;
    p = '0;
    for (int i = 0; i < N_ROWS; i++)
      p = p | (r.mask[i] & (~r.mask[i] + baddr_t'(1)));
    return p;
  endfunction

  // Parallel bit extract: the bits of v selected by m, packed towards bit 0.
  function automatic baddr_t pext(input baddr_t v, input baddr_t m);
    baddr_t o;
    int unsigned k;
    o = '0;
    k = 0;
    for (int b = 0; b < BA_W; b++)
      if (m[b]) begin
        o[k] = v[b];
        k++;
      end
    return o;
  endfunction

endpackage
