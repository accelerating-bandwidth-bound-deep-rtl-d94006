// dram_model: behavioural main-memory model for the testbenches (not part of the design).
//
// One flat store of 64-byte cache blocks shared by NPORTS request ports, as the CPU and all
// PIMs share one physical address space. Each port accepts one request every BURST cycles
// (tBL = 4 DRAM cycles in the DDR4-2400 configuration) and answers reads in order LAT cycles
// later (tCL = 16). Bank timing, refresh and the channel bus are not modelled. When CHECK_ID
// is set, ports 0..NUM_PIMS-1 belong to PIMs 0..15 and every address they present must map to
// their own PIM ID (a PIM may only touch its own bank group). Unwritten blocks read as zero.
// The testbench reaches the store through poke/peek.
module dram_model
  import stepstone_pkg::*;
#(
  parameter int NPORTS   = 1,
  parameter int LAT      = 16,
  parameter int BURST    = 4,
  parameter bit CHECK_ID = 1'b1
) (
  input  logic                clk,
  input  logic [NPORTS-1:0]   req_valid,
  output logic [NPORTS-1:0]   req_ready,
  input  logic [NPORTS-1:0]   req_we,
  input  baddr_t              req_ba    [NPORTS],
  input  block_t              req_wdata [NPORTS],
  output logic [NPORTS-1:0]   rsp_valid,
  output block_t              rsp_rdata [NPORTS],
  output int                  id_errors
);
  block_t store [baddr_t];
  int     cool  [NPORTS];
  longint cyc = 0;
  typedef struct { longint due; block_t data; } rsp_t;
  rsp_t   pend  [NPORTS][$];

  function automatic void poke(input baddr_t ba, input block_t d);
    store[ba] = d;
  endfunction
  function automatic block_t peek(input baddr_t ba);
    return store.exists(ba) ? store[ba] : '0;
  endfunction

  initial begin
    id_errors = 0;
    for (int p = 0; p < NPORTS; p++) cool[p] = 0;
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) req_ready[p] = (cool[p] == 0);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NPORTS; p++) begin
      rsp_valid[p] <= 1'b0;
      if (pend[p].size() > 0 && pend[p][0].due <= cyc) begin
        rsp_valid[p] <= 1'b1;
        rsp_rdata[p] <= pend[p][0].data;
        void'(pend[p].pop_front());
      end
      if (cool[p] > 0) cool[p] <= cool[p] - 1;
      if (req_valid[p] && req_ready[p]) begin
        cool[p] <= BURST - 1;
        if (CHECK_ID && p < NUM_PIMS && pim_id_of({req_ba[p], 6'b0}) != pimid_t'(p)) begin
          id_errors <= id_errors + 1;
          $display("dram_model: port %0d touched block %h of PIM %0d", p, req_ba[p],
                   pim_id_of({req_ba[p], 6'b0}));
        end
        if (req_we[p]) store[req_ba[p]] = req_wdata[p];
        else begin
          rsp_t r;
          r.due  = cyc + LAT;
          r.data = store.exists(req_ba[p]) ? store[req_ba[p]] : '0;
          pend[p].push_back(r);
        end
      end
    end
  end
endmodule
