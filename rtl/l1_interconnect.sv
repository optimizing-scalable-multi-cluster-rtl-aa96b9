// l1_interconnect: crossbar from the cores and DMA ports of one cluster to the
// cluster's L1 banks.
//
// L1 words are interleaved over all banks (bank = word index mod NumBanks, row =
// word index div NumBanks). Each bank has a round-robin arbiter over every
// requester that addresses it; a requester is granted (gnt_o) in the cycle its
// request wins, and the bank answers on the next clock edge. That answer is then
// held back so that the response reaches the requester exactly `latency`
// cycles after the grant, where the latency depends on where the bank sits:
//   * bank in the core's own tile                 -> LatTile cycles
//   * bank in another tile of the core's group    -> LatGroup cycles
//   * bank in another group                       -> LatRemote cycles
// Cores are grouped TileCores to a tile and GroupTiles tiles to a group; the
// banks are split evenly over the tiles. DMA ports (the last NumDma requesters)
// always see LatTile. With all three latencies at 1 this is the paper's
// single-cycle UMA interconnect of small clusters; with 1/3/5 it is the NUMA
// scheme of the 256-core cluster ("up to 5-cycle latency").
//
// Responses return without backpressure. A requester whose latency can vary
// (a core in a NUMA cluster) must keep at most one request outstanding; the
// cluster's core ports guarantee that. A DMA port may issue every cycle. The
// tile/group hierarchy and the 1/3/5 split are taken from the MemPool
// architecture the paper builds on, not from this paper.
module l1_interconnect
  import mp_pkg::*;
#(
  parameter int unsigned NumCores   = 16,
  parameter int unsigned NumDma     = 1,
  parameter int unsigned NumBanks   = 64,
  parameter int unsigned BankWords  = 256,
  parameter int unsigned TileCores  = 4,
  parameter int unsigned GroupTiles = 16,
  parameter int unsigned LatTile    = 1,
  parameter int unsigned LatGroup   = 1,
  parameter int unsigned LatRemote  = 1
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // requesters: cores 0..NumCores-1, then DMA ports
  input  logic                         req_valid_i  [NumCores+NumDma],
  input  mem_req_t                     req_i        [NumCores+NumDma],
  output logic                         gnt_o        [NumCores+NumDma],
  output logic                         resp_valid_o [NumCores+NumDma],
  output logic [DataW-1:0]             resp_rdata_o [NumCores+NumDma],
  // banks
  output logic                         bank_valid_o [NumBanks],
  output logic [$clog2(BankWords)-1:0] bank_row_o   [NumBanks],
  output mem_req_t                     bank_req_o   [NumBanks],
  input  logic                         bank_rvalid_i[NumBanks],
  input  logic [DataW-1:0]             bank_rdata_i [NumBanks]
);
  localparam int unsigned NReq     = NumCores + NumDma;
  localparam int unsigned BankW    = (NumBanks > 1) ? $clog2(NumBanks) : 1;
  localparam int unsigned RowW     = $clog2(BankWords);
  localparam int unsigned NumTiles = (NumCores + TileCores - 1) / TileCores;
  localparam int unsigned TileBanks = NumBanks / NumTiles;
  localparam int unsigned MaxLat   = (LatRemote > LatGroup) ?
                                     ((LatRemote > LatTile) ? LatRemote : LatTile) :
                                     ((LatGroup > LatTile) ? LatGroup : LatTile);
  localparam int unsigned DlDepth  = (MaxLat > 1) ? MaxLat - 1 : 1;
  localparam int unsigned LatW     = $clog2(MaxLat + 1);

  function automatic logic [BankW-1:0] bank_of(logic [AddrW-1:0] addr);
    return BankW'((addr >> 2) % NumBanks);
  endfunction

  function automatic logic [RowW-1:0] row_of(logic [AddrW-1:0] addr);
    return RowW'((addr >> 2) / NumBanks);
  endfunction

  function automatic logic [LatW-1:0] latency(int unsigned r, logic [BankW-1:0] b);
    int unsigned ctile, btile;
    if (r >= NumCores) return LatW'(LatTile);
    ctile = r / TileCores;
    btile = int'(b) / TileBanks;
    if (ctile == btile)                            return LatW'(LatTile);
    if (ctile / GroupTiles == btile / GroupTiles)  return LatW'(LatGroup);
    return LatW'(LatRemote);
  endfunction

  // ---------------------------------------------------------------- arbitration
  logic [NReq-1:0] bank_req [NumBanks];
  logic [NReq-1:0] bank_gnt [NumBanks];
  logic [$clog2(NReq+1)-1:0] bank_idx [NumBanks];
  logic            bank_any [NumBanks];

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    always_comb begin
      for (int unsigned r = 0; r < NReq; r++)
        bank_req[b][r] = req_valid_i[r] && (bank_of(req_i[r].addr) == BankW'(b));
    end

    rr_arbiter #(.N(NReq)) i_arb (
      .clk_i, .rst_ni,
      .req_i    (bank_req[b]),
      .advance_i(1'b1),
      .gnt_o    (bank_gnt[b]),
      .idx_o    (bank_idx[b]),
      .valid_o  (bank_any[b])
    );

    assign bank_valid_o[b] = bank_any[b];
    assign bank_req_o[b]   = req_i[bank_idx[b]];
    assign bank_row_o[b]   = row_of(req_i[bank_idx[b]].addr);
  end

  always_comb begin
    for (int unsigned r = 0; r < NReq; r++) begin
      gnt_o[r] = 1'b0;
      for (int unsigned b = 0; b < NumBanks; b++) gnt_o[r] |= bank_gnt[b][r];
    end
  end

  // ---------------------------------------------------------------- responses
  for (genvar r = 0; r < NReq; r++) begin : g_resp
    logic             pend_q;
    logic [BankW-1:0] pend_bank_q;
    logic [LatW-1:0]  pend_lat_q;
    logic             dl_valid_q [DlDepth];
    logic [DataW-1:0] dl_data_q  [DlDepth];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        pend_q      <= 1'b0;
        pend_bank_q <= '0;
        pend_lat_q  <= '0;
      end else begin
        pend_q <= gnt_o[r];
        if (gnt_o[r]) begin
          pend_bank_q <= bank_of(req_i[r].addr);
          pend_lat_q  <= latency(r, bank_of(req_i[r].addr));
        end
      end
    end

    // delay line: slot k delivers its word k+1 cycles after it is written
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int k = 0; k < DlDepth; k++) begin
          dl_valid_q[k] <= 1'b0;
          dl_data_q[k]  <= '0;
        end
      end else begin
        for (int k = 0; k < DlDepth - 1; k++) begin
          dl_valid_q[k] <= dl_valid_q[k+1];
          dl_data_q[k]  <= dl_data_q[k+1];
        end
        dl_valid_q[DlDepth-1] <= 1'b0;
        if (pend_q && pend_lat_q > 1) begin
          dl_valid_q[pend_lat_q-2] <= 1'b1;
          dl_data_q[pend_lat_q-2]  <= bank_rdata_i[pend_bank_q];
        end
      end
    end

    always_comb begin
      if (pend_q && pend_lat_q == 1) begin
        resp_valid_o[r] = 1'b1;
        resp_rdata_o[r] = bank_rdata_i[pend_bank_q];
      end else begin
        resp_valid_o[r] = (MaxLat > 1) && dl_valid_q[0];
        resp_rdata_o[r] = dl_data_q[0];
      end
    end

    // two responses for the same requester in one cycle would be lost
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     !(pend_q && pend_lat_q == 1 && MaxLat > 1 && dl_valid_q[0]))
      else $error("l1_interconnect: response collision at requester %0d", r);
  end

  // every granted bank answers one cycle later
  for (genvar b = 0; b < NumBanks; b++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) bank_valid_o[b] |=> bank_rvalid_i[b])
      else $error("l1_interconnect: bank %0d did not answer", b);
  end

endmodule
