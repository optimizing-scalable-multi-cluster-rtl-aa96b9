// mp_cluster: one shared-L1 cluster: the ports of its cores, its banked L1
// scratchpad, the L1 interconnect, its private DMA engine and its ports to the
// system interconnect.
//
// Each core has one word port (valid/gnt request, response pulse). The cluster
// decodes every core request by address (mp_pkg::decode_target) and sends it to
//   * the L1 interconnect (the cluster's own L1, NumCores*BanksPerCore banks of
//     BankWords words, word-interleaved),
//   * the DMA register port (shared by all cores, round-robin), or
//   * the cluster's core port into the system interconnect (L2 and interrupt
//     controller; shared by all cores, round-robin, responses matched to cores
//     through an in-order FIFO of core ids).
// A core may have one request outstanding; it may issue the next one in the
// cycle its response arrives, so a core reaching a 1-cycle L1 bank can issue
// one access per cycle. Core reads of L1 take LatTile..LatRemote cycles
// (see l1_interconnect), DMA register reads 1 cycle, L2 accesses the system
// latency plus any arbitration wait.
//
// System ports 0..DmaPorts-1 belong to the DMA lanes, port DmaPorts to the
// cores. The paper gives the cluster's parts (cores, L1, L1 interconnect,
// private DMA) and their roles; the port structure, the one-outstanding rule and
// the arbitration are this design's choices.
module mp_cluster
  import mp_pkg::*;
#(
  parameter int unsigned NumCores     = 16,
  parameter int unsigned BanksPerCore = 4,
  parameter int unsigned BankWords    = 256,
  parameter int unsigned DmaPorts     = 1,
  parameter int unsigned TileCores    = 4,
  parameter int unsigned GroupTiles   = 16,
  parameter int unsigned LatTile      = 1,
  parameter int unsigned LatGroup     = 1,
  parameter int unsigned LatRemote    = 1,
  parameter int unsigned SysOutstanding = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // cores
  input  logic             core_valid_i  [NumCores],
  input  mem_req_t         core_req_i    [NumCores],
  output logic             core_gnt_o    [NumCores],
  output logic             core_rvalid_o [NumCores],
  output logic [DataW-1:0] core_rdata_o  [NumCores],
  // system interconnect master ports
  output logic             sys_valid_o   [DmaPorts+1],
  output mem_req_t         sys_req_o     [DmaPorts+1],
  input  logic             sys_gnt_i     [DmaPorts+1],
  input  logic             sys_rvalid_i  [DmaPorts+1],
  input  logic [DataW-1:0] sys_rdata_i   [DmaPorts+1],
  // DMA status, for observation
  output logic             dma_idle_o,
  output logic [31:0]      dma_done_o
);
  localparam int unsigned NumBanks = NumCores * BanksPerCore;
  localparam int unsigned NReq     = NumCores + DmaPorts;
  localparam int unsigned CW       = $clog2(NumCores + 1);
  localparam int unsigned OW       = $clog2(SysOutstanding);

  // ---------------------------------------------------------------- L1
  logic             ic_valid  [NReq];
  mem_req_t         ic_req    [NReq];
  logic             ic_gnt    [NReq];
  logic             ic_rvalid [NReq];
  logic [DataW-1:0] ic_rdata  [NReq];
  logic             bk_valid  [NumBanks];
  logic [$clog2(BankWords)-1:0] bk_row [NumBanks];
  mem_req_t         bk_req    [NumBanks];
  logic             bk_rvalid [NumBanks];
  logic [DataW-1:0] bk_rdata  [NumBanks];

  l1_interconnect #(
    .NumCores(NumCores), .NumDma(DmaPorts), .NumBanks(NumBanks), .BankWords(BankWords),
    .TileCores(TileCores), .GroupTiles(GroupTiles),
    .LatTile(LatTile), .LatGroup(LatGroup), .LatRemote(LatRemote)
  ) i_l1_ic (
    .clk_i, .rst_ni,
    .req_valid_i(ic_valid), .req_i(ic_req), .gnt_o(ic_gnt),
    .resp_valid_o(ic_rvalid), .resp_rdata_o(ic_rdata),
    .bank_valid_o(bk_valid), .bank_row_o(bk_row), .bank_req_o(bk_req),
    .bank_rvalid_i(bk_rvalid), .bank_rdata_i(bk_rdata)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    spm_bank #(.Words(BankWords)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i(bk_valid[b]), .req_row_i(bk_row[b]), .req_i(bk_req[b]),
      .rvalid_o(bk_rvalid[b]), .rdata_o(bk_rdata[b])
    );
  end

  // ---------------------------------------------------------------- DMA
  logic             dreg_valid, dreg_gnt, dreg_rvalid;
  mem_req_t         dreg_req;
  logic [DataW-1:0] dreg_rdata;
  logic             dl1_valid [DmaPorts];
  mem_req_t         dl1_req   [DmaPorts];
  logic             dl1_gnt   [DmaPorts];
  logic             dl1_rvalid[DmaPorts];
  logic [DataW-1:0] dl1_rdata [DmaPorts];
  logic             dsys_gnt  [DmaPorts];
  logic             dsys_rvalid[DmaPorts];
  logic [DataW-1:0] dsys_rdata[DmaPorts];
  logic             dsys_valid[DmaPorts];
  mem_req_t         dsys_req  [DmaPorts];

  dma_engine #(.Ports(DmaPorts)) i_dma (
    .clk_i, .rst_ni,
    .reg_valid_i(dreg_valid), .reg_req_i(dreg_req), .reg_gnt_o(dreg_gnt),
    .reg_rvalid_o(dreg_rvalid), .reg_rdata_o(dreg_rdata),
    .l1_valid_o(dl1_valid), .l1_req_o(dl1_req), .l1_gnt_i(dl1_gnt),
    .l1_rvalid_i(dl1_rvalid), .l1_rdata_i(dl1_rdata),
    .sys_valid_o(dsys_valid), .sys_req_o(dsys_req), .sys_gnt_i(dsys_gnt),
    .sys_rvalid_i(dsys_rvalid), .sys_rdata_i(dsys_rdata),
    .idle_o(dma_idle_o), .done_cnt_o(dma_done_o)
  );

  for (genvar p = 0; p < DmaPorts; p++) begin : g_dma_ports
    assign ic_valid[NumCores+p] = dl1_valid[p];
    assign ic_req[NumCores+p]   = dl1_req[p];
    assign dl1_gnt[p]           = ic_gnt[NumCores+p];
    assign dl1_rvalid[p]        = ic_rvalid[NumCores+p];
    assign dl1_rdata[p]         = ic_rdata[NumCores+p];
    assign sys_valid_o[p]       = dsys_valid[p];
    assign sys_req_o[p]         = dsys_req[p];
    assign dsys_gnt[p]          = sys_gnt_i[p];
    assign dsys_rvalid[p]       = sys_rvalid_i[p];
    assign dsys_rdata[p]        = sys_rdata_i[p];
  end

  // ---------------------------------------------------------------- core ports
  logic [NumCores-1:0] can_issue, want_dma, want_sys;
  logic [NumCores-1:0] dma_gnt_vec, sys_gnt_vec;
  logic [CW-1:0]       dma_idx, sys_idx;
  logic                dma_any, sys_any;
  logic [NumCores-1:0] pend_q;
  logic [NumCores-1:0] resp_now;
  // DMA register response owner
  logic                dreg_pend_q;
  logic [CW-1:0]       dreg_owner_q;
  // system port response owners, in order
  logic [CW-1:0]       own_fifo_q [SysOutstanding];
  logic [OW-1:0]       own_wr_q, own_rd_q;
  logic [OW:0]         own_cnt_q;
  logic                own_full, sys_core_fire;

  assign own_full = own_cnt_q == (OW+1)'(SysOutstanding);

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      resp_now[c]  = ic_rvalid[c]
                   || (dreg_rvalid && dreg_owner_q == CW'(c) && dreg_pend_q)
                   || (sys_rvalid_i[DmaPorts] && own_fifo_q[own_rd_q] == CW'(c));
      can_issue[c] = !pend_q[c] || resp_now[c];
      ic_valid[c]  = core_valid_i[c] && can_issue[c] && decode_target(core_req_i[c].addr) == TGT_L1;
      ic_req[c]    = core_req_i[c];
      want_dma[c]  = core_valid_i[c] && can_issue[c] && decode_target(core_req_i[c].addr) == TGT_DMA;
      want_sys[c]  = core_valid_i[c] && can_issue[c] && decode_target(core_req_i[c].addr) == TGT_SYS
                     && !own_full;
    end
  end

  rr_arbiter #(.N(NumCores)) i_dma_arb (
    .clk_i, .rst_ni, .req_i(want_dma), .advance_i(1'b1),
    .gnt_o(dma_gnt_vec), .idx_o(dma_idx), .valid_o(dma_any)
  );
  assign dreg_valid = dma_any;
  assign dreg_req   = core_req_i[dma_idx];

  rr_arbiter #(.N(NumCores)) i_sys_arb (
    .clk_i, .rst_ni, .req_i(want_sys), .advance_i(sys_gnt_i[DmaPorts]),
    .gnt_o(sys_gnt_vec), .idx_o(sys_idx), .valid_o(sys_any)
  );
  assign sys_valid_o[DmaPorts] = sys_any;
  assign sys_req_o[DmaPorts]   = core_req_i[sys_idx];
  assign sys_core_fire         = sys_any && sys_gnt_i[DmaPorts];

  always_comb
    for (int unsigned c = 0; c < NumCores; c++) begin
      core_gnt_o[c] = (ic_valid[c] && ic_gnt[c])
                    || (dma_gnt_vec[c] && dreg_gnt)
                    || (sys_gnt_vec[c] && sys_gnt_i[DmaPorts]);
      core_rvalid_o[c] = resp_now[c];
      if (ic_rvalid[c])                                     core_rdata_o[c] = ic_rdata[c];
      else if (dreg_rvalid && dreg_pend_q && dreg_owner_q == CW'(c)) core_rdata_o[c] = dreg_rdata;
      else                                                  core_rdata_o[c] = sys_rdata_i[DmaPorts];
    end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q       <= '0;
      dreg_pend_q  <= 1'b0;
      dreg_owner_q <= '0;
      own_wr_q     <= '0;
      own_rd_q     <= '0;
      own_cnt_q    <= '0;
      for (int k = 0; k < SysOutstanding; k++) own_fifo_q[k] <= '0;
    end else begin
      for (int unsigned c = 0; c < NumCores; c++)
        if (core_gnt_o[c])    pend_q[c] <= 1'b1;
        else if (resp_now[c]) pend_q[c] <= 1'b0;
      dreg_pend_q <= dma_any && dreg_gnt;
      if (dma_any) dreg_owner_q <= dma_idx;
      if (sys_core_fire) begin
        own_fifo_q[own_wr_q] <= sys_idx;
        own_wr_q <= (own_wr_q == OW'(SysOutstanding - 1)) ? '0 : own_wr_q + 1'b1;
      end
      if (sys_rvalid_i[DmaPorts])
        own_rd_q <= (own_rd_q == OW'(SysOutstanding - 1)) ? '0 : own_rd_q + 1'b1;
      own_cnt_q <= own_cnt_q + (OW+1)'(sys_core_fire) - (OW+1)'(sys_rvalid_i[DmaPorts]);
    end
  end

  for (genvar c = 0; c < NumCores; c++) begin : g_chk
    // a core never gets a response it has not asked for
    assert property (@(posedge clk_i) disable iff (!rst_ni) resp_now[c] |-> pend_q[c])
      else $error("mp_cluster: unexpected response to core %0d", c);
  end

endmodule
