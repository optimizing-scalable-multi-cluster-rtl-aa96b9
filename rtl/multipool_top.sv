// multipool_top: a 256-core manycore system built from NumClusters shared-L1
// clusters of CoresPerCluster cores each, joined by a high-latency system
// interconnect to a shared, banked L2 memory and a global interrupt controller
// with a dedicated wake-up line to every core.
//
// The total core count and the total L1 capacity (L1BytesTotal) stay the same
// for every split: a 1x256 system has one cluster with the whole 1 MiB of L1,
// a 16x16 system has 16 clusters with 64 KiB each. Small clusters (up to
// UmaMaxCores cores) use a single-cycle uniform L1 interconnect; larger ones
// use a non-uniform one with 1, 3 or 5 cycles depending on the distance
// between core and bank. The L2 bandwidth (NumL2Banks words per cycle) is also
// the same for every split: each cluster's DMA gets NumL2Banks/NumClusters
// lanes (at least one), so one large cluster can move as many words per cycle
// as all small clusters together.
//
// The cores themselves are outside this module: each core's memory port
// (valid/gnt request, response pulse) and its interrupt line are ports of the
// top. Global core id = cluster * CoresPerCluster + local id; every core sees
// its own cluster's L1 at address 0, its own DMA at mp_pkg::DmaBase, the
// interrupt controller at IrqBase and L2 at L2Base.
//
// Default configuration: the 16x16 split drawn in the paper's architecture
// figure (16 clusters, 64 KiB L1 and a 1-cycle interconnect each). The paper
// gives 256 cores, 1 MiB of L1, 1-cycle UMA and 1-5-cycle NUMA latencies and
// the private per-cluster DMA; L2 size and banking, interconnect latency, the
// bank count per core and the address map are this design's choices.
module multipool_top
  import mp_pkg::*;
#(
  parameter int unsigned NumClusters     = 16,
  parameter int unsigned CoresPerCluster = 16,
  parameter int unsigned L1BytesTotal    = 1048576,
  parameter int unsigned BanksPerCore    = 4,
  parameter int unsigned NumL2Banks      = 16,
  parameter int unsigned L2Bytes         = 4194304,
  parameter int unsigned SysLatency      = 8,
  parameter int unsigned UmaMaxCores     = 16,
  parameter int unsigned TileCores       = 4,
  parameter int unsigned GroupTiles      = 16,
  localparam int unsigned NumCores       = NumClusters * CoresPerCluster
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   core_valid_i  [NumCores],
  input  mem_req_t               core_req_i    [NumCores],
  output logic                   core_gnt_o    [NumCores],
  output logic                   core_rvalid_o [NumCores],
  output logic [DataW-1:0]       core_rdata_o  [NumCores],
  output logic [NumCores-1:0]    irq_o,
  output logic [NumClusters-1:0] dma_idle_o
);
  localparam int unsigned BankWords   = L1BytesTotal / 4 / (NumCores * BanksPerCore);
  localparam int unsigned DmaPorts    = (NumL2Banks / NumClusters > 0) ? NumL2Banks / NumClusters : 1;
  localparam int unsigned MstPerCl    = DmaPorts + 1;
  localparam int unsigned NumMst      = NumClusters * MstPerCl;
  localparam int unsigned L2BankWords = L2Bytes / 4 / NumL2Banks;
  localparam bit          Uma         = CoresPerCluster <= UmaMaxCores;
  localparam int unsigned LatTile     = 1;
  localparam int unsigned LatGroup    = Uma ? 1 : 3;
  localparam int unsigned LatRemote   = Uma ? 1 : 5;

  logic             mst_valid  [NumMst];
  mem_req_t         mst_req    [NumMst];
  logic             mst_gnt    [NumMst];
  logic             mst_rvalid [NumMst];
  logic [DataW-1:0] mst_rdata  [NumMst];

  for (genvar k = 0; k < NumClusters; k++) begin : g_cluster
    logic             c_valid  [CoresPerCluster];
    mem_req_t         c_req    [CoresPerCluster];
    logic             c_gnt    [CoresPerCluster];
    logic             c_rvalid [CoresPerCluster];
    logic [DataW-1:0] c_rdata  [CoresPerCluster];
    logic             s_valid  [MstPerCl];
    mem_req_t         s_req    [MstPerCl];
    logic             s_gnt    [MstPerCl];
    logic             s_rvalid [MstPerCl];
    logic [DataW-1:0] s_rdata  [MstPerCl];
    logic [31:0]      done_cnt;

    for (genvar i = 0; i < CoresPerCluster; i++) begin : g_core
      assign c_valid[i] = core_valid_i[k*CoresPerCluster+i];
      assign c_req[i]   = core_req_i[k*CoresPerCluster+i];
      assign core_gnt_o[k*CoresPerCluster+i]    = c_gnt[i];
      assign core_rvalid_o[k*CoresPerCluster+i] = c_rvalid[i];
      assign core_rdata_o[k*CoresPerCluster+i]  = c_rdata[i];
    end
    for (genvar p = 0; p < MstPerCl; p++) begin : g_port
      assign mst_valid[k*MstPerCl+p] = s_valid[p];
      assign mst_req[k*MstPerCl+p]   = s_req[p];
      assign s_gnt[p]    = mst_gnt[k*MstPerCl+p];
      assign s_rvalid[p] = mst_rvalid[k*MstPerCl+p];
      assign s_rdata[p]  = mst_rdata[k*MstPerCl+p];
    end

    mp_cluster #(
      .NumCores(CoresPerCluster), .BanksPerCore(BanksPerCore), .BankWords(BankWords),
      .DmaPorts(DmaPorts), .TileCores(TileCores), .GroupTiles(GroupTiles),
      .LatTile(LatTile), .LatGroup(LatGroup), .LatRemote(LatRemote)
    ) i_cluster (
      .clk_i, .rst_ni,
      .core_valid_i(c_valid), .core_req_i(c_req), .core_gnt_o(c_gnt),
      .core_rvalid_o(c_rvalid), .core_rdata_o(c_rdata),
      .sys_valid_o(s_valid), .sys_req_o(s_req), .sys_gnt_i(s_gnt),
      .sys_rvalid_i(s_rvalid), .sys_rdata_i(s_rdata),
      .dma_idle_o(dma_idle_o[k]), .dma_done_o(done_cnt)
    );
  end

  logic                           l2_valid  [NumL2Banks];
  logic [$clog2(L2BankWords)-1:0] l2_row    [NumL2Banks];
  mem_req_t                       l2_req    [NumL2Banks];
  logic                           l2_rvalid [NumL2Banks];
  logic [DataW-1:0]               l2_rdata  [NumL2Banks];
  logic                           irq_valid, irq_rvalid;
  mem_req_t                       irq_req;
  logic [DataW-1:0]               irq_rdata;

  sys_interconnect #(
    .NumMst(NumMst), .NumL2Banks(NumL2Banks), .L2BankWords(L2BankWords), .Latency(SysLatency)
  ) i_sys_ic (
    .clk_i, .rst_ni,
    .mst_valid_i(mst_valid), .mst_req_i(mst_req), .mst_gnt_o(mst_gnt),
    .mst_rvalid_o(mst_rvalid), .mst_rdata_o(mst_rdata),
    .l2_valid_o(l2_valid), .l2_row_o(l2_row), .l2_req_o(l2_req), .l2_rdata_i(l2_rdata),
    .irq_valid_o(irq_valid), .irq_req_o(irq_req), .irq_rdata_i(irq_rdata)
  );

  l2_memory #(.NumBanks(NumL2Banks), .BankWords(L2BankWords)) i_l2 (
    .clk_i, .rst_ni,
    .valid_i(l2_valid), .row_i(l2_row), .req_i(l2_req),
    .rvalid_o(l2_rvalid), .rdata_o(l2_rdata)
  );

  interrupt_ctrl #(.NumClusters(NumClusters), .CoresPerCluster(CoresPerCluster)) i_irq (
    .clk_i, .rst_ni,
    .valid_i(irq_valid), .req_i(irq_req),
    .rvalid_o(irq_rvalid), .rdata_o(irq_rdata),
    .irq_o
  );

endmodule
