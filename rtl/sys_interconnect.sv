// sys_interconnect: the system interconnect joining all clusters to the shared
// L2 banks and the global interrupt controller.
//
// Masters are the clusters' DMA lanes and core ports. A request is routed by
// address: L2 addresses go to L2 bank ((addr - L2Base)/4) mod NumL2Banks, all
// other addresses to the interrupt controller (slave index NumL2Banks). Every
// slave has a round-robin arbiter over the masters, so at most one word per
// slave per cycle passes: the L2 bandwidth is NumL2Banks words per cycle however
// the cores are split into clusters. A granted master sees its response exactly
// Latency cycles after the grant (slave access plus a fixed pipeline), in the
// order it was granted, without backpressure; a master may have as many
// requests in flight as it likes.
//
// The paper names a high-latency AXI interconnect with constant L2 bandwidth;
// the single-word request/response channels, the fixed latency and the bank
// interleaving stand in for the AXI protocol and are this design's choices.
module sys_interconnect
  import mp_pkg::*;
#(
  parameter int unsigned NumMst      = 32,
  parameter int unsigned NumL2Banks  = 16,
  parameter int unsigned L2BankWords = 65536,
  parameter int unsigned Latency     = 8
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           mst_valid_i  [NumMst],
  input  mem_req_t                       mst_req_i    [NumMst],
  output logic                           mst_gnt_o    [NumMst],
  output logic                           mst_rvalid_o [NumMst],
  output logic [DataW-1:0]               mst_rdata_o  [NumMst],
  // L2 banks
  output logic                           l2_valid_o   [NumL2Banks],
  output logic [$clog2(L2BankWords)-1:0] l2_row_o     [NumL2Banks],
  output mem_req_t                       l2_req_o     [NumL2Banks],
  input  logic [DataW-1:0]               l2_rdata_i   [NumL2Banks],
  // interrupt controller
  output logic                           irq_valid_o,
  output mem_req_t                       irq_req_o,
  input  logic [DataW-1:0]               irq_rdata_i
);
  localparam int unsigned NumSlv = NumL2Banks + 1;
  localparam int unsigned SW     = $clog2(NumSlv);
  localparam int unsigned RowW   = $clog2(L2BankWords);
  localparam int unsigned DlDepth = (Latency > 1) ? Latency - 1 : 1;

  function automatic logic [SW-1:0] slave_of(logic [AddrW-1:0] addr);
    if (is_l2(addr)) return SW'(((addr - L2Base) >> 2) % NumL2Banks);
    return SW'(NumL2Banks);
  endfunction

  function automatic logic [RowW-1:0] row_of(logic [AddrW-1:0] addr);
    return RowW'(((addr - L2Base) >> 2) / NumL2Banks);
  endfunction

  logic [NumMst-1:0] slv_req [NumSlv];
  logic [NumMst-1:0] slv_gnt [NumSlv];
  logic [$clog2(NumMst+1)-1:0] slv_idx [NumSlv];
  logic              slv_any [NumSlv];
  logic [DataW-1:0]  slv_rdata [NumSlv];

  for (genvar s = 0; s < NumSlv; s++) begin : g_slv
    always_comb
      for (int unsigned m = 0; m < NumMst; m++)
        slv_req[s][m] = mst_valid_i[m] && slave_of(mst_req_i[m].addr) == SW'(s);

    rr_arbiter #(.N(NumMst)) i_arb (
      .clk_i, .rst_ni,
      .req_i    (slv_req[s]),
      .advance_i(1'b1),
      .gnt_o    (slv_gnt[s]),
      .idx_o    (slv_idx[s]),
      .valid_o  (slv_any[s])
    );

    if (s < NumL2Banks) begin : g_l2
      assign l2_valid_o[s] = slv_any[s];
      assign l2_req_o[s]   = mst_req_i[slv_idx[s]];
      assign l2_row_o[s]   = row_of(mst_req_i[slv_idx[s]].addr);
      assign slv_rdata[s]  = l2_rdata_i[s];
    end else begin : g_irq
      assign irq_valid_o  = slv_any[s];
      assign irq_req_o    = mst_req_i[slv_idx[s]];
      assign slv_rdata[s] = irq_rdata_i;
    end
  end

  always_comb
    for (int unsigned m = 0; m < NumMst; m++) begin
      mst_gnt_o[m] = 1'b0;
      for (int unsigned s = 0; s < NumSlv; s++) mst_gnt_o[m] |= slv_gnt[s][m];
    end

  for (genvar m = 0; m < NumMst; m++) begin : g_resp
    logic             pend_q;
    logic [SW-1:0]    pend_slv_q;
    logic             dl_valid_q [DlDepth];
    logic [DataW-1:0] dl_data_q  [DlDepth];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        pend_q     <= 1'b0;
        pend_slv_q <= '0;
        for (int k = 0; k < DlDepth; k++) begin
          dl_valid_q[k] <= 1'b0;
          dl_data_q[k]  <= '0;
        end
      end else begin
        pend_q <= mst_gnt_o[m];
        if (mst_gnt_o[m]) pend_slv_q <= slave_of(mst_req_i[m].addr);
        for (int k = 0; k < DlDepth - 1; k++) begin
          dl_valid_q[k] <= dl_valid_q[k+1];
          dl_data_q[k]  <= dl_data_q[k+1];
        end
        dl_valid_q[DlDepth-1] <= pend_q;
        dl_data_q[DlDepth-1]  <= slv_rdata[pend_slv_q];
      end
    end

    if (Latency > 1) begin : g_dly
      assign mst_rvalid_o[m] = dl_valid_q[0];
      assign mst_rdata_o[m]  = dl_data_q[0];
    end else begin : g_direct
      assign mst_rvalid_o[m] = pend_q;
      assign mst_rdata_o[m]  = slv_rdata[pend_slv_q];
    end
  end

endmodule
