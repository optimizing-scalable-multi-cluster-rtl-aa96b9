// mp_workload: drives every core port of a multipool_top instance with a
// core_model running the double-buffered axpy kernel, and measures what
// happens. Counted per run: barrier sleeps and wake-ups, DONE polls that found
// the DMA behind (memory-bound waits), two-phases-ahead guard waits, cycles in
// which cores of one cluster computed different phases at the same time
// (overlapping compute phases, only possible with the soft barrier), and
// cycles in which a core request waited for a grant (L1 bank or L2 contention).
// `done_o` rises when every core has checked its results.
module mp_workload
  import mp_pkg::*;
#(
  parameter int unsigned NumClusters     = 4,
  parameter int unsigned CoresPerCluster = 4,
  parameter int unsigned Phases          = 4,
  parameter int unsigned Elems           = 4,
  parameter bit          Soft            = 1'b1,
  parameter int unsigned Jitter          = 0,
  parameter int unsigned Imbalance       = 0,
  localparam int unsigned NumCores       = NumClusters * CoresPerCluster
) (
  input  logic             clk_i,
  input  logic             start_i,
  output logic             valid_o  [NumCores],
  output mem_req_t         req_o    [NumCores],
  input  logic             gnt_i    [NumCores],
  input  logic             rvalid_i [NumCores],
  input  logic [DataW-1:0] rdata_i  [NumCores],
  input  logic [NumCores-1:0] irq_i,
  output logic             done_o,
  output int               checks_o,
  output int               failures_o,
  output int               sleeps_o,
  output int               dma_waits_o,
  output int               guard_waits_o,
  output longint           overlap_cycles_o,
  output longint           stall_cycles_o,
  output longint           cycles_o,
  output int               l1_lat_o [8]       // L1 accesses by grant-to-response latency
);
  longint gnt_cycle [NumCores];
  logic   pend_l1   [NumCores];

  int   phase   [NumCores];
  logic fin     [NumCores];
  int   chk [NumCores], fl [NumCores], slp [NumCores], dw [NumCores], gw [NumCores];

  for (genvar k = 0; k < NumClusters; k++) begin : g_cl
    for (genvar i = 0; i < CoresPerCluster; i++) begin : g_core
      localparam int unsigned G = k * CoresPerCluster + i;
      core_model #(
        .NumClusters(NumClusters), .CoresPerCluster(CoresPerCluster), .ClusterId(k),
        .LocalId(i), .Phases(Phases), .Elems(Elems), .Soft(Soft), .Jitter(Jitter), .Imbalance(Imbalance)
      ) i_core (
        .clk_i, .start_i,
        .valid_o(valid_o[G]), .req_o(req_o[G]), .gnt_i(gnt_i[G]),
        .rvalid_i(rvalid_i[G]), .rdata_i(rdata_i[G]), .irq_i(irq_i[G]),
        .phase_o(phase[G]), .finished_o(fin[G]), .checks_o(chk[G]), .failures_o(fl[G]),
        .sleeps_o(slp[G]), .dma_waits_o(dw[G]), .guard_waits_o(gw[G])
      );
    end
  end

  initial begin
    overlap_cycles_o = 0; stall_cycles_o = 0; cycles_o = 0;
    for (int l = 0; l < 8; l++) l1_lat_o[l] = 0;
  end

  always @(posedge clk_i)
    for (int c = 0; c < int'(NumCores); c++) begin
      if (rvalid_i[c] && pend_l1[c]) begin
        longint l;
        l = cycles_o - gnt_cycle[c];
        l1_lat_o[(l > 7) ? 7 : int'(l)]++;
        pend_l1[c] = 1'b0;
      end
      if (valid_o[c] && gnt_i[c]) begin
        gnt_cycle[c] = cycles_o;
        pend_l1[c]   = decode_target(req_o[c].addr) == TGT_L1;
      end
    end

  always @(posedge clk_i) if (start_i && !done_o) begin
    cycles_o <= cycles_o + 1;
    for (int k = 0; k < int'(NumClusters); k++) begin
      int lo, hi;
      lo = 1 << 30; hi = -1;
      for (int i = 0; i < int'(CoresPerCluster); i++) begin
        int p;
        p = phase[k * int'(CoresPerCluster) + i];
        if (p >= 0) begin
          if (p < lo) lo = p;
          if (p > hi) hi = p;
        end
      end
      if (hi >= 0 && hi != lo) overlap_cycles_o <= overlap_cycles_o + 1;
    end
    for (int c = 0; c < int'(NumCores); c++)
      if (valid_o[c] && !gnt_i[c]) stall_cycles_o <= stall_cycles_o + 1;
  end

  always_comb begin
    done_o = 1'b1; checks_o = 0; failures_o = 0; sleeps_o = 0; dma_waits_o = 0; guard_waits_o = 0;
    for (int c = 0; c < int'(NumCores); c++) begin
      done_o        &= fin[c];
      checks_o      += chk[c];
      failures_o    += fl[c];
      sleeps_o      += slp[c];
      dma_waits_o   += dw[c];
      guard_waits_o += gw[c];
    end
  end

endmodule
