// tb_multipool_full: one complete run of the system at its default size
// (16 clusters x 16 cores, 64 KiB L1 per cluster, 16 L2 banks, 4 MiB L2): the
// double-buffered axpy kernel with the soft barrier over 8 phases of 49,152
// elements each (3,072 per cluster, 192 per core), i.e. 6,144 input words per
// cluster and phase. Each core writes its share of the inputs into L2, the
// clusters run the 8 phases, and each core checks its share of the results.
module tb_multipool_full;
  import mp_pkg::*;

  localparam int unsigned NumCores = 256;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic             valid  [NumCores];
  mem_req_t         req    [NumCores];
  logic             gnt    [NumCores];
  logic             rvalid [NumCores];
  logic [DataW-1:0] rdata  [NumCores];
  logic [NumCores-1:0] irq;
  logic [15:0]      idle;

  multipool_top dut (
    .clk_i(clk), .rst_ni(rst_n), .core_valid_i(valid), .core_req_i(req), .core_gnt_o(gnt),
    .core_rvalid_o(rvalid), .core_rdata_o(rdata), .irq_o(irq), .dma_idle_o(idle));

  logic   done;
  int     chk, fl, slp, dw, gw;
  longint ov, st, cy;
  int     lat [8];

  mp_workload #(.NumClusters(16), .CoresPerCluster(16), .Phases(8), .Elems(192), .Soft(1'b1),
                .Jitter(0), .Imbalance(0)) wl (
    .clk_i(clk), .start_i(start), .valid_o(valid), .req_o(req), .gnt_i(gnt),
    .rvalid_i(rvalid), .rdata_i(rdata), .irq_i(irq), .done_o(done),
    .checks_o(chk), .failures_o(fl), .sleeps_o(slp), .dma_waits_o(dw),
    .guard_waits_o(gw), .overlap_cycles_o(ov), .stall_cycles_o(st), .cycles_o(cy),
    .l1_lat_o(lat));

  int checks = 0, failures = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (done);
    repeat (2) @(negedge clk);
    checks   += chk;
    failures += fl;
    checks++;
    if (idle != '1) begin failures++; $display("FAIL a DMA is still busy at the end"); end
    $display("16x16 soft axpy, 8 phases: %0d cycles (incl. L2 fill and check), sleeps %0d, dma waits %0d, stalls %0d",
             cy, slp, dw, st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
