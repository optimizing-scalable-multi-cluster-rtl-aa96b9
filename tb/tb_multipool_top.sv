// tb_multipool_top: end-to-end test of the multi-cluster system at reduced
// size. Three systems run side by side, each with its own multipool_top and a
// full set of core models running the double-buffered axpy kernel:
//   A: 4 clusters x 4 cores, UMA L1, soft barrier, unbalanced cores
//      (compute-bound: the DMA finishes first, cores overlap phases)
//   B: the same system with the hard barrier (no overlap allowed)
//   C: 1 cluster x 16 cores, NUMA L1 (1/3/5 cycles), 4 DMA lanes, soft barrier,
//      no extra compute (memory-bound: cores wait for the DMA)
// Every core checks its results in L2. Each mechanism the design has must have
// happened at least once: phase overlap under the soft barrier (and never under
// the hard one), barrier sleeps/wake-ups, DMA-behind polls, the
// two-phases-ahead guard, request stalls from contention, and L1 responses at
// 1, 3 and 5 cycles in the NUMA cluster.
module tb_multipool_top;
  import mp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned PH = 6;

  // ---------------------------------------------------------------- A and B
  localparam int unsigned NA = 16;
  logic             a_valid [NA], b_valid [NA];
  mem_req_t         a_req   [NA], b_req   [NA];
  logic             a_gnt   [NA], b_gnt   [NA];
  logic             a_rvalid[NA], b_rvalid[NA];
  logic [DataW-1:0] a_rdata [NA], b_rdata [NA];
  logic [NA-1:0]    a_irq, b_irq;
  logic [3:0]       a_idle, b_idle;

  // ---------------------------------------------------------------- C
  localparam int unsigned NC = 16;
  logic             c_valid [NC];
  mem_req_t         c_req   [NC];
  logic             c_gnt   [NC];
  logic             c_rvalid[NC];
  logic [DataW-1:0] c_rdata [NC];
  logic [NC-1:0]    c_irq;
  logic [0:0]       c_idle;

  multipool_top #(.NumClusters(4), .CoresPerCluster(4), .L1BytesTotal(4096), .NumL2Banks(4),
                  .L2Bytes(8192), .SysLatency(8)) dut_a (
    .clk_i(clk), .rst_ni(rst_n), .core_valid_i(a_valid), .core_req_i(a_req),
    .core_gnt_o(a_gnt), .core_rvalid_o(a_rvalid), .core_rdata_o(a_rdata),
    .irq_o(a_irq), .dma_idle_o(a_idle));

  multipool_top #(.NumClusters(4), .CoresPerCluster(4), .L1BytesTotal(4096), .NumL2Banks(4),
                  .L2Bytes(8192), .SysLatency(8)) dut_b (
    .clk_i(clk), .rst_ni(rst_n), .core_valid_i(b_valid), .core_req_i(b_req),
    .core_gnt_o(b_gnt), .core_rvalid_o(b_rvalid), .core_rdata_o(b_rdata),
    .irq_o(b_irq), .dma_idle_o(b_idle));

  multipool_top #(.NumClusters(1), .CoresPerCluster(16), .L1BytesTotal(4096), .NumL2Banks(4),
                  .L2Bytes(16384), .SysLatency(8), .UmaMaxCores(4), .TileCores(4),
                  .GroupTiles(2)) dut_c (
    .clk_i(clk), .rst_ni(rst_n), .core_valid_i(c_valid), .core_req_i(c_req),
    .core_gnt_o(c_gnt), .core_rvalid_o(c_rvalid), .core_rdata_o(c_rdata),
    .irq_o(c_irq), .dma_idle_o(c_idle));

  logic   a_done, b_done, c_done;
  int     a_chk, b_chk, c_chk, a_fl, b_fl, c_fl;
  int     a_slp, b_slp, c_slp, a_dw, b_dw, c_dw, a_gw, b_gw, c_gw;
  longint a_ov, b_ov, c_ov, a_st, b_st, c_st, a_cy, b_cy, c_cy;
  int     a_lat [8], b_lat [8], c_lat [8];

  mp_workload #(.NumClusters(4), .CoresPerCluster(4), .Phases(PH), .Elems(8), .Soft(1'b1),
                .Jitter(6), .Imbalance(150)) wl_a (
    .clk_i(clk), .start_i(start), .valid_o(a_valid), .req_o(a_req), .gnt_i(a_gnt),
    .rvalid_i(a_rvalid), .rdata_i(a_rdata), .irq_i(a_irq), .done_o(a_done),
    .checks_o(a_chk), .failures_o(a_fl), .sleeps_o(a_slp), .dma_waits_o(a_dw),
    .guard_waits_o(a_gw), .overlap_cycles_o(a_ov), .stall_cycles_o(a_st), .cycles_o(a_cy),
    .l1_lat_o(a_lat));

  mp_workload #(.NumClusters(4), .CoresPerCluster(4), .Phases(PH), .Elems(8), .Soft(1'b0),
                .Jitter(6), .Imbalance(150)) wl_b (
    .clk_i(clk), .start_i(start), .valid_o(b_valid), .req_o(b_req), .gnt_i(b_gnt),
    .rvalid_i(b_rvalid), .rdata_i(b_rdata), .irq_i(b_irq), .done_o(b_done),
    .checks_o(b_chk), .failures_o(b_fl), .sleeps_o(b_slp), .dma_waits_o(b_dw),
    .guard_waits_o(b_gw), .overlap_cycles_o(b_ov), .stall_cycles_o(b_st), .cycles_o(b_cy),
    .l1_lat_o(b_lat));

  mp_workload #(.NumClusters(1), .CoresPerCluster(16), .Phases(PH), .Elems(4), .Soft(1'b1),
                .Jitter(0), .Imbalance(0)) wl_c (
    .clk_i(clk), .start_i(start), .valid_o(c_valid), .req_o(c_req), .gnt_i(c_gnt),
    .rvalid_i(c_rvalid), .rdata_i(c_rdata), .irq_i(c_irq), .done_o(c_done),
    .checks_o(c_chk), .failures_o(c_fl), .sleeps_o(c_slp), .dma_waits_o(c_dw),
    .guard_waits_o(c_gw), .overlap_cycles_o(c_ov), .stall_cycles_o(c_st), .cycles_o(c_cy),
    .l1_lat_o(c_lat));

  int checks = 0, failures = 0;

  task automatic need(string what, longint count);
    checks++;
    if (count <= 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: A %0b B %0b C %0b", a_done, b_done, c_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (a_done && b_done && c_done);
    repeat (2) @(negedge clk);
    checks   += a_chk + b_chk + c_chk;
    failures += a_fl + b_fl + c_fl;
    $display("A soft 4x4 : %0d cycles, overlap %0d, sleeps %0d, dma waits %0d, guard waits %0d, stalls %0d",
             a_cy, a_ov, a_slp, a_dw, a_gw, a_st);
    $display("B hard 4x4 : %0d cycles, overlap %0d, sleeps %0d, dma waits %0d, guard waits %0d, stalls %0d",
             b_cy, b_ov, b_slp, b_dw, b_gw, b_st);
    $display("C soft 1x16: %0d cycles, overlap %0d, sleeps %0d, dma waits %0d, guard waits %0d, stalls %0d",
             c_cy, c_ov, c_slp, c_dw, c_gw, c_st);
    $display("L1 latency histogram A: 1:%0d 2:%0d 3:%0d 5:%0d | C: 1:%0d 2:%0d 3:%0d 5:%0d",
             a_lat[1], a_lat[2], a_lat[3], a_lat[5], c_lat[1], c_lat[2], c_lat[3], c_lat[5]);
    need("soft barrier: overlapping compute phases", a_ov);
    checks++;
    if (b_ov != 0) begin failures++; $display("FAIL hard barrier let phases overlap"); end
    need("barrier sleep / interrupt wake-up", a_slp + b_slp + c_slp);
    need("core polled DMA that was still busy (memory-bound)", c_dw);
    need("two-phases-ahead guard", a_gw);
    need("request stalled by contention", a_st + c_st);
    need("UMA L1 access, 1 cycle", a_lat[1]);
    need("NUMA L1 access, 1 cycle (own tile)", c_lat[1]);
    need("NUMA L1 access, 3 cycles (own group)", c_lat[3]);
    need("NUMA L1 access, 5 cycles (other group)", c_lat[5]);
    checks++;
    if (a_lat[2] + a_lat[3] + a_lat[4] + a_lat[5] != 0) begin
      failures++; $display("FAIL UMA cluster returned an L1 access later than 1 cycle");
    end
    need("soft barrier faster than hard barrier on the compute-bound run", b_cy - a_cy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
