// core_model: behavioural model of one processing core running a
// double-buffered axpy kernel (y = a*x + y) with either the hard or the soft
// double-buffering barrier. Not synthesizable; it stands in for the RISC-V
// cores, which are not part of the RTL.
//
// The core talks to the system only through its memory port (one request
// outstanding) and its interrupt line. Program, for core k of a cluster of Nc:
//   1. write its share of the cluster's input blocks (x and y of every phase)
//      into L2, so the test needs no back door;
//   2. run barrier -1, phases 0..Phases-1 each followed by barrier i;
//   3. read back its share of the results in L2 and compare them with a*x+y.
// L1 per cluster: buffer b at word b*2N holds x[N] then y[N] (N = Nc*Elems);
// word 4N is the barrier counter CNT, 4N+1 READY (number of barriers whose
// next buffer is loaded), 4N+2 PROG (number of barriers whose DMA jobs are
// queued); barrier i is the (i+2)-th barrier, barrier -1 the first.
// Barrier i (soft): wait PROG >= i+1; amoadd CNT. The last core swaps CNT to 0,
// queues the DMA jobs of the next phase (out(i), in(i+2)), writes PROG = i+2
// and wakes the cluster. The first core polls the DMA DONE count until in(i+1)
// has arrived, writes READY = i+2 and wakes the cluster. Every core then sleeps
// until READY >= i+2. Cores therefore wait only for their next buffer.
// Barrier i (hard): the last core waits for the DMA itself, then queues the
// next jobs, writes PROG and READY and wakes the cluster; all other cores
// sleep until then, so nobody starts phase i+1 before every core and the DMA
// finished phase i. A wake-up that arrives before the core sleeps is kept.
module core_model
  import mp_pkg::*;
#(
  parameter int unsigned NumClusters     = 4,
  parameter int unsigned CoresPerCluster = 4,
  parameter int unsigned ClusterId       = 0,
  parameter int unsigned LocalId         = 0,
  parameter int unsigned Phases          = 4,
  parameter int unsigned Elems           = 4,   // elements per core per phase
  parameter bit          Soft            = 1'b1,
  parameter int unsigned Jitter          = 0,   // max extra cycles per element
  parameter int unsigned Imbalance       = 0,   // extra cycles of the last core in even phases
  parameter logic [31:0] Alpha           = 32'd3
) (
  input  logic             clk_i,
  input  logic             start_i,
  output logic             valid_o,
  output mem_req_t         req_o,
  input  logic             gnt_i,
  input  logic             rvalid_i,
  input  logic [DataW-1:0] rdata_i,
  input  logic             irq_i,
  output int               phase_o,      // phase being computed, -1 when not computing
  output logic             finished_o,
  output int               checks_o,
  output int               failures_o,
  output int               sleeps_o,     // times the core slept in a barrier
  output int               dma_waits_o,  // DONE polls that found the buffer not ready
  output int               guard_waits_o // times the two-phases-ahead guard held the core
);
  localparam int unsigned Nc  = CoresPerCluster;
  localparam int unsigned N   = Nc * Elems;
  localparam int unsigned Cnt = 4 * N, Ready = 4 * N + 1, Prog = 4 * N + 2;

  logic        fired = 1'b0, got = 1'b0;
  logic [31:0] got_data = '0;
  int          irq_cnt = 0, irq_used = 0;

  always @(posedge clk_i) begin
    fired    <= valid_o && gnt_i;
    got      <= rvalid_i;
    got_data <= rdata_i;
    if (irq_i) irq_cnt <= irq_cnt + 1;
  end

  // ------------------------------------------------------------ primitives
  task automatic access(input mem_req_t r, output logic [31:0] data);
    @(negedge clk_i);
    valid_o = 1'b1;
    req_o   = r;
    do @(negedge clk_i); while (!fired);
    valid_o = 1'b0;
    while (!got) @(negedge clk_i);
    data = got_data;
  endtask

  task automatic load(input logic [31:0] addr, output logic [31:0] data);
    mem_req_t r;
    r = '0; r.addr = addr; r.amo = AMO_NONE;
    access(r, data);
  endtask

  task automatic store(input logic [31:0] addr, input logic [31:0] data);
    mem_req_t r;
    logic [31:0] unused;
    r = '0; r.addr = addr; r.we = 1'b1; r.strb = 4'hF; r.wdata = data; r.amo = AMO_NONE;
    access(r, unused);
  endtask

  task automatic amo(input amo_e op, input logic [31:0] addr, input logic [31:0] data,
                     output logic [31:0] old);
    mem_req_t r;
    r = '0; r.addr = addr; r.wdata = data; r.amo = op;
    access(r, old);
  endtask

  task automatic wfi();
    sleeps_o++;
    while (irq_cnt == irq_used) @(negedge clk_i);
    irq_used = irq_cnt;
  endtask

  task automatic wake_cluster();
    store(IrqBase + 32'(IrqRegWakeCluster), 32'(ClusterId));
  endtask

  // ------------------------------------------------------------ data layout
  function automatic logic [31:0] l1(int word);
    return 32'(4 * word);
  endfunction

  // word of cluster ClusterId's input block for phase i in L2 (x then y)
  function automatic logic [31:0] l2(int i, int word);
    return L2Base + 32'(4 * ((i * NumClusters + ClusterId) * 2 * N + word));
  endfunction

  function automatic logic [31:0] init_val(int i, int word);
    logic [31:0] h;
    h = 32'(i * 7919 + ClusterId * 104729 + word * 31337) ^ 32'h5bd1_e995;
    return (h * 32'h9E37_79B9) ^ (h >> 13);
  endfunction

  function automatic int done_after_in(int k);   // DONE count once in(k) finished
    return (k == 0) ? 1 : 2 * k;
  endfunction

  task automatic dma_job(input logic [31:0] src, input logic [31:0] dst, input int len);
    store(DmaBase + 32'(DmaRegSrc), src);
    store(DmaBase + 32'(DmaRegDst), dst);
    store(DmaBase + 32'(DmaRegLen), 32'(len));
    store(DmaBase + 32'(DmaRegLaunch), 32'd1);
  endtask

  // jobs queued at barrier i: before phase 0 both inputs, later out(i), in(i+2)
  task automatic queue_jobs(input int i);
    if (i < 0) begin
      dma_job(l2(0, 0), l1(0), 2 * N);
      if (Phases > 1) dma_job(l2(1, 0), l1(2 * N), 2 * N);
    end else begin
      dma_job(l1((i % 2) * 2 * N + N), l2(i, N), N);
      if (i + 2 < Phases) dma_job(l2(i + 2, 0), l1((i % 2) * 2 * N), 2 * N);
    end
  endtask

  function automatic int dma_target(int i);
    return (i + 1 < int'(Phases)) ? done_after_in(i + 1) : 2 * int'(Phases);
  endfunction

  function automatic int jobs_through(int i);   // jobs queued up to barrier i
    int n;
    n = 0;
    for (int k = -1; k <= i; k++)
      if (k < 0) n += (Phases > 1) ? 2 : 1;
      else       n += 1 + ((k + 2 < int'(Phases)) ? 1 : 0);
    return n;
  endfunction

  task automatic wait_flag(input int word, input int value, output bit waited);
    logic [31:0] v;
    waited = 1'b0;
    forever begin
      load(l1(word), v);
      if (int'(v) >= value) break;
      waited = 1'b1;
      wfi();
    end
  endtask

  task automatic wait_dma(input int target);
    logic [31:0] v;
    forever begin
      load(DmaBase + 32'(DmaRegDone), v);
      if (int'(v) >= target) break;
      dma_waits_o++;
    end
  endtask

  task automatic barrier(input int i);
    logic [31:0] old;
    bit waited;
    wait_flag(Prog, i + 1, waited);      // never run two phases ahead
    if (waited) guard_waits_o++;
    amo(AMO_ADD, l1(Cnt), 32'd1, old);
    if (Soft) begin
      if (old == 32'(Nc - 1)) begin
        amo(AMO_SWAP, l1(Cnt), 32'd0, old);
        queue_jobs(i);
        store(l1(Prog), 32'(i + 2));
        wake_cluster();
        old = (Nc == 1) ? 32'd0 : 32'(Nc - 1);
      end
      if (old == 32'd0) begin
        wait_dma(dma_target(i));
        store(l1(Ready), 32'(i + 2));
        wake_cluster();
      end
    end else if (old == 32'(Nc - 1)) begin
      amo(AMO_SWAP, l1(Cnt), 32'd0, old);
      wait_dma(jobs_through(i - 1));      // all work of the current phase
      queue_jobs(i);
      wait_dma(dma_target(i));
      store(l1(Prog), 32'(i + 2));
      store(l1(Ready), 32'(i + 2));
      wake_cluster();
    end
    wait_flag(Ready, i + 2, waited);
  endtask

  // ------------------------------------------------------------ program
  initial begin
    logic [31:0] v, x, y;
    valid_o = 1'b0; req_o = '0; phase_o = -1; finished_o = 1'b0;
    checks_o = 0; failures_o = 0; sleeps_o = 0; dma_waits_o = 0; guard_waits_o = 0;
    @(negedge clk_i);
    while (!start_i) @(negedge clk_i);
    // flags: core 0 clears them, then releases the cluster
    if (LocalId == 0) begin
      store(l1(Cnt), 0); store(l1(Ready), 0); store(l1(Prog), 0);
      wake_cluster();
    end
    wfi();
    // inputs into L2
    for (int i = 0; i < int'(Phases); i++)
      for (int w = int'(LocalId); w < int'(2 * N); w += int'(Nc)) store(l2(i, w), init_val(i, w));
    barrier(-1);
    for (int i = 0; i < int'(Phases); i++) begin
      int base;
      base = (i % 2) * 2 * int'(N);
      phase_o = i;
      for (int m = 0; m < int'(Elems); m++) begin
        int e;
        e = int'(LocalId) + m * int'(Nc);
        load(l1(base + e), x);
        load(l1(base + int'(N) + e), y);
        if (Jitter > 0) repeat ($urandom % (Jitter + 1)) @(negedge clk_i);
        store(l1(base + int'(N) + e), Alpha * x + y);
      end
      if (LocalId == Nc - 1 && i % 2 == 0) repeat (Imbalance) @(negedge clk_i);
      phase_o = -1;
      barrier(i);
    end
    // results
    for (int i = 0; i < int'(Phases); i++)
      for (int e = int'(LocalId); e < int'(N); e += int'(Nc)) begin
        load(l2(i, int'(N) + e), v);
        checks_o++;
        if (v !== Alpha * init_val(i, e) + init_val(i, int'(N) + e)) begin
          failures_o++;
          if (failures_o < 5)
            $display("FAIL cluster %0d core %0d phase %0d elem %0d: %h", ClusterId, LocalId, i, e, v);
        end
      end
    finished_o = 1'b1;
  end

endmodule
