// tb_dma_engine: self-checking test of the DMA engine with two lanes.
// The L1 and system sides are testbench memory models: L1 grants at random and
// answers one cycle later; the system side grants at random and answers
// SysLat cycles later, in order. Jobs are programmed through the register port
// exactly as a core would: an L2->L1 job and an L1->L2 job queued back to back,
// completion detected by polling DONE and IDLE. Both memories are compared
// word by word with the expected copy, including words just outside each
// block, which must be untouched. A final run with every request granted
// checks that the engine moves Ports words per cycle once the pipeline is full.
module tb_dma_engine;
  import mp_pkg::*;
  localparam int unsigned Ports = 2, SysLat = 6, L1Words = 256, L2Words = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic reg_valid, reg_gnt, reg_rvalid;
  mem_req_t reg_req;
  logic [DataW-1:0] reg_rdata;
  logic             l1_valid [Ports];
  mem_req_t         l1_req   [Ports];
  logic             l1_gnt   [Ports];
  logic             l1_rvalid[Ports];
  logic [DataW-1:0] l1_rdata [Ports];
  logic             sys_valid [Ports];
  mem_req_t         sys_req   [Ports];
  logic             sys_gnt   [Ports];
  logic             sys_rvalid[Ports];
  logic [DataW-1:0] sys_rdata [Ports];
  logic idle;
  logic [31:0] done_cnt;

  dma_engine #(.Ports(Ports)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .reg_valid_i(reg_valid), .reg_req_i(reg_req), .reg_gnt_o(reg_gnt),
    .reg_rvalid_o(reg_rvalid), .reg_rdata_o(reg_rdata),
    .l1_valid_o(l1_valid), .l1_req_o(l1_req), .l1_gnt_i(l1_gnt),
    .l1_rvalid_i(l1_rvalid), .l1_rdata_i(l1_rdata),
    .sys_valid_o(sys_valid), .sys_req_o(sys_req), .sys_gnt_i(sys_gnt),
    .sys_rvalid_i(sys_rvalid), .sys_rdata_i(sys_rdata),
    .idle_o(idle), .done_cnt_o(done_cnt)
  );

  int checks = 0, failures = 0;
  logic [31:0] l1m [L1Words];
  logic [31:0] l2m [L2Words];
  logic [31:0] l1_exp [L1Words];
  logic [31:0] l2_exp [L2Words];
  int grant_pct = 60;
  longint cycle = 0;
  logic [31:0] sys_q_data [Ports][$];
  longint      sys_q_due  [Ports][$];

  // memory models
  always @(posedge clk) cycle++;
  for (genvar p = 0; p < Ports; p++) begin : g_mdl
    always @(posedge clk) begin
      int w;
      // L1: respond one cycle after the grant
      l1_rvalid[p] <= 1'b0;
      if (l1_valid[p] && l1_gnt[p]) begin
        w = int'(l1_req[p].addr >> 2);
        l1_rvalid[p] <= 1'b1;
        l1_rdata[p]  <= l1m[w];
        if (l1_req[p].we) l1m[w] = l1_req[p].wdata;
      end
      l1_gnt[p] <= ($urandom % 100) < grant_pct;
      // system side: respond SysLat cycles after the grant
      sys_rvalid[p] <= 1'b0;
      if (sys_q_due[p].size() > 0 && sys_q_due[p][0] == cycle + 1) begin
        sys_rvalid[p] <= 1'b1;
        sys_rdata[p]  <= sys_q_data[p].pop_front();
        void'(sys_q_due[p].pop_front());
      end
      if (sys_valid[p] && sys_gnt[p]) begin
        w = int'((sys_req[p].addr - L2Base) >> 2);
        sys_q_data[p].push_back(l2m[w]);
        sys_q_due[p].push_back(cycle + SysLat);
        if (sys_req[p].we) l2m[w] = sys_req[p].wdata;
      end
      sys_gnt[p] <= ($urandom % 100) < grant_pct;
    end
  end

  task automatic reg_write(logic [7:0] off, logic [31:0] val);
    @(negedge clk);
    reg_valid = 1'b1; reg_req = '0; reg_req.addr = DmaBase + 32'(off); reg_req.we = 1'b1;
    reg_req.strb = 4'hF; reg_req.wdata = val; reg_req.amo = AMO_NONE;
    @(negedge clk);
    reg_valid = 1'b0;
  endtask

  task automatic reg_read(logic [7:0] off, output logic [31:0] val);
    @(negedge clk);
    reg_valid = 1'b1; reg_req = '0; reg_req.addr = DmaBase + 32'(off); reg_req.amo = AMO_NONE;
    @(negedge clk);
    reg_valid = 1'b0;
    val = reg_rdata;
    checks++;
    if (!reg_rvalid) begin failures++; $display("FAIL register read without response"); end
  endtask

  task automatic launch(logic [31:0] src, logic [31:0] dst, int len);
    reg_write(DmaRegSrc, src);
    reg_write(DmaRegDst, dst);
    reg_write(DmaRegLen, 32'(len));
    reg_write(DmaRegLaunch, 32'd1);
  endtask

  task automatic expect_copy(bit into_l1, int src_w, int dst_w, int len);
    for (int i = 0; i < len; i++)
      if (into_l1) l1_exp[dst_w + i] = l2_exp[src_w + i];
      else         l2_exp[dst_w + i] = l1_exp[src_w + i];
  endtask

  task automatic compare_all(string tag);
    int bad = 0;
    for (int i = 0; i < L1Words; i++) if (l1m[i] !== l1_exp[i]) bad++;
    for (int i = 0; i < L2Words; i++) if (l2m[i] !== l2_exp[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d words differ", tag, bad); end
  endtask

  task automatic wait_done(logic [31:0] target);
    logic [31:0] v;
    int polls = 0;
    do begin reg_read(DmaRegDone, v); polls++; end while (v != target && polls < 2000);
    checks++;
    if (v != target) begin failures++; $display("FAIL DONE=%0d, expected %0d", v, target); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    longint t0;
    reg_valid = 1'b0; reg_req = '0;
    for (int p = 0; p < Ports; p++) begin
      l1_gnt[p] = 1'b0; sys_gnt[p] = 1'b0; l1_rvalid[p] = 1'b0; sys_rvalid[p] = 1'b0;
      l1_rdata[p] = '0; sys_rdata[p] = '0;
    end
    for (int i = 0; i < L1Words; i++) begin l1m[i] = $urandom; l1_exp[i] = l1m[i]; end
    for (int i = 0; i < L2Words; i++) begin l2m[i] = $urandom; l2_exp[i] = l2m[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    reg_read(DmaRegIdle, v);
    checks++; if (v != 1) begin failures++; $display("FAIL not idle after reset"); end
    reg_read(DmaRegLaunch, v);
    checks++; if (v != 4) begin failures++; $display("FAIL free slots %0d", v); end

    // two jobs back to back: in (37 words, odd length), then out (20 words)
    launch(L2Base + 32'(4*100), 32'(4*10), 37);
    launch(32'(4*60), L2Base + 32'(4*500), 20);
    expect_copy(1'b1, 100, 10, 37);
    expect_copy(1'b0, 60, 500, 20);
    reg_read(DmaRegIdle, v);
    checks++; if (v != 0) begin failures++; $display("FAIL idle while jobs pending"); end
    wait_done(2);
    reg_read(DmaRegIdle, v);
    checks++; if (v != 1) begin failures++; $display("FAIL not idle after jobs"); end
    compare_all("in+out");

    // out job that reads what the in job wrote, then a zero-length job
    launch(32'(4*10), L2Base + 32'(4*800), 37);
    expect_copy(1'b0, 10, 800, 37);
    launch(32'(4*0), L2Base + 32'(4*0), 0);
    wait_done(4);
    compare_all("chained");

    // full bandwidth: everything granted
    grant_pct = 100;
    repeat (2) @(negedge clk);
    t0 = cycle;
    launch(L2Base + 32'(4*200), 32'(4*100), 128);
    expect_copy(1'b1, 200, 100, 128);
    wait (done_cnt == 5);
    // 4 register writes (8 cycles) + 128/Ports words + system latency + a few
    checks++;
    if (cycle - t0 > 8 + 128/Ports + SysLat + 8) begin
      failures++; $display("FAIL full-grant job took %0d cycles", cycle - t0);
    end
    $display("128-word job with every request granted: %0d cycles incl. programming", cycle - t0);
    repeat (3) @(negedge clk);
    compare_all("full bandwidth");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
