// tb_mp_cluster: self-checking test of one cluster with 8 cores in a NUMA
// arrangement (4 tiles of 2 cores, 2 tiles per group, latencies 1/3/5) and a
// 2-lane DMA. The system side is a testbench L2 model (random grants, fixed
// latency, in-order responses). Each core concurrently issues random loads,
// stores and atomics to its own L1 words and its own L2 words and reads DMA
// registers, checking every returned word against a reference. Then all cores
// increment one shared L1 counter atomically, and core 0 programs an L2->L1 and
// an L1->L2 DMA job, polls DONE, and all cores verify the copied words.
module tb_mp_cluster;
  import mp_pkg::*;
  localparam int unsigned NumCores = 8, DmaPorts = 2, BankWords = 16, SysLat = 5;
  localparam int unsigned NumBanks = NumCores * 4, L1Words = NumBanks * BankWords;
  localparam int unsigned L2Words = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             c_valid [NumCores];
  mem_req_t         c_req   [NumCores];
  logic             c_gnt   [NumCores];
  logic             c_rvalid[NumCores];
  logic [DataW-1:0] c_rdata [NumCores];
  logic             s_valid [DmaPorts+1];
  mem_req_t         s_req   [DmaPorts+1];
  logic             s_gnt   [DmaPorts+1];
  logic             s_rvalid[DmaPorts+1];
  logic [DataW-1:0] s_rdata [DmaPorts+1];
  logic             idle;
  logic [31:0]      done_cnt;

  mp_cluster #(.NumCores(NumCores), .BanksPerCore(4), .BankWords(BankWords), .DmaPorts(DmaPorts),
               .TileCores(2), .GroupTiles(2), .LatTile(1), .LatGroup(3), .LatRemote(5)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_valid_i(c_valid), .core_req_i(c_req), .core_gnt_o(c_gnt),
    .core_rvalid_o(c_rvalid), .core_rdata_o(c_rdata),
    .sys_valid_o(s_valid), .sys_req_o(s_req), .sys_gnt_i(s_gnt),
    .sys_rvalid_i(s_rvalid), .sys_rdata_i(s_rdata),
    .dma_idle_o(idle), .dma_done_o(done_cnt)
  );

  // ---------------------------------------------------------------- L2 model
  logic [31:0] l2m [L2Words];
  longint cycle = 0;
  always @(posedge clk) cycle++;
  for (genvar p = 0; p < DmaPorts + 1; p++) begin : g_l2
    logic [31:0] q_data [$];
    longint      q_due  [$];
    always @(posedge clk) begin
      s_rvalid[p] <= 1'b0;
      if (q_due.size() > 0 && q_due[0] == cycle + 1) begin
        s_rvalid[p] <= 1'b1;
        s_rdata[p]  <= q_data.pop_front();
        void'(q_due.pop_front());
      end
      if (s_valid[p] && s_gnt[p]) begin
        int w;
        w = int'((s_req[p].addr - L2Base) >> 2) % L2Words;
        q_data.push_back(l2m[w]);
        q_due.push_back(cycle + SysLat);
        if (writes_mem(s_req[p])) l2m[w] = mem_update(l2m[w], s_req[p]);
      end
      s_gnt[p] <= ($urandom % 3) != 0;
    end
  end

  int checks = 0, failures = 0;
  logic [31:0] l1_ref [L1Words];
  logic [31:0] l2_ref [L2Words];
  int finished = 0;
  bit l1_ready = 1'b0;   // set once core 0 has written the initial L1 image
  event go_dma, dma_done;

  for (genvar c = 0; c < NumCores; c++) begin : g_core
    logic fired = 1'b0, got = 1'b0;
    logic [31:0] got_data = '0;
    always @(posedge clk) begin
      fired <= c_valid[c] && c_gnt[c];
      got <= c_rvalid[c];
      got_data <= c_rdata[c];
    end

    task automatic access(input mem_req_t r, output logic [31:0] data);
      @(negedge clk);
      c_valid[c] = 1'b1; c_req[c] = r;
      do @(negedge clk); while (!fired);
      c_valid[c] = 1'b0;
      while (!got) @(negedge clk);
      data = got_data;
    endtask

    task automatic check(input mem_req_t r, input logic [31:0] expv);
      logic [31:0] d;
      access(r, d);
      checks++;
      if (d !== expv) begin
        failures++; $display("FAIL core %0d addr %h: %h exp %h", c, r.addr, d, expv);
      end
    endtask

    initial begin
      mem_req_t r;
      c_valid[c] = 1'b0; c_req[c] = '0;
      wait (l1_ready);
      repeat (2) @(negedge clk);
      for (int k = 0; k < 150; k++) begin
        int sel, w;
        r = '0; r.we = 1'($urandom); r.strb = 4'($urandom); r.wdata = $urandom;
        r.amo = ($urandom % 4 == 0) ? amo_e'(1 + $urandom % 9) : AMO_NONE;
        sel = $urandom % 10;
        if (sel < 6) begin            // own L1 words: rows 0..7 are shared by all, row 8+c is mine
          w = (8 + c) * NumBanks + $urandom % NumBanks;
          r.addr = 32'(4 * w);
          check(r, l1_ref[w]);
          l1_ref[w] = mem_update(l1_ref[w], r);
        end else if (sel < 9) begin   // own L2 words
          w = 512 + c * 32 + $urandom % 32;
          r.addr = L2Base + 32'(4 * w);
          check(r, l2_ref[w]);
          l2_ref[w] = mem_update(l2_ref[w], r);
        end else begin                // DMA status
          r = '0; r.addr = DmaBase + 32'(DmaRegDone);
          check(r, 32'd0);
        end
      end
      // shared counter in L1
      for (int k = 0; k < 10; k++) begin
        logic [31:0] d;
        r = '0; r.addr = 32'(4 * 3); r.wdata = 1; r.amo = AMO_ADD;
        access(r, d);
      end
      finished++;
      @(dma_done);
      // everybody checks the words the DMA brought in
      for (int w = c; w < 40; w += NumCores) begin
        r = '0; r.addr = 32'(4 * (NumBanks + w));
        check(r, l2_ref[100 + w]);
      end
      finished++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_req_t r;
    logic [31:0] d;
    for (int i = 0; i < L2Words; i++) begin l2m[i] = $urandom; l2_ref[i] = l2m[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // initial L1 contents through the cores' own stores would race; use core 0
    for (int w = 0; w < L1Words; w++) begin
      r = '0; r.addr = 32'(4 * w); r.we = 1'b1; r.strb = 4'hF; r.wdata = (w == 3) ? 0 : $urandom;
      r.amo = AMO_NONE;
      l1_ref[w] = r.wdata;
      g_core[0].access(r, d);
    end
    l1_ready = 1'b1;
    wait (finished == NumCores);
    // counter
    r = '0; r.addr = 32'(4 * 3);
    g_core[1].check(r, 32'(NumCores * 10));
    // DMA: L2[100..139] -> L1 row 1 (words NumBanks..), then L1 row 8.. -> L2[700..]
    r = '0; r.we = 1'b1; r.strb = 4'hF; r.amo = AMO_NONE;
    r.addr = DmaBase + 32'(DmaRegSrc);    r.wdata = L2Base + 32'(4 * 100); g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegDst);    r.wdata = 32'(4 * NumBanks);      g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegLen);    r.wdata = 40;                     g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegLaunch); r.wdata = 1;                      g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegSrc);    r.wdata = 32'(4 * 8 * NumBanks);  g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegDst);    r.wdata = L2Base + 32'(4 * 700);  g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegLen);    r.wdata = 33;                     g_core[0].access(r, d);
    r.addr = DmaBase + 32'(DmaRegLaunch); r.wdata = 1;                      g_core[0].access(r, d);
    do begin
      r = '0; r.addr = DmaBase + 32'(DmaRegDone);
      g_core[0].access(r, d);
    end while (d != 2);
    checks++;
    for (int w = 0; w < 33; w++) if (l2m[700 + w] !== l1_ref[8 * NumBanks + w]) begin
      failures++; $display("FAIL DMA out word %0d", w); break;
    end
    -> dma_done;
    wait (finished == 2 * NumCores);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
