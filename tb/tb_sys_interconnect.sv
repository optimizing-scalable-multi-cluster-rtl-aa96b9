// tb_sys_interconnect: self-checking test of the system interconnect with 6
// masters, 4 L2 banks (real spm_bank instances) and the interrupt controller
// port (a testbench register that answers with a marker value).
// Masters stream requests with many in flight; each owns every 6th L2 row, so a
// reference copy predicts every response. Checked: data, exact latency
// (Latency cycles after the grant), in-order delivery, that L2 accesses and
// interrupt-controller accesses are routed correctly, and that the L2 accepts
// at most one word per bank per cycle (constant bandwidth).
module tb_sys_interconnect;
  import mp_pkg::*;
  localparam int unsigned NumMst = 6, NumL2Banks = 4, L2BankWords = 64, Latency = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             mst_valid [NumMst];
  mem_req_t         mst_req   [NumMst];
  logic             mst_gnt   [NumMst];
  logic             mst_rvalid[NumMst];
  logic [DataW-1:0] mst_rdata [NumMst];
  logic             l2_valid  [NumL2Banks];
  logic [$clog2(L2BankWords)-1:0] l2_row [NumL2Banks];
  mem_req_t         l2_req    [NumL2Banks];
  logic             l2_rvalid [NumL2Banks];
  logic [DataW-1:0] l2_rdata  [NumL2Banks];
  logic             irq_valid;
  mem_req_t         irq_req;
  logic [DataW-1:0] irq_rdata;

  sys_interconnect #(.NumMst(NumMst), .NumL2Banks(NumL2Banks), .L2BankWords(L2BankWords),
                     .Latency(Latency)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mst_valid_i(mst_valid), .mst_req_i(mst_req), .mst_gnt_o(mst_gnt),
    .mst_rvalid_o(mst_rvalid), .mst_rdata_o(mst_rdata),
    .l2_valid_o(l2_valid), .l2_row_o(l2_row), .l2_req_o(l2_req), .l2_rdata_i(l2_rdata),
    .irq_valid_o(irq_valid), .irq_req_o(irq_req), .irq_rdata_i(irq_rdata)
  );

  for (genvar b = 0; b < NumL2Banks; b++) begin : g_bank
    spm_bank #(.Words(L2BankWords)) i_bank (
      .clk_i(clk), .rst_ni(rst_n), .req_valid_i(l2_valid[b]), .req_row_i(l2_row[b]),
      .req_i(l2_req[b]), .rvalid_o(l2_rvalid[b]), .rdata_o(l2_rdata[b])
    );
  end

  // interrupt-controller stand-in: answers with a marker derived from the address
  always @(posedge clk) irq_rdata <= irq_valid ? (32'hC0DE_0000 | irq_req.addr[15:0]) : 32'h0;

  int checks = 0, failures = 0, irq_hits = 0, stalls = 0;
  logic [31:0] ref_mem [NumL2Banks*L2BankWords];
  logic [31:0] exp_q [NumMst][$];
  longint      due_q [NumMst][$];
  int          issued [NumMst];
  longint      cycle = 0;
  bit          running = 1'b0;

  function automatic mem_req_t new_req(int m);
    mem_req_t q;
    int row;
    q = '0;
    if ($urandom % 10 == 0) begin
      q.addr = IrqBase + 32'(4 * ($urandom % 8));
    end else begin
      row = ($urandom % (L2BankWords / NumMst)) * NumMst + m;
      q.addr = L2Base + 32'(4 * (row * NumL2Banks + $urandom % NumL2Banks));
    end
    q.we = 1'($urandom); q.strb = 4'hF; q.wdata = $urandom;
    q.amo = ($urandom % 5 == 0) ? AMO_ADD : AMO_NONE;
    return q;
  endfunction

  always @(posedge clk) begin
    if (running) begin
      int per_bank [NumL2Banks];
      cycle++;
      for (int b = 0; b < NumL2Banks; b++) per_bank[b] = 0;
      for (int m = 0; m < NumMst; m++) begin
        if (mst_rvalid[m]) begin
          checks++;
          if (exp_q[m].size() == 0) begin failures++; $display("FAIL spurious response %0d", m); end
          else begin
            logic [31:0] e; longint d;
            e = exp_q[m].pop_front(); d = due_q[m].pop_front();
            if (mst_rdata[m] !== e || d != cycle) begin
              failures++;
              $display("FAIL mst %0d: %h exp %h at %0d exp %0d", m, mst_rdata[m], e, cycle, d);
            end
          end
        end
        if (mst_valid[m] && !mst_gnt[m]) stalls++;
        if (mst_valid[m] && mst_gnt[m]) begin
          if (is_l2(mst_req[m].addr)) begin
            int w;
            w = int'((mst_req[m].addr - L2Base) >> 2);
            per_bank[w % NumL2Banks]++;
            exp_q[m].push_back(ref_mem[w]);
            ref_mem[w] = mem_update(ref_mem[w], mst_req[m]);
          end else begin
            irq_hits++;
            exp_q[m].push_back(32'hC0DE_0000 | mst_req[m].addr[15:0]);
          end
          due_q[m].push_back(cycle + Latency);
          issued[m]++;
        end
      end
      for (int b = 0; b < NumL2Banks; b++) begin
        checks++;
        if (per_bank[b] > 1) begin failures++; $display("FAIL bank %0d got %0d grants", b, per_bank[b]); end
      end
      for (int m = 0; m < NumMst; m++) begin
        if (!mst_valid[m] || mst_gnt[m]) begin
          if (issued[m] + (mst_valid[m] && mst_gnt[m] ? 0 : 0) < 400 && ($urandom % 5 != 0)) begin
            mst_valid[m] <= 1'b1; mst_req[m] <= new_req(m);
          end else mst_valid[m] <= 1'b0;
        end
      end
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NumMst; m++) begin mst_valid[m] = 1'b0; mst_req[m] = '0; issued[m] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill L2 through master 0, one write per cycle
    for (int w = 0; w < NumL2Banks*L2BankWords; w++) begin
      mem_req_t q;
      q = '0; q.addr = L2Base + 32'(w*4); q.we = 1'b1; q.strb = 4'hF; q.wdata = $urandom; q.amo = AMO_NONE;
      mst_valid[0] = 1'b1; mst_req[0] = q;
      @(posedge clk);
      checks++;
      if (!mst_gnt[0]) begin failures++; $display("FAIL fill write not granted"); end
      ref_mem[w] = q.wdata;
      @(negedge clk);
    end
    mst_valid[0] = 1'b0;
    repeat (Latency + 2) @(negedge clk);
    running = 1'b1;
    for (int m = 0; m < NumMst; m++) wait (issued[m] >= 400);
    repeat (Latency + 5) @(posedge clk);
    for (int m = 0; m < NumMst; m++) begin
      checks++;
      if (exp_q[m].size() != 0) begin failures++; $display("FAIL master %0d lost responses", m); end
    end
    checks++;
    if (irq_hits == 0 || stalls == 0) begin failures++; $display("FAIL coverage irq %0d stalls %0d", irq_hits, stalls); end
    $display("interrupt-controller accesses %0d, stalled request cycles %0d", irq_hits, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
