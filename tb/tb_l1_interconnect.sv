// tb_l1_interconnect: self-checking test of the L1 crossbar in a small NUMA
// configuration: 8 cores in 4 tiles of 2, 2 tiles per group, 32 banks, plus one
// DMA port, with tile/group/remote latencies of 1/3/5 cycles.
// Each requester owns every NReq-th row, so a reference copy per requester
// predicts every returned word even though all requesters hit all banks. The
// test checks data, the exact grant-to-response latency of every access, and
// that bank conflicts occurred and were resolved.
module tb_l1_interconnect;
  import mp_pkg::*;
  localparam int unsigned NumCores = 8, NumDma = 1, NumBanks = 32, BankWords = 16;
  localparam int unsigned TileCores = 2, GroupTiles = 2;
  localparam int unsigned NReq = NumCores + NumDma;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             req_valid [NReq];
  mem_req_t         req       [NReq];
  logic             gnt       [NReq];
  logic             resp_valid[NReq];
  logic [DataW-1:0] resp_rdata[NReq];
  logic             bk_valid  [NumBanks];
  logic [$clog2(BankWords)-1:0] bk_row [NumBanks];
  mem_req_t         bk_req    [NumBanks];
  logic             bk_rvalid [NumBanks];
  logic [DataW-1:0] bk_rdata  [NumBanks];

  l1_interconnect #(
    .NumCores(NumCores), .NumDma(NumDma), .NumBanks(NumBanks), .BankWords(BankWords),
    .TileCores(TileCores), .GroupTiles(GroupTiles), .LatTile(1), .LatGroup(3), .LatRemote(5)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_i(req), .gnt_o(gnt),
    .resp_valid_o(resp_valid), .resp_rdata_o(resp_rdata),
    .bank_valid_o(bk_valid), .bank_row_o(bk_row), .bank_req_o(bk_req),
    .bank_rvalid_i(bk_rvalid), .bank_rdata_i(bk_rdata)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    spm_bank #(.Words(BankWords)) i_bank (
      .clk_i(clk), .rst_ni(rst_n), .req_valid_i(bk_valid[b]), .req_row_i(bk_row[b]),
      .req_i(bk_req[b]), .rvalid_o(bk_rvalid[b]), .rdata_o(bk_rdata[b])
    );
  end

  int checks = 0, failures = 0, conflicts = 0;
  int lat_seen [6];
  logic [31:0] ref_mem [NumBanks*BankWords];
  logic [31:0] exp_q   [NReq][$];
  longint      due_q   [NReq][$];
  int          issued  [NReq];
  longint      cycle = 0;
  bit          running = 1'b0;

  // reference latency, computed from the geometry independently of the DUT
  function automatic int exp_lat(int r, int word);
    int bank, btile, ctile;
    if (r >= NumCores) return 1;
    bank  = word % NumBanks;
    btile = bank / (NumBanks / (NumCores / TileCores));
    ctile = r / TileCores;
    if (btile == ctile) return 1;
    if (btile / GroupTiles == ctile / GroupTiles) return 3;
    return 5;
  endfunction

  function automatic mem_req_t new_req(int r);
    mem_req_t q;
    int row, bank;
    q = '0;
    row  = ($urandom % (BankWords / NReq)) * NReq + r;   // rows owned by r
    bank = $urandom % NumBanks;
    q.addr  = 32'((row * NumBanks + bank) * 4);
    q.we    = 1'($urandom);
    q.strb  = 4'hF;
    q.wdata = $urandom;
    q.amo   = ($urandom % 4 == 0) ? AMO_ADD : AMO_NONE;
    return q;
  endfunction

  always @(posedge clk) begin
    if (running) begin
      cycle++;
      for (int r = 0; r < NReq; r++) begin
        if (resp_valid[r]) begin
          checks++;
          if (exp_q[r].size() == 0) begin
            failures++; $display("FAIL unexpected response at requester %0d", r);
          end else begin
            logic [31:0] e; longint d;
            e = exp_q[r].pop_front(); d = due_q[r].pop_front();
            if (resp_rdata[r] !== e || d != cycle) begin
              failures++;
              $display("FAIL req %0d: data %h exp %h, cycle %0d exp %0d", r, resp_rdata[r], e, cycle, d);
            end
          end
        end
        if (req_valid[r] && !gnt[r]) conflicts++;
        if (req_valid[r] && gnt[r]) begin
          int w, l;
          w = int'(req[r].addr >> 2);
          l = exp_lat(r, w);
          lat_seen[l]++;
          exp_q[r].push_back(ref_mem[w]);
          due_q[r].push_back(cycle + longint'(l));
          ref_mem[w] = mem_update(ref_mem[w], req[r]);
          issued[r]++;
        end
      end
      // next requests: cores wait for their response, the DMA port streams
      for (int r = 0; r < NReq; r++) begin
        logic busy;
        busy = (req_valid[r] && !gnt[r]) ||
               (r < NumCores && (exp_q[r].size() > 0 || (req_valid[r] && gnt[r])));
        if (!busy) begin
          if (issued[r] < 300 && ($urandom % 4 != 0)) begin
            req_valid[r] <= 1'b1; req[r] <= new_req(r);
          end else req_valid[r] <= 1'b0;
        end else if (req_valid[r] && gnt[r]) req_valid[r] <= 1'b0;
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NReq; r++) begin req_valid[r] = 1'b0; req[r] = '0; issued[r] = 0; end
    for (int l = 0; l < 6; l++) lat_seen[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // write known values through the DMA port, one word per cycle
    for (int w = 0; w < NumBanks*BankWords; w++) begin
      mem_req_t q;
      q = '0; q.addr = 32'(w*4); q.we = 1'b1; q.strb = 4'hF; q.wdata = $urandom; q.amo = AMO_NONE;
      req_valid[NumCores] = 1'b1; req[NumCores] = q;
      @(posedge clk);
      checks++;
      if (!gnt[NumCores]) begin failures++; $display("FAIL DMA write not granted"); end
      ref_mem[w] = q.wdata;
      @(negedge clk);
    end
    req_valid[NumCores] = 1'b0;
    @(negedge clk);
    running = 1'b1;
    for (int r = 0; r < NReq; r++) wait (issued[r] >= 300);
    repeat (20) @(posedge clk);
    for (int r = 0; r < NReq; r++) begin
      checks++;
      if (issued[r] < 300 || exp_q[r].size() != 0) begin
        failures++; $display("FAIL requester %0d issued %0d pending %0d", r, issued[r], exp_q[r].size());
      end
    end
    checks++;
    if (conflicts == 0 || lat_seen[1] == 0 || lat_seen[3] == 0 || lat_seen[5] == 0) begin
      failures++;
      $display("FAIL coverage: conflicts %0d lat1 %0d lat3 %0d lat5 %0d", conflicts, lat_seen[1], lat_seen[3], lat_seen[5]);
    end
    $display("conflict cycles %0d, accesses with latency 1/3/5: %0d/%0d/%0d", conflicts, lat_seen[1], lat_seen[3], lat_seen[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
