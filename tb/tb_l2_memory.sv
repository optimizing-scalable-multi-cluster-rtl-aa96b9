// tb_l2_memory: self-checking test of the banked L2 memory: all banks are
// accessed in the same cycle with random loads, stores and atomics, and every
// bank's response (old word, one cycle later) is compared with a reference.
module tb_l2_memory;
  import mp_pkg::*;
  localparam int unsigned NumBanks = 4, BankWords = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                         valid  [NumBanks];
  logic [$clog2(BankWords)-1:0] row    [NumBanks];
  mem_req_t                     req    [NumBanks];
  logic                         rvalid [NumBanks];
  logic [DataW-1:0]             rdata  [NumBanks];

  l2_memory #(.NumBanks(NumBanks), .BankWords(BankWords)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .row_i(row), .req_i(req),
    .rvalid_o(rvalid), .rdata_o(rdata)
  );

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [NumBanks][BankWords];
  logic [31:0] expv [NumBanks];
  logic        expect_resp [NumBanks];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NumBanks; b++) begin valid[b] = 1'b0; row[b] = '0; req[b] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < BankWords; r++) begin
      for (int b = 0; b < NumBanks; b++) begin
        valid[b] = 1'b1; row[b] = $bits(row[b])'(r);
        req[b] = '0; req[b].we = 1'b1; req[b].strb = 4'hF; req[b].wdata = $urandom; req[b].amo = AMO_NONE;
        ref_mem[b][r] = req[b].wdata;
      end
      @(negedge clk);
    end
    for (int k = 0; k < 500; k++) begin
      for (int b = 0; b < NumBanks; b++) begin
        valid[b] = 1'($urandom);
        row[b] = $bits(row[b])'($urandom % BankWords);
        req[b] = '0; req[b].we = 1'($urandom); req[b].strb = 4'($urandom); req[b].wdata = $urandom;
        req[b].amo = amo_e'($urandom % 10);
        expect_resp[b] = valid[b];
        expv[b] = ref_mem[b][row[b]];
        if (valid[b]) ref_mem[b][row[b]] = mem_update(ref_mem[b][row[b]], req[b]);
      end
      @(negedge clk);
      for (int b = 0; b < NumBanks; b++) begin
        checks++;
        if (rvalid[b] != expect_resp[b] || (expect_resp[b] && rdata[b] !== expv[b])) begin
          failures++;
          $display("FAIL bank %0d: rvalid %0b data %h exp %h", b, rvalid[b], rdata[b], expv[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
