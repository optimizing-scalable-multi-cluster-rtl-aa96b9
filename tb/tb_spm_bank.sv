// tb_spm_bank: self-checking test of one scratchpad bank.
// Drives random loads, byte-strobed stores and every atomic opcode against a
// reference array kept in the testbench, checks the returned old word and the
// one-cycle response timing, and reads the whole bank back at the end.
module tb_spm_bank;
  import mp_pkg::*;
  localparam int unsigned Words = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     valid;
  logic [$clog2(Words)-1:0] row;
  mem_req_t                 req;
  logic                     rvalid;
  logic [DataW-1:0]         rdata;
  int checks = 0, failures = 0;
  logic [DataW-1:0] ref_mem [Words];

  spm_bank #(.Words(Words)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_row_i(row), .req_i(req),
    .rvalid_o(rvalid), .rdata_o(rdata)
  );

  function automatic logic [31:0] ref_op(logic [31:0] o, mem_req_t r);
    logic [31:0] n;
    case (r.amo)
      AMO_ADD:  n = o + r.wdata;
      AMO_SWAP: n = r.wdata;
      AMO_AND:  n = o & r.wdata;
      AMO_OR:   n = o | r.wdata;
      AMO_XOR:  n = o ^ r.wdata;
      AMO_MAX:  n = (int'(o) > int'(r.wdata)) ? o : r.wdata;
      AMO_MAXU: n = (o > r.wdata) ? o : r.wdata;
      AMO_MIN:  n = (int'(o) < int'(r.wdata)) ? o : r.wdata;
      AMO_MINU: n = (o < r.wdata) ? o : r.wdata;
      default: begin
        n = o;
        if (r.we) for (int b = 0; b < 4; b++) if (r.strb[b]) n[8*b+:8] = r.wdata[8*b+:8];
      end
    endcase
    return n;
  endfunction

  task automatic access(input logic [$clog2(Words)-1:0] rw, input mem_req_t r);
    logic [31:0] expect_old;
    expect_old = ref_mem[rw];
    @(negedge clk);
    valid = 1'b1; row = rw; req = r;
    @(negedge clk);
    valid = 1'b0;
    checks++;
    if (!rvalid || rdata !== expect_old) begin
      failures++;
      $display("FAIL row %0d amo %0d: rvalid=%0b got %h exp %h", rw, r.amo, rvalid, rdata, expect_old);
    end
    ref_mem[rw] = ref_op(expect_old, r);
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_req_t r;
    valid = 1'b0; row = '0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // initialise
    for (int i = 0; i < Words; i++) begin
      r = '0; r.addr = 32'(4*i); r.we = 1'b1; r.strb = 4'hF; r.wdata = $urandom; r.amo = AMO_NONE;
      @(negedge clk); valid = 1'b1; row = $bits(row)'(i); req = r;
      ref_mem[i] = r.wdata;
    end
    @(negedge clk); valid = 1'b0;
    // every opcode, with signed corner values
    for (int op = 0; op <= 9; op++) begin
      for (int k = 0; k < 20; k++) begin
        r = '0;
        r.amo   = amo_e'(op);
        r.we    = (op == 0) ? 1'($urandom) : 1'b0;
        r.strb  = 4'($urandom);
        r.wdata = (k % 3 == 0) ? 32'h8000_0000 + $urandom % 4 : $urandom;
        access($bits(row)'($urandom % Words), r);
      end
    end
    // random mix
    for (int k = 0; k < 400; k++) begin
      r = '0;
      r.amo = amo_e'($urandom % 10);
      r.we = 1'($urandom); r.strb = 4'($urandom); r.wdata = $urandom;
      access($bits(row)'($urandom % Words), r);
    end
    // counter: 50 increments of one word
    r = '0; r.we = 1'b1; r.strb = 4'hF; r.wdata = 0; access(5, r);
    for (int k = 0; k < 50; k++) begin r = '0; r.amo = AMO_ADD; r.wdata = 1; access(5, r); end
    r = '0; access(5, r);
    checks++; if (ref_mem[5] != 50) failures++;
    // read back everything
    for (int i = 0; i < Words; i++) begin r = '0; access($bits(row)'(i), r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
