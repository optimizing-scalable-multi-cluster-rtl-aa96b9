// tb_interrupt_ctrl: self-checking test of the interrupt controller for 4
// clusters of 4 cores: single-core wake-ups, broadcast, per-cluster wake-ups,
// out-of-range ids, reads, and the one-cycle pulse timing of every line.
module tb_interrupt_ctrl;
  import mp_pkg::*;
  localparam int unsigned NumClusters = 4, CoresPerCluster = 4, NumCores = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic valid, rvalid;
  mem_req_t req;
  logic [DataW-1:0] rdata;
  logic [NumCores-1:0] irq;

  interrupt_ctrl #(.NumClusters(NumClusters), .CoresPerCluster(CoresPerCluster)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .req_i(req),
    .rvalid_o(rvalid), .rdata_o(rdata), .irq_o(irq)
  );

  int checks = 0, failures = 0;

  task automatic access(logic we, logic [7:0] off, logic [31:0] val, logic [NumCores-1:0] exp_irq);
    @(negedge clk);
    valid = 1'b1; req = '0; req.addr = IrqBase + 32'(off); req.we = we; req.strb = 4'hF;
    req.wdata = val; req.amo = AMO_NONE;
    @(negedge clk);
    valid = 1'b0;
    checks++;
    if (irq !== exp_irq || !rvalid) begin
      failures++; $display("FAIL off %h val %h: irq %b exp %b", off, val, irq, exp_irq);
    end
    @(negedge clk);
    checks++;
    if (irq !== '0) begin failures++; $display("FAIL irq not a pulse: %b", irq); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 1'b0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++; if (irq !== '0) failures++;
    for (int c = 0; c < NumCores; c++) access(1'b1, IrqRegWakeCore, 32'(c), NumCores'(1) << c);
    access(1'b1, IrqRegWakeCore, 32'hFFFF_FFFF, '1);
    access(1'b1, IrqRegWakeCore, 32'd99, '0);
    for (int k = 0; k < NumClusters; k++)
      access(1'b1, IrqRegWakeCluster, 32'(k), NumCores'(4'hF) << (4*k));
    access(1'b1, IrqRegWakeCluster, 32'd7, '0);
    access(1'b0, IrqRegWakeCore, 32'd3, '0);
    checks++; if (rdata !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
