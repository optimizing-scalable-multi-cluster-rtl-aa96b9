// interrupt_ctrl: the global interrupt controller with a dedicated wake-up line
// to every core of the system.
//
// A core sends an interrupt by writing a register through the system
// interconnect. Writing a global core id to WAKE_CORE raises that core's line;
// writing all ones raises every line. Writing a cluster id to WAKE_CLUSTER
// raises the lines of all cores of that cluster, which is how the first core
// of a cluster releases its peers from a barrier. Lines are one-cycle pulses,
// registered, in the cycle after the write reaches the controller; a core that
// is not yet sleeping must remember the pulse (as a pending wake-up). Reads
// return 0. Every access is answered one cycle later like a memory bank.
//
// The paper gives the controller's role and its dedicated lines to all
// clusters; the register layout and the pulse signalling are this design's.
module interrupt_ctrl
  import mp_pkg::*;
#(
  parameter int unsigned NumClusters      = 16,
  parameter int unsigned CoresPerCluster  = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  input  mem_req_t         req_i,
  output logic             rvalid_o,
  output logic [DataW-1:0] rdata_o,
  output logic [NumClusters*CoresPerCluster-1:0] irq_o
);
  localparam int unsigned NumCores = NumClusters * CoresPerCluster;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      irq_o    <= '0;
      rvalid_o <= 1'b0;
    end else begin
      rvalid_o <= valid_i;
      irq_o    <= '0;
      if (valid_i && req_i.we) begin
        unique case (req_i.addr[7:0])
          IrqRegWakeCore:
            if (&req_i.wdata) irq_o <= '1;
            else if (req_i.wdata < NumCores) irq_o[req_i.wdata] <= 1'b1;
          IrqRegWakeCluster:
            for (int unsigned c = 0; c < NumCores; c++)
              if (c / CoresPerCluster == req_i.wdata) irq_o[c] <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  assign rdata_o = '0;

endmodule
