// spm_bank: one word-wide scratchpad memory bank with atomic operations.
//
// Used for every L1 bank of a cluster and every L2 bank. A request presented
// with req_valid_i is always accepted. One cycle later rvalid_o pulses and
// rdata_o holds the word as it was before the request: the read data of a
// load, the old value of an atomic, and the overwritten word of a store (a
// write acknowledgement). Atomics (add, swap, and, or, xor, signed and unsigned
// max/min) read, modify and write the word in that single cycle, so two cores
// incrementing the same counter can never lose an update. The memory array is
// a plain SystemVerilog array standing in for the SRAM macro; its contents are
// not reset.
//
// The paper states that clusters synchronise with atomics on L1 or L2; the set
// of operations and the one-cycle timing are this design's choices.
module spm_bank
  import mp_pkg::*;
#(
  parameter int unsigned Words = 256
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       req_valid_i,
  input  logic [$clog2(Words)-1:0]   req_row_i,
  input  mem_req_t                   req_i,
  output logic                       rvalid_o,
  output logic [DataW-1:0]           rdata_o
);

  logic [DataW-1:0] mem [Words];

  always_ff @(posedge clk_i) begin
    if (req_valid_i) begin
      rdata_o <= mem[req_row_i];
      if (writes_mem(req_i)) mem[req_row_i] <= mem_update(mem[req_row_i], req_i);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_o <= 1'b0;
    else         rvalid_o <= req_valid_i;
  end

endmodule
