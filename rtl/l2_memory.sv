// l2_memory: the shared L2 memory, NumBanks independent word-wide banks.
//
// Each bank accepts one request per cycle from the system interconnect and
// answers one cycle later (see spm_bank), atomics included, so cores of
// different clusters can synchronise on L2 words. The bank count sets the
// constant L2 bandwidth that every cluster configuration shares. The paper
// says L2 may be on-chip SRAM or off-chip DRAM and gives neither its size nor
// its banking: both are this design's choices (4 MiB, 16 banks by default).
module l2_memory
  import mp_pkg::*;
#(
  parameter int unsigned NumBanks  = 16,
  parameter int unsigned BankWords = 65536
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         valid_i  [NumBanks],
  input  logic [$clog2(BankWords)-1:0] row_i    [NumBanks],
  input  mem_req_t                     req_i    [NumBanks],
  output logic                         rvalid_o [NumBanks],
  output logic [DataW-1:0]             rdata_o  [NumBanks]
);
  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    spm_bank #(.Words(BankWords)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i(valid_i[b]),
      .req_row_i  (row_i[b]),
      .req_i      (req_i[b]),
      .rvalid_o   (rvalid_o[b]),
      .rdata_o    (rdata_o[b])
    );
  end
endmodule
