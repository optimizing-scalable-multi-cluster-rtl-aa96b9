// mp_pkg: types, address map and helper functions shared by every block of the
// multi-cluster manycore system.
//
// The system is a set of shared-L1 clusters (cores, banked L1 scratchpad, L1
// interconnect, DMA) joined by a high-latency system interconnect to a banked
// L2 memory and a global interrupt controller. Every memory-side transfer in it
// is one 32-bit word: a request (address, write flag, byte strobes, write data
// and an atomic opcode) accepted on valid & gnt, and a response word returned a
// fixed number of cycles later, in order, without backpressure.
//
// The cluster/core organisation, the L1 size and the L1 latencies follow the
// paper. The address map, the atomic opcode set, the register layout of the DMA
// and of the interrupt controller are this design's own choices.
package mp_pkg;

  localparam int unsigned DataW = 32;
  localparam int unsigned AddrW = 32;

  // Atomic memory operations executed inside a memory bank (RISC-V "A" set
  // without LR/SC). The bank returns the old word and stores op(old, wdata).
  typedef enum logic [3:0] {
    AMO_NONE = 4'd0,
    AMO_ADD  = 4'd1,
    AMO_SWAP = 4'd2,
    AMO_AND  = 4'd3,
    AMO_OR   = 4'd4,
    AMO_XOR  = 4'd5,
    AMO_MAX  = 4'd6,
    AMO_MAXU = 4'd7,
    AMO_MIN  = 4'd8,
    AMO_MINU = 4'd9
  } amo_e;

  typedef struct packed {
    logic [AddrW-1:0] addr;   // byte address
    logic             we;     // write (ignored when amo != AMO_NONE)
    logic [3:0]       strb;   // byte enables of a write
    logic [DataW-1:0] wdata;
    amo_e             amo;
  } mem_req_t;

  // Address map (byte addresses).
  //   0x0000_0000 + n : the issuing core's own cluster L1
  //   0x4000_0000     : the issuing core's own cluster DMA registers
  //   0x4001_0000     : global interrupt controller
  //   0x8000_0000 + n : shared L2
  localparam logic [AddrW-1:0] L1Base    = 32'h0000_0000;
  localparam logic [AddrW-1:0] DmaBase   = 32'h4000_0000;
  localparam logic [AddrW-1:0] IrqBase   = 32'h4001_0000;
  localparam logic [AddrW-1:0] L2Base    = 32'h8000_0000;

  // DMA register offsets (word aligned).
  localparam logic [7:0] DmaRegSrc    = 8'h00; // source byte address
  localparam logic [7:0] DmaRegDst    = 8'h04; // destination byte address
  localparam logic [7:0] DmaRegLen    = 8'h08; // length in words
  localparam logic [7:0] DmaRegLaunch = 8'h0C; // write: queue the job; read: queue free slots
  localparam logic [7:0] DmaRegDone   = 8'h10; // read: jobs completed since reset
  localparam logic [7:0] DmaRegIdle   = 8'h14; // read: 1 when no job is queued or running

  // Interrupt controller register offsets.
  localparam logic [7:0] IrqRegWakeCore    = 8'h00; // write a global core id; all ones wakes every core
  localparam logic [7:0] IrqRegWakeCluster = 8'h04; // write a cluster id: wakes all its cores

  typedef enum logic [1:0] {
    TGT_L1   = 2'd0,
    TGT_DMA  = 2'd1,
    TGT_SYS  = 2'd2
  } target_e;

  // Where a core request goes, seen from inside a cluster.
  function automatic target_e decode_target(logic [AddrW-1:0] addr);
    if (addr[31:30] == 2'b00)                      return TGT_L1;
    else if (addr[31:16] == DmaBase[31:16])        return TGT_DMA;
    else                                           return TGT_SYS;
  endfunction

  function automatic logic is_l2(logic [AddrW-1:0] addr);
    return addr[31] == 1'b1;
  endfunction

  // Apply an atomic operation or a byte-strobed write to a stored word.
  function automatic logic [DataW-1:0] mem_update(logic [DataW-1:0] old, mem_req_t req);
    logic [DataW-1:0] res;
    unique case (req.amo)
      AMO_ADD:  res = old + req.wdata;
      AMO_SWAP: res = req.wdata;
      AMO_AND:  res = old & req.wdata;
      AMO_OR:   res = old | req.wdata;
      AMO_XOR:  res = old ^ req.wdata;
      AMO_MAX:  res = ($signed(old) > $signed(req.wdata)) ? old : req.wdata;
      AMO_MAXU: res = (old > req.wdata) ? old : req.wdata;
      AMO_MIN:  res = ($signed(old) < $signed(req.wdata)) ? old : req.wdata;
      AMO_MINU: res = (old < req.wdata) ? old : req.wdata;
      default: begin
        res = old;
        for (int b = 0; b < 4; b++)
          if (req.we && req.strb[b]) res[8*b +: 8] = req.wdata[8*b +: 8];
      end
    endcase
    return res;
  endfunction

  function automatic logic writes_mem(mem_req_t req);
    return (req.amo != AMO_NONE) || req.we;
  endfunction

endpackage
