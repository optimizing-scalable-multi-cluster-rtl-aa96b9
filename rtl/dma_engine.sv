// dma_engine: the private DMA engine of one cluster, moving words between the
// cluster's L1 and the shared L2.
//
// Cores program it through word registers (offsets in mp_pkg): SRC, DST and LEN
// (in words) stage a job, and a write to LAUNCH pushes the staged job into a
// JobDepth-deep queue. Jobs run one after another. The direction follows from
// the source address: a source in L2 makes an L2->L1 ("in") transfer, any other
// source an L1->L2 ("out") transfer. DONE counts finished jobs and IDLE reads 1
// when nothing is queued or running; these are the termination signals the
// cores poll at the end of a double-buffering phase. A job counts as finished
// only when every write has been acknowledged by the destination memory.
//
// The engine has Ports parallel lanes. Lane p moves words p, p+Ports, p+2*Ports
// ... of the job; each lane has its own L1 port and its own system-interconnect
// port, so a cluster's peak DMA bandwidth is Ports words per cycle. A lane keeps
// issuing reads while its in-flight reads plus buffered words stay below
// FifoDepth, which hides the latency of the system interconnect; read data
// waits in the lane FIFO until the write to the destination is granted.
//
// Register port: always granted, read data one cycle later. Memory ports:
// valid/gnt requests, in-order responses without backpressure.
// The paper gives only the DMA's role (per-cluster L1-L2 transfers programmed by
// the cores, a termination signal they poll); registers, queue and lanes are
// this design's choices.
module dma_engine
  import mp_pkg::*;
#(
  parameter int unsigned Ports     = 1,
  parameter int unsigned JobDepth  = 4,
  parameter int unsigned FifoDepth = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // register port
  input  logic             reg_valid_i,
  input  mem_req_t         reg_req_i,
  output logic             reg_gnt_o,
  output logic             reg_rvalid_o,
  output logic [DataW-1:0] reg_rdata_o,
  // L1 ports
  output logic             l1_valid_o  [Ports],
  output mem_req_t         l1_req_o    [Ports],
  input  logic             l1_gnt_i    [Ports],
  input  logic             l1_rvalid_i [Ports],
  input  logic [DataW-1:0] l1_rdata_i  [Ports],
  // system interconnect ports
  output logic             sys_valid_o [Ports],
  output mem_req_t         sys_req_o   [Ports],
  input  logic             sys_gnt_i   [Ports],
  input  logic             sys_rvalid_i[Ports],
  input  logic [DataW-1:0] sys_rdata_i [Ports],
  // status
  output logic             idle_o,
  output logic [31:0]      done_cnt_o
);
  localparam int unsigned QW = $clog2(JobDepth + 1);
  localparam int unsigned FW = $clog2(FifoDepth);

  typedef struct packed {
    logic [AddrW-1:0] src;
    logic [AddrW-1:0] dst;
    logic [31:0]      len;
  } job_t;

  // ---------------------------------------------------------------- registers
  job_t            stage_q;
  job_t            queue_q [JobDepth];
  logic [QW-1:0]   q_cnt_q;
  logic [$clog2(JobDepth)-1:0] q_rd_q, q_wr_q;
  logic [31:0]     done_q;
  logic            active_q;
  job_t            job_q;
  logic            job_in_q;     // current job goes L2 -> L1
  logic            port_done [Ports];
  logic            all_done;
  logic            push, pop;

  assign reg_gnt_o = 1'b1;
  assign push = reg_valid_i && reg_req_i.we && reg_req_i.addr[7:0] == DmaRegLaunch
                && q_cnt_q != QW'(JobDepth);
  assign pop  = !active_q && q_cnt_q != '0;

  always_comb begin
    all_done = 1'b1;
    for (int p = 0; p < Ports; p++) all_done &= port_done[p];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q      <= '0;
      q_cnt_q      <= '0;
      q_rd_q       <= '0;
      q_wr_q       <= '0;
      done_q       <= '0;
      active_q     <= 1'b0;
      job_q        <= '0;
      job_in_q     <= 1'b0;
      reg_rvalid_o <= 1'b0;
      reg_rdata_o  <= '0;
      for (int j = 0; j < JobDepth; j++) queue_q[j] <= '0;
    end else begin
      reg_rvalid_o <= reg_valid_i;
      if (reg_valid_i) begin
        if (reg_req_i.we) begin
          unique case (reg_req_i.addr[7:0])
            DmaRegSrc: stage_q.src <= reg_req_i.wdata;
            DmaRegDst: stage_q.dst <= reg_req_i.wdata;
            DmaRegLen: stage_q.len <= reg_req_i.wdata;
            default: ;
          endcase
          reg_rdata_o <= '0;
        end else begin
          unique case (reg_req_i.addr[7:0])
            DmaRegSrc:    reg_rdata_o <= stage_q.src;
            DmaRegDst:    reg_rdata_o <= stage_q.dst;
            DmaRegLen:    reg_rdata_o <= stage_q.len;
            DmaRegLaunch: reg_rdata_o <= 32'(JobDepth) - 32'(q_cnt_q);
            DmaRegDone:   reg_rdata_o <= done_q;
            DmaRegIdle:   reg_rdata_o <= {31'b0, idle_o};
            default:      reg_rdata_o <= '0;
          endcase
        end
      end
      if (push) begin
        queue_q[q_wr_q] <= stage_q;
        q_wr_q <= (q_wr_q == $bits(q_wr_q)'(JobDepth - 1)) ? '0 : q_wr_q + 1'b1;
      end
      if (pop) begin
        job_q    <= queue_q[q_rd_q];
        job_in_q <= is_l2(queue_q[q_rd_q].src);
        active_q <= 1'b1;
        q_rd_q   <= (q_rd_q == $bits(q_rd_q)'(JobDepth - 1)) ? '0 : q_rd_q + 1'b1;
      end
      q_cnt_q <= q_cnt_q + QW'(push) - QW'(pop);
      if (active_q && all_done) begin
        active_q <= 1'b0;
        done_q   <= done_q + 1;
      end
    end
  end

  assign idle_o     = !active_q && q_cnt_q == '0;
  assign done_cnt_o = done_q;

  // ---------------------------------------------------------------- lanes
  for (genvar p = 0; p < Ports; p++) begin : g_lane
    logic [31:0]      n_words;
    logic [31:0]      rd_iss_q, wr_iss_q, wr_ack_q;
    logic [AddrW-1:0] rd_addr_q, wr_addr_q;
    logic [DataW-1:0] fifo_q [FifoDepth];
    logic [FW-1:0]    f_wr_q, f_rd_q;
    logic [FW:0]      f_cnt_q;
    logic             rd_req, wr_req, rd_fire, wr_fire, rd_rvalid, wr_rvalid;
    logic [DataW-1:0] rd_rdata;
    mem_req_t         rd_r, wr_r;

    assign n_words = (job_q.len > 32'(p)) ? (job_q.len - 32'(p) + 32'(Ports) - 1) / 32'(Ports) : '0;

    assign rd_req = active_q && rd_iss_q != n_words && (rd_iss_q - wr_iss_q) < 32'(FifoDepth);
    assign wr_req = active_q && f_cnt_q != '0;

    always_comb begin
      rd_r       = '0;
      rd_r.addr  = rd_addr_q;
      rd_r.amo   = AMO_NONE;
      wr_r       = '0;
      wr_r.addr  = wr_addr_q;
      wr_r.we    = 1'b1;
      wr_r.strb  = 4'hF;
      wr_r.wdata = fifo_q[f_rd_q];
      wr_r.amo   = AMO_NONE;
      // in: read L2 over the system port, write L1; out: the reverse
      sys_valid_o[p] = job_in_q ? rd_req : wr_req;
      sys_req_o[p]   = job_in_q ? rd_r   : wr_r;
      l1_valid_o[p]  = job_in_q ? wr_req : rd_req;
      l1_req_o[p]    = job_in_q ? wr_r   : rd_r;
      rd_fire   = rd_req && (job_in_q ? sys_gnt_i[p] : l1_gnt_i[p]);
      wr_fire   = wr_req && (job_in_q ? l1_gnt_i[p]  : sys_gnt_i[p]);
      rd_rvalid = job_in_q ? sys_rvalid_i[p] : l1_rvalid_i[p];
      rd_rdata  = job_in_q ? sys_rdata_i[p]  : l1_rdata_i[p];
      wr_rvalid = job_in_q ? l1_rvalid_i[p]  : sys_rvalid_i[p];
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rd_iss_q  <= '0;
        wr_iss_q  <= '0;
        wr_ack_q  <= '0;
        rd_addr_q <= '0;
        wr_addr_q <= '0;
        f_wr_q    <= '0;
        f_rd_q    <= '0;
        f_cnt_q   <= '0;
        for (int k = 0; k < FifoDepth; k++) fifo_q[k] <= '0;
      end else if (pop) begin
        rd_iss_q  <= '0;
        wr_iss_q  <= '0;
        wr_ack_q  <= '0;
        rd_addr_q <= queue_q[q_rd_q].src + AddrW'(4 * p);
        wr_addr_q <= queue_q[q_rd_q].dst + AddrW'(4 * p);
        f_wr_q    <= '0;
        f_rd_q    <= '0;
        f_cnt_q   <= '0;
      end else if (active_q) begin
        if (rd_fire) begin
          rd_iss_q  <= rd_iss_q + 1;
          rd_addr_q <= rd_addr_q + AddrW'(4 * Ports);
        end
        if (wr_fire) begin
          wr_iss_q  <= wr_iss_q + 1;
          wr_addr_q <= wr_addr_q + AddrW'(4 * Ports);
          f_rd_q    <= (f_rd_q == FW'(FifoDepth - 1)) ? '0 : f_rd_q + 1'b1;
        end
        if (rd_rvalid) begin
          fifo_q[f_wr_q] <= rd_rdata;
          f_wr_q <= (f_wr_q == FW'(FifoDepth - 1)) ? '0 : f_wr_q + 1'b1;
        end
        f_cnt_q <= f_cnt_q + (FW+1)'(rd_rvalid) - (FW+1)'(wr_fire);
        if (wr_rvalid) wr_ack_q <= wr_ack_q + 1;
      end
    end

    assign port_done[p] = (wr_ack_q == n_words);
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   !(reg_valid_i && reg_req_i.we && reg_req_i.addr[7:0] == DmaRegLaunch
                     && q_cnt_q == QW'(JobDepth)))
    else $error("dma_engine: job launched while the queue is full (dropped)");

endmodule
