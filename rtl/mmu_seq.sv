// mmu_seq: the MMU's miss and write-through sequencer for the I- and D-cache,
// with the RLUT lookup+insert placed between translation and line fill.
//
// Each cache has a request queue (sync_fifo, REQ_Q_DEPTH entries) so that
// write-throughs of write hits do not stall the cache. Requests are served
// one at a time, round-robin between the two queues:
//   1. XLATE/XWAIT: the virtual address is sent to the translation unit
//      (TLB / table walk, outside this block) and the physical address P
//      or an error comes back.
//   2. EXEC: for a miss, (P, V) is presented to that cache's RLUT
//      (lookup+insert) and, at the same time, the memory access starts, so
//      the reverse lookup runs concurrently with the line fetch and adds no
//      latency. A write miss first posts the word write, then reads the line
//      (write-through with allocate). A write-through of a hit only posts the
//      write. EXEC ends when the line is in (read), the write is posted and
//      the RLUT has sent its synonym message (seen on rlut_done).
//   3. RESP: the line goes back to the cache, after the synonym message, so
//      the cache always drops the old alias before it installs the new one.
// On a translation error a miss gets an error line response and no RLUT or
// memory access is made; an erroneous write-through is dropped.
//
// Interface: per cache (index 0 = I, 1 = D) a request channel (valid/ready)
// and a line response (valid only); a translation request (valid/ready) and
// response (valid only); a memory request (valid/ready; writes are posted,
// each read returns exactly one line on mem_resp, in order); per RLUT an
// insert channel (valid/ready) and rlut_done, the RLUT's synonym-message
// strobe. The paper gives the order of the steps and their overlap; queues,
// arbitration and handshakes are this design's choices.
module mmu_seq
  import vivt_pkg::*;
#(
  parameter int unsigned REQ_Q_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // cache ports (0 = I, 1 = D)
  input  logic [1:0]  creq_valid,
  output logic [1:0]  creq_ready,
  input  mmu_req_t    creq [2],
  output logic [1:0]  cline_valid,
  output line_resp_t  cline,
  // translation
  output logic        xreq_valid,
  input  logic        xreq_ready,
  output xlate_req_t  xreq,
  input  logic        xresp_valid,
  input  xlate_resp_t xresp,
  // physical memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  line_resp_t  mem_resp,
  // RLUTs (0 = IRLUT, 1 = DRLUT)
  output logic [1:0]  rlut_ins_valid,
  input  logic [1:0]  rlut_ins_ready,
  output rlut_ins_t   rlut_ins,
  input  logic [1:0]  rlut_done
);

  typedef enum logic [2:0] {M_IDLE, M_XLATE, M_XWAIT, M_EXEC, M_RESP} mstate_e;
  mstate_e state_q;

  // request queues
  logic [1:0] q_valid, q_pop;
  mmu_req_t   q_data [2];

  for (genvar p = 0; p < 2; p++) begin : g_q
    sync_fifo #(.WIDTH($bits(mmu_req_t)), .DEPTH(REQ_Q_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(creq_valid[p]), .in_ready(creq_ready[p]), .in_data(creq[p]),
      .out_valid(q_valid[p]), .out_ready(q_pop[p]), .out_data(q_data[p])
    );
  end

  logic     port_q, last_q;     // port being served, last port served
  mmu_req_t cur_q;
  paddr_t   pa_q;
  logic     rlut_sent_q, rlut_done_q, wr_sent_q, rd_sent_q, line_got_q, err_q;
  line_t    line_q;

  // round-robin pick
  logic pick;
  always_comb begin
    if (q_valid == 2'b11) pick = !last_q;
    else                  pick = q_valid[1];
  end
  assign q_pop[0] = (state_q == M_IDLE) && q_valid[0] && (pick == 1'b0);
  assign q_pop[1] = (state_q == M_IDLE) && q_valid[1] && (pick == 1'b1);

  assign xreq_valid  = (state_q == M_XLATE);
  assign xreq.vaddr  = cur_q.vaddr;
  assign xreq.write  = cur_q.write;

  // EXEC
  logic need_wr, need_rd, exec_done;
  assign need_wr = cur_q.write;
  assign need_rd = cur_q.miss;

  always_comb begin
    rlut_ins_valid         = '0;
    rlut_ins_valid[port_q] = (state_q == M_EXEC) && cur_q.miss && !rlut_sent_q;
    rlut_ins.paddr         = pa_q;
    rlut_ins.vaddr         = cur_q.vaddr;
  end

  always_comb begin
    mem_req_valid = (state_q == M_EXEC) &&
                    ((need_wr && !wr_sent_q) || (need_rd && !rd_sent_q));
    mem_req.write = need_wr && !wr_sent_q;
    mem_req.paddr = pa_q;
    mem_req.wdata = cur_q.wdata;
    mem_req.be    = cur_q.be;
  end

  assign exec_done = (!need_wr || wr_sent_q) && (!need_rd || line_got_q)
                     && (!cur_q.miss || rlut_done_q);

  always_comb begin
    cline_valid         = '0;
    cline_valid[port_q] = (state_q == M_RESP);
    cline.line          = line_q;
    cline.error         = err_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= M_IDLE;
      port_q      <= 1'b0;
      last_q      <= 1'b1;
      cur_q       <= '0;
      pa_q        <= '0;
      rlut_sent_q <= 1'b0;
      rlut_done_q <= 1'b0;
      wr_sent_q   <= 1'b0;
      rd_sent_q   <= 1'b0;
      line_got_q  <= 1'b0;
      err_q       <= 1'b0;
      line_q      <= '0;
    end else begin
      unique case (state_q)
        M_IDLE: if (|q_valid) begin
          port_q      <= pick;
          last_q      <= pick;
          cur_q       <= q_data[pick];
          rlut_sent_q <= 1'b0;
          rlut_done_q <= 1'b0;
          wr_sent_q   <= 1'b0;
          rd_sent_q   <= 1'b0;
          line_got_q  <= 1'b0;
          err_q       <= 1'b0;
          state_q     <= M_XLATE;
        end
        M_XLATE: if (xreq_ready) state_q <= M_XWAIT;
        M_XWAIT: if (xresp_valid) begin
          pa_q <= xresp.paddr;
          if (xresp.error) begin
            err_q   <= 1'b1;
            state_q <= cur_q.miss ? M_RESP : M_IDLE;
          end else begin
            state_q <= M_EXEC;
          end
        end
        M_EXEC: begin
          if (rlut_ins_valid[port_q] && rlut_ins_ready[port_q]) rlut_sent_q <= 1'b1;
          if (rlut_sent_q && rlut_done[port_q]) rlut_done_q <= 1'b1;
          if (mem_req_valid && mem_req_ready) begin
            if (mem_req.write) wr_sent_q <= 1'b1;
            else               rd_sent_q <= 1'b1;
          end
          if (mem_resp_valid) begin
            line_got_q <= 1'b1;
            line_q     <= mem_resp.line;
            err_q      <= mem_resp.error;
          end
          if (exec_done) state_q <= cur_q.miss ? M_RESP : M_IDLE;
        end
        M_RESP:  state_q <= M_IDLE;
        default: state_q <= M_IDLE;
      endcase
    end
  end

  // memory answers only reads that were issued
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_resp_valid |-> (state_q == M_EXEC && rd_sent_q && !line_got_q));

endmodule
