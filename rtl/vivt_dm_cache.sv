// vivt_dm_cache: virtually indexed, virtually tagged, direct-mapped cache
// (32 KB, 64-byte lines, write-through with write-allocate) and its
// controller, made safe against synonyms and snoop invalidates by an RLUT.
//
// Organisation: index VA[14:6] (512 lines), tag VA[31:15]. Tag and data sit
// in single-port synchronous SRAMs that are accessed together in the cycle
// a request is accepted; the valid bits are flip-flops. A store writes its
// bytes into the data SRAM in that same access, before the hit is known: on
// a hit this is the write, on a miss the line is invalidated and refilled,
// so the early write is harmless. This gives one-cycle read and write hits
// from one SRAM access.
//
// Controller (states follow the cache controller flow-chart):
//   READY     "get request": a pending snoop invalidate (inv_*) is applied
//             at once (valid bit cleared) and has priority; otherwise a CPU
//             request is accepted and the arrays are read.
//   CHECK     hit/miss is decided. Hit: the response is given and, in the
//             same cycle, the next request is accepted (one request per
//             clock). A write hit also queues a write-through to the MMU and
//             waits here only if the MMU queue is full. Miss: the line is
//             invalidated and a miss request is sent to the MMU.
//   WAIT_SYN  waits for the synonym message of the RLUT lookup+insert and
//             clears the line it names. Snoop invalidates are not sampled
//             while a miss is pending, so none can overtake the miss.
//   WAIT_LINE waits for the line; it is written into the arrays, marked
//             valid and the requested word returned. A translation or
//             memory error (line response with error, which may also arrive
//             in WAIT_SYN because no RLUT operation follows it) returns an
//             error and leaves the line invalid.
//
// Interface: CPU request/response (response has no back-pressure), MMU
// request (valid/ready), line response from the MMU (valid only), synonym
// message from the RLUT (valid only), snoop invalidate from the RLUT
// (valid/ready). Timing: hit latency 1 cycle, throughput 1 per cycle.
// The paper fixes the sizes, write-through allocate, the 1-cycle hit loop,
// the state order and the sampling rule for invalidates; the handshakes,
// the invalidate priority and the early store write are this design's.
module vivt_dm_cache
  import vivt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // CPU
  input  logic       req_valid,
  output logic       req_ready,
  input  cpu_req_t   req,
  output logic       resp_valid,
  output cpu_resp_t  resp,
  // MMU
  output logic       mreq_valid,
  input  logic       mreq_ready,
  output mmu_req_t   mreq,
  input  logic       line_valid,
  input  line_resp_t line_resp,
  // RLUT
  input  logic       syn_valid,
  input  inval_msg_t syn,
  input  logic       inv_valid,
  output logic       inv_ready,
  input  cidx_t      inv_index
);

  typedef enum logic [1:0] {S_READY, S_CHECK, S_WAIT_SYN, S_WAIT_LINE} state_e;
  state_e state_q, state_d;

  cpu_req_t    req_q;
  logic [LINES-1:0] valid_q;

  function automatic cidx_t idx_of(input vaddr_t a);
    return a[OFF_W +: IDX_W];
  endfunction
  function automatic ctag_t tag_of(input vaddr_t a);
    return a[OFF_W+IDX_W +: CTAG_W];
  endfunction
  function automatic logic [WSEL_W-1:0] wsel_of(input vaddr_t a);
    return a[2 +: WSEL_W];
  endfunction

  // arrays
  logic  tag_en, tag_we, dat_en, dat_we;
  cidx_t arr_addr;
  ctag_t tag_wdata, tag_rdata;
  line_t dat_wdata, dat_rdata;
  logic [LINE_BYTES-1:0] dat_wmask;

  sp_sram #(.DEPTH(LINES), .WIDTH(CTAG_W), .LANE_W(CTAG_W)) u_tag (
    .clk, .en(tag_en), .we(tag_we), .addr(arr_addr),
    .wdata(tag_wdata), .wmask(1'b1), .rdata(tag_rdata)
  );
  sp_sram #(.DEPTH(LINES), .WIDTH(LINE_W), .LANE_W(8)) u_data (
    .clk, .en(dat_en), .we(dat_we), .addr(arr_addr),
    .wdata(dat_wdata), .wmask(dat_wmask), .rdata(dat_rdata)
  );

  logic hit, take_inv, take_req, do_fill, hit_done;

  assign hit = (state_q == S_CHECK) && valid_q[idx_of(req_q.addr)]
               && (tag_rdata == tag_of(req_q.addr));
  // a hit completes this cycle unless its write-through cannot be queued
  assign hit_done  = hit && (!req_q.write || mreq_ready);
  // "get request" happens in READY and in the cycle a hit completes
  assign inv_ready = (state_q == S_READY) || hit_done;
  assign take_inv  = inv_valid && inv_ready;
  assign req_ready = inv_ready && !inv_valid;
  assign take_req  = req_valid && req_ready;
  assign do_fill   = (state_q == S_WAIT_LINE) && line_valid && !line_resp.error;

  // array port
  always_comb begin
    arr_addr  = idx_of(req.addr);
    tag_en    = take_req;
    tag_we    = 1'b0;
    tag_wdata = tag_of(req.addr);
    dat_en    = take_req;
    dat_we    = take_req && req.write;
    dat_wdata = {WORDS{req.wdata}};
    dat_wmask = '0;
    dat_wmask[wsel_of(req.addr)*BE_W +: BE_W] = req.be;
    if (do_fill) begin
      arr_addr  = idx_of(req_q.addr);
      tag_en    = 1'b1;
      tag_we    = 1'b1;
      tag_wdata = tag_of(req_q.addr);
      dat_en    = 1'b1;
      dat_we    = 1'b1;
      dat_wdata = line_resp.line;
      dat_wmask = '1;
    end
  end

  // MMU request: write-through of a write hit, or the miss
  always_comb begin
    mreq_valid  = (state_q == S_CHECK) && (hit ? req_q.write : 1'b1);
    mreq.miss   = !hit;
    mreq.write  = req_q.write;
    mreq.vaddr  = req_q.addr;
    mreq.wdata  = req_q.wdata;
    mreq.be     = req_q.be;
  end

  // CPU response
  always_comb begin
    resp_valid = 1'b0;
    resp.rdata = dat_rdata[wsel_of(req_q.addr)*WORD_W +: WORD_W];
    resp.error = 1'b0;
    if (hit_done) resp_valid = 1'b1;
    if ((state_q == S_WAIT_LINE || state_q == S_WAIT_SYN) && line_valid) begin
      resp_valid = (state_q == S_WAIT_LINE) || line_resp.error;
      resp.rdata = line_resp.line[wsel_of(req_q.addr)*WORD_W +: WORD_W];
      resp.error = line_resp.error;
    end
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_READY:     if (take_req) state_d = S_CHECK;
      S_CHECK:     if (hit) begin
                     if (hit_done) state_d = take_req ? S_CHECK : S_READY;
                   end else if (mreq_ready) state_d = S_WAIT_SYN;
      S_WAIT_SYN:  if (line_valid && line_resp.error) state_d = S_READY;
                   else if (syn_valid) state_d = S_WAIT_LINE;
      S_WAIT_LINE: if (line_valid) state_d = S_READY;
      default:     state_d = S_READY;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_READY;
      valid_q <= '0;
      req_q   <= '0;
    end else begin
      state_q <= state_d;
      if (take_req) req_q <= req;
      if (take_inv) valid_q[inv_index] <= 1'b0;
      // a miss drops the old line (its data may hold the early store)
      if (state_q == S_CHECK && !hit) valid_q[idx_of(req_q.addr)] <= 1'b0;
      if (state_q == S_WAIT_SYN && syn_valid && syn.inval) valid_q[syn.index] <= 1'b0;
      if (do_fill) valid_q[idx_of(req_q.addr)] <= 1'b1;
    end
  end

  // the synonym message and the line only come for a pending miss
  assert property (@(posedge clk) disable iff (!rst_n)
                   syn_valid |-> state_q == S_WAIT_SYN);
  assert property (@(posedge clk) disable iff (!rst_n)
                   line_valid |-> (state_q == S_WAIT_SYN || state_q == S_WAIT_LINE));

endmodule
