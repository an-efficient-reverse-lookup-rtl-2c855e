// tb_vivt_dm_cache: checks the VIVT direct-mapped cache and its controller.
//
// The bench keeps its own model of the cache state (valid bit and tag per
// line) and predicts hit or miss for every request; it plays the MMU and the
// RLUT: write-throughs and misses are taken with random back-pressure, a miss
// gets a synonym message after 3 cycles (half of them naming a random line to
// invalidate) and the line after 10; some misses fail with an error. Snoop
// invalidates of random lines arrive at random. Checked: read data against a
// reference memory, error responses, that hits answer in one cycle and issue
// no miss, that misses and write hits send the right MMU request, that
// synonym and snoop invalidates remove exactly the named line, that a failed
// miss leaves the line invalid, and that snoop invalidates are not accepted
// while a miss is pending.
module tb_vivt_dm_cache;
  import vivt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_valid, req_ready, resp_valid, mreq_valid, mreq_ready, line_valid,
              syn_valid, inv_valid, inv_ready;
  cpu_req_t   req;
  cpu_resp_t  resp;
  mmu_req_t   mreq;
  line_resp_t line_resp;
  inval_msg_t syn;
  cidx_t      inv_index;

  vivt_dm_cache dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;

  word_t mem [longint];
  function automatic word_t rd(input longint wa);
    return mem.exists(wa) ? mem[wa] : word_t'(wa * 32'h01000193 + 7);
  endfunction
  function automatic word_t merge(input word_t o, input word_t n, input be_t be);
    word_t r = o;
    for (int b = 0; b < 4; b++) if (be[b]) r[b*8 +: 8] = n[b*8 +: 8];
    return r;
  endfunction

  bit    mvalid [LINES];
  ctag_t mtag   [LINES];

  typedef struct { cpu_req_t r; bit hit; longint t; word_t data; } pend_t;
  pend_t pend [$];
  bit req_f = 0, inv_f = 0;

  // MMU / RLUT model for the one pending miss
  bit     miss_on = 0, miss_err;
  longint miss_t;
  vaddr_t miss_va;
  bit     syn_sent;
  longint last_hit_resp = -5;
  int n_b2b = 0;
  int n_hit = 0, n_miss = 0, n_syninv = 0, n_snoop = 0, n_err = 0, n_wt_stall = 0, n_inv_blocked = 0;

  function automatic vaddr_t rand_va();
    ctag_t t = ctag_t'($urandom_range(0, 1));
    cidx_t i = cidx_t'($urandom_range(0, 7) * 37);
    return {t, i, 4'($urandom), 2'b00};
  endfunction

  initial begin
    req_valid = 0; req = '0; mreq_ready = 1; line_valid = 0; line_resp = '0;
    syn_valid = 0; syn = '0; inv_valid = 0; inv_index = '0;
    for (int i = 0; i < LINES; i++) mvalid[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30000; n++) begin
      @(negedge clk);
      cycle++;
      if (req_f) begin req_valid = 0; req_f = 0; end
      if (inv_f) begin inv_valid = 0; inv_f = 0; end
      if (!req_valid && n < 29900 && $urandom_range(0, 7) != 0) begin
        req_valid = 1;
        req.write = ($urandom_range(0, 2) == 0);
        req.addr  = rand_va();
        req.wdata = $urandom;
        req.be    = ($urandom_range(0, 1) == 0) ? 4'hf : 4'($urandom);
      end
      if (!inv_valid && n < 29900 && $urandom_range(0, 49) == 0) begin
        inv_valid = 1;
        inv_index = cidx_t'($urandom_range(0, 7) * 37);
      end
      mreq_ready = ($urandom_range(0, 3) != 0);
      syn_valid  = 0;
      line_valid = 0;
      if (miss_on && !miss_err && !syn_sent && cycle == miss_t + 3) begin
        syn_valid = 1;
        syn.inval = $urandom_range(0, 1);
        syn.index = cidx_t'($urandom_range(0, 7) * 37);
        syn_sent  = 1;
      end
      if (miss_on && cycle == miss_t + (miss_err ? 5 : 10)) begin
        line_valid = 1;
        line_resp.error = miss_err;
        for (int w = 0; w < WORDS; w++)
          line_resp.line[w*32 +: 32] = rd(longint'({miss_va[VA_W-1:OFF_W], WSEL_W'(w)}));
        miss_on = 0;
      end
      #1;
      // -------- model updates, in the order the cache applies them
      if (syn_valid && syn.inval) begin mvalid[syn.index] = 0; n_syninv++; end
      if (line_valid && !line_resp.error) begin
        mvalid[miss_va[IDX_W+OFF_W-1:OFF_W]] = 1; mtag[miss_va[IDX_W+OFF_W-1:OFF_W]] = miss_va[VA_W-1:IDX_W+OFF_W];
      end
      // -------- MMU requests
      if (mreq_valid && mreq_ready) begin
        checks++;
        if (pend.size() == 0) begin failures++; $display("ERROR MMU request without CPU request"); end
        else begin
          automatic pend_t p = pend[0];
          if (mreq.miss == p.hit || mreq.vaddr != p.r.addr || mreq.write != p.r.write ||
              (p.r.write && (mreq.wdata != p.r.wdata || mreq.be != p.r.be))) begin
            failures++; $display("ERROR MMU request miss=%0b exp hit=%0b", mreq.miss, p.hit);
          end
          if (mreq.miss) begin
            miss_on = 1; miss_t = cycle; miss_va = mreq.vaddr; syn_sent = 0;
            miss_err = ($urandom_range(0, 15) == 0);
            if (miss_err) n_err++;
            if (!miss_err && mreq.write) begin
              automatic longint wa = longint'(mreq.vaddr[31:2]);
              mem[wa] = merge(rd(wa), mreq.wdata, mreq.be);
            end
          end else begin
            automatic longint wa = longint'(mreq.vaddr[31:2]);
            mem[wa] = merge(rd(wa), mreq.wdata, mreq.be);
          end
        end
      end
      // -------- responses
      if (resp_valid) begin
        checks++;
        if (pend.size() == 0) begin failures++; $display("ERROR unexpected response"); end
        else begin
          automatic pend_t p = pend.pop_front();
          if (p.hit) begin
            if (last_hit_resp == cycle - 1) n_b2b++;
            last_hit_resp = cycle;
            if (!p.r.write && cycle != p.t + 1) begin failures++; $display("ERROR read hit latency %0d", cycle - p.t); end
            if (resp.error) begin failures++; $display("ERROR error on hit"); end
            if (!p.r.write && resp.rdata != p.data) begin failures++; $display("ERROR hit data %h exp %h", resp.rdata, p.data); end
          end else begin
            if (resp.error != miss_err) begin failures++; $display("ERROR miss error flag"); end
            if (!miss_err && !p.r.write && resp.rdata != p.data) begin failures++; $display("ERROR miss data %h exp %h", resp.rdata, p.data); end
          end
        end
      end
      if (mreq_valid && !mreq_ready && !mreq.miss) n_wt_stall++;
      // -------- snoop invalidates: never taken while a miss is pending
      if (inv_valid && miss_on) begin
        n_inv_blocked++;
        checks++;
        if (inv_ready) begin failures++; $display("ERROR invalidate taken during a miss"); end
      end
      if (inv_valid && inv_ready) begin mvalid[inv_index] = 0; inv_f = 1; n_snoop++; end
      // -------- accepted request: predict hit or miss
      if (req_valid && req_ready) begin
        automatic pend_t p;
        automatic cidx_t i = req.addr[IDX_W+OFF_W-1:OFF_W];
        p.r = req; p.t = cycle;
        p.hit = mvalid[i] && mtag[i] == req.addr[VA_W-1:IDX_W+OFF_W];
        if (!p.hit) mvalid[i] = 0;
        p.data = rd(longint'(req.addr[31:2]));
        // a store hit updates the reference at once (the cache holds it)
        if (p.hit && req.write) mem[longint'(req.addr[31:2])] = merge(rd(longint'(req.addr[31:2])), req.wdata, req.be);
        if (p.hit) n_hit++; else n_miss++;
        pend.push_back(p);
        req_f = 1;
      end
    end
    checks++;
    if (pend.size() != 0) begin failures++; $display("ERROR %0d requests unanswered", pend.size()); end
    checks++;
    if (n_b2b == 0 || n_hit == 0 || n_miss == 0 || n_syninv == 0 || n_snoop == 0 || n_err == 0 || n_wt_stall == 0 || n_inv_blocked == 0) begin
      failures++; $display("ERROR coverage");
    end
    $display("back-to-back hit responses %0d", n_b2b);
    $display("hits %0d misses %0d synonym invalidates %0d snoop invalidates %0d errors %0d wt stalls %0d blocked invalidates %0d",
             n_hit, n_miss, n_syninv, n_snoop, n_err, n_wt_stall, n_inv_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
