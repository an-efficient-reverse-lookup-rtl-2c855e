// tb_rlut: checks the reverse lookup table against a behavioural model (per
// set, a map physical tag -> virtual colour VA[14:12] with at most one entry
// per tag and per colour). Random lookup+insert and lookup streams on a few
// sets and tags; every synonym message and every snoop invalidate is
// compared with the model. Also checks the timing: a lookup+insert answers
// exactly one cycle after it is accepted and blocks the port for that cycle
// (2 cycles per insert); a lookup answers the cycle after acceptance and
// lookups are accepted back to back (1 per clock) while the cache takes the
// results; results held back by a busy cache come out in order.
module tb_rlut;
  import vivt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       ins_valid, ins_ready, syn_valid, lk_valid, lk_ready, inv_valid, inv_ready;
  rlut_ins_t  ins;
  inval_msg_t syn;
  paddr_t     lk_paddr;
  cidx_t      inv_index;

  rlut dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;

  // model: key {set, tag} -> colour
  int model [longint];
  function automatic longint key(input rset_t s, input rtag_t t);
    return {s, t};
  endfunction

  typedef struct { bit inval; cidx_t index; longint t; } res_t;
  res_t syn_exp [$];
  res_t inv_exp [$];
  bit ins_f = 0, lk_f = 0;
  int n_b2b = 0, n_syn_hit = 0, n_inv = 0, n_hold = 0, n_stale = 0, prev_lk = 0;
  bit busy_cache;
  int ready_run = 0;

  function automatic paddr_t rand_pa();
    automatic rset_t s = rset_t'($urandom_range(0, 3));
    automatic rtag_t t = rtag_t'(24'h100 + $urandom_range(0, 11));
    return {t, s, 6'($urandom)};
  endfunction

  initial begin
    ins_valid = 0; lk_valid = 0; inv_ready = 1; ins = '0; lk_paddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      cycle++;
      if (ins_f) begin ins_valid = 0; ins_f = 0; end
      if (lk_f)  begin lk_valid = 0;  lk_f = 0;  end
      if (!ins_valid && n < 19900 && $urandom_range(0, 5) == 0) begin
        ins_valid = 1;
        ins.paddr = rand_pa();
        ins.vaddr = vaddr_t'($urandom);
        ins.vaddr[PGOFF_W-1:0] = ins.paddr[PGOFF_W-1:0];
      end
      if (!lk_valid && n < 19900 && $urandom_range(0, 3) != 0) begin
        lk_valid = 1;
        lk_paddr = rand_pa();
      end
      busy_cache = (n % 2000) > 1500 && n < 19900;              // phases with a slow cache
      inv_ready  = busy_cache ? ($urandom_range(0, 3) == 0) : 1'b1;
      ready_run = inv_ready ? ready_run + 1 : 0;
      #1;
      // outputs of this cycle
      if (syn_valid) begin
        checks++;
        if (syn_exp.size() == 0) begin failures++; $display("ERROR unexpected syn"); end
        else begin
          automatic res_t e = syn_exp.pop_front();
          if (cycle != e.t + 1) begin failures++; $display("ERROR insert latency"); end
          if (syn.inval != e.inval || (e.inval && syn.index != e.index)) begin
            failures++; $display("ERROR syn %0b %h exp %0b %h", syn.inval, syn.index, e.inval, e.index);
          end
          if (e.inval) n_syn_hit++;
        end
        checks++;
        if (ins_ready) begin failures++; $display("ERROR insert not blocking the port"); end
      end
      if (inv_valid && inv_ready) begin
        checks++;
        if (inv_exp.size() == 0) begin failures++; $display("ERROR unexpected inv"); end
        else begin
          automatic res_t e = inv_exp.pop_front();
          if (inv_index != e.index) begin failures++; $display("ERROR inv %h exp %h", inv_index, e.index); end
          if (ready_run >= 4 && cycle != e.t + 1) begin failures++; $display("ERROR lookup latency"); end
          n_inv++;
        end
      end
      if (dut.hold_q) n_hold++;
      // requests accepted at the coming edge
      if (ins_valid && ins_ready) begin
        res_t r;
        automatic rset_t s = ins.paddr[PGOFF_W-1:OFF_W];
        automatic rtag_t t = ins.paddr[PA_W-1:PGOFF_W];
        automatic int    c = int'(ins.vaddr[IDX_W+OFF_W-1:PGOFF_W]);
        automatic longint k = key(s, t);
        r.t = cycle;
        r.inval = model.exists(k);
        r.index = r.inval ? {rdata_t'(model[k]), s} : '0;
        // drop the entry that names the cache line being refilled
        for (int tt = 0; tt < 12; tt++) begin
          automatic longint k2 = key(s, rtag_t'(24'h100 + tt));
          if (k2 != k && model.exists(k2) && model[k2] == c) begin model.delete(k2); n_stale++; end
        end
        model[k] = c;
        syn_exp.push_back(r);
        ins_f = 1;
      end
      if (lk_valid && lk_ready) begin
        automatic rset_t s = lk_paddr[PGOFF_W-1:OFF_W];
        automatic longint k = key(s, lk_paddr[PA_W-1:PGOFF_W]);
        if (model.exists(k)) begin
          res_t r;
          r.t = cycle; r.inval = 1; r.index = {rdata_t'(model[k]), s};
          inv_exp.push_back(r);
        end
        if (prev_lk == cycle - 1) n_b2b++;
        prev_lk = int'(cycle);
        lk_f = 1;
      end
    end
    checks++;
    if (syn_exp.size() != 0 || inv_exp.size() != 0) begin failures++; $display("ERROR results missing"); end
    checks++;
    if (n_b2b == 0 || n_syn_hit == 0 || n_inv == 0 || n_hold == 0 || n_stale == 0) begin
      failures++; $display("ERROR coverage b2b %0d synhit %0d inv %0d hold %0d stale %0d", n_b2b, n_syn_hit, n_inv, n_hold, n_stale);
    end
    $display("back-to-back lookups %0d, synonym hits %0d, invalidates %0d, hold cycles %0d, stale drops %0d",
             n_b2b, n_syn_hit, n_inv, n_hold, n_stale);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("ERROR watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
