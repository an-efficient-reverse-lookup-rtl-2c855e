// tb_ajit_mem_subsystem: end-to-end test of the core memory subsystem at its
// default sizes (32 KB caches, 64 x 8 RLUTs).
//
// The bench plays the CPU (one load/store stream, one fetch stream), the
// translation unit (a fixed page table, 3-cycle latency), physical memory
// (8-cycle line reads, posted writes, random back-pressure) and the coherent
// memory controller (invalidates). The page table maps several virtual pages
// of different colours (VA[14:12]) onto the same physical page, so synonyms
// are constant, and some virtual pages onto the same physical page with the
// same colour but another tag. Every load and fetch is checked against an
// architectural memory updated in program order; a cached stale synonym or a
// missed invalidate shows up as a wrong value. Other cores' writes are
// modelled by pausing the CPU, changing memory and sending the invalidate;
// data-less invalidates are also sent at random while the CPU runs.
// Each mechanism of the design is counted and must occur at least once.
module tb_ajit_mem_subsystem;
  import vivt_pkg::*;

  localparam int N_DOPS     = 10000;
  localparam int XLAT_LAT   = 3;
  localparam int MEM_LAT    = 8;
  localparam int MAX_CYCLES = 1000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ireq_valid, ireq_ready, iresp_valid;
  cpu_req_t    ireq;
  cpu_resp_t   iresp;
  logic        dreq_valid, dreq_ready, dresp_valid;
  cpu_req_t    dreq;
  cpu_resp_t   dresp;
  logic        snoop_valid, snoop_ready;
  paddr_t      snoop_paddr;
  logic        xreq_valid, xreq_ready, xresp_valid;
  xlate_req_t  xreq;
  xlate_resp_t xresp;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t    mem_req;
  line_resp_t  mem_resp;

  ajit_mem_subsystem dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;

  // ---------------------------------------------------------------- memory
  function automatic word_t init_word(input longint pa);
    return word_t'((pa >> 2) * 64'h9E3779B1) ^ 32'h5A5A_0000;
  endfunction

  word_t phys_mem [longint];     // indexed by PA >> 2
  word_t arch_mem [longint];

  function automatic word_t rd_phys(input longint wa);
    return phys_mem.exists(wa) ? phys_mem[wa] : init_word(wa << 2);
  endfunction
  function automatic word_t rd_arch(input longint wa);
    return arch_mem.exists(wa) ? arch_mem[wa] : init_word(wa << 2);
  endfunction
  function automatic word_t merge(input word_t o, input word_t n, input be_t be);
    word_t r = o;
    for (int b = 0; b < 4; b++) if (be[b]) r[b*8 +: 8] = n[b*8 +: 8];
    return r;
  endfunction

  // ------------------------------------------------------------ page table
  // data: VPN 0x100+i (i=0..15) -> PPN 0x800 + i%4 ; code: VPN 0x200+j -> PPN 0x900 + j%2
  // VPN 0x3ff is unmapped.
  function automatic bit translate(input vaddr_t va, output paddr_t pa);
    logic [19:0] vpn = va[31:12];
    logic [23:0] ppn;
    if (vpn >= 20'h100 && vpn < 20'h110)      ppn = 24'h800 + 24'(vpn[3:0] % 4);
    else if (vpn >= 20'h200 && vpn < 20'h208) ppn = 24'h900 + 24'(vpn[2:0] % 2);
    else begin pa = '0; return 1'b0; end
    pa = {ppn, va[11:0]};
    return 1'b1;
  endfunction

  function automatic vaddr_t rand_data_va();
    // mostly four non-aliased pages, so that lines stay cached; sometimes any
    logic [19:0] vpn = 20'h100 + 20'(($urandom_range(0, 3) != 0) ? $urandom_range(0, 3)
                                                                 : $urandom_range(0, 15));
    logic [11:0] off = {4'($urandom_range(0, 1)), 2'($urandom_range(0, 3)), 4'($urandom), 2'b00};
    return {vpn, off};
  endfunction
  function automatic vaddr_t rand_code_va();
    logic [19:0] vpn = 20'h200 + 20'($urandom_range(0, 7));
    logic [11:0] off = {6'($urandom_range(0, 3)), 4'($urandom), 2'b00};
    return {vpn, off};
  endfunction

  // ------------------------------------------------------------ expected
  typedef struct { bit err; bit is_write; word_t data; longint t; } exp_t;
  exp_t dexp [$];
  exp_t iexp [$];

  // -------------------------------------------------------------- counters
  int n_rd_hit, n_wr_hit, n_b2b, n_rmiss, n_wmiss, n_syn_inv, n_syn_none, n_snoop_inv,
      n_snoop_nomatch, n_hold, n_wt_stall, n_rr_both, n_xerr, n_stale, n_invq_full,
      n_inv_prio, n_imiss, n_lat1, n_ext_wr, n_mem_bp;
  int d_done = 0, i_done = 0;

  // ------------------------------------------------------------ stimulus
  bit   pause = 0;
  bit   st_burst_on = 0;
  int   st_burst = 0;
  vaddr_t last_da = {20'h100, 12'h0};
  bit   d_fired = 0, i_fired = 0;
  int   phase_cnt = 0;
  bit   d_stall_burst;
  paddr_t snq [$];
  typedef struct { line_t line; longint t; } mrd_t;
  mrd_t mrdq [$];
  bit   x_busy = 0;
  longint x_t;
  paddr_t x_pa;
  bit   x_ok;

  function automatic line_t read_line(input paddr_t pa);
    line_t l;
    longint base = longint'({pa[35:6], 6'b0}) >> 2;
    for (int w = 0; w < WORDS; w++) l[w*32 +: 32] = rd_phys(base + w);
    return l;
  endfunction

  initial begin
    ireq_valid = 0; ireq = '0; dreq_valid = 0; dreq = '0;
    snoop_valid = 0; snoop_paddr = '0;
    xreq_ready = 1; xresp_valid = 0; xresp = '0;
    mem_req_ready = 1; mem_resp_valid = 0; mem_resp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      cycle++;
      // ---------------- drive this cycle's inputs
      // D port
      if (d_fired) begin dreq_valid = 0; d_fired = 0; end
      if (i_fired) begin ireq_valid = 0; i_fired = 0; end
      if (!dreq_valid && !pause && d_done < N_DOPS && $urandom_range(0, 9) != 0) begin
        automatic int k = $urandom_range(0, 99);
        dreq_valid = 1;
        dreq.write = (k < 40);
        dreq.addr  = (k == 99) ? {20'h3ff, 12'($urandom) & 12'hffc}
                   : (k >= 90) ? rand_code_va() : rand_data_va();
        if (dreq.write && k >= 90 && k < 99) dreq.addr = rand_data_va();
        // bursts of stores into the line just used fill the write-through queue
        if (k == 98 && !st_burst_on && last_da[31:12] < 20'h200) st_burst_on = 1;
        if (st_burst_on) begin
          dreq.write = 1;
          dreq.addr  = {last_da[31:6], 4'($urandom), 2'b00};
          if (++st_burst == 8) begin st_burst = 0; st_burst_on = 0; end
        end
        last_da = dreq.addr;
        dreq.wdata = $urandom;
        dreq.be    = ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'hf;
      end
      if (!ireq_valid && !pause && d_done < N_DOPS && $urandom_range(0, 3) == 0) begin
        ireq_valid = 1;
        ireq.write = 0;
        ireq.addr  = rand_code_va();
        ireq.wdata = '0;
        ireq.be    = 4'hf;
      end
      // invalidates: queued ones, plus random data-less ones while running
      if (!pause && $urandom_range(0, 99) == 0) begin
        automatic int burst = ($urandom_range(0, 15) == 0) ? 8 : 1;
        for (int b = 0; b < burst; b++) begin
          paddr_t p;
          automatic int s = $urandom_range(0, 2);
          p = (s == 0) ? {24'h800 + 24'($urandom_range(0, 3)), 6'($urandom_range(0, 1) * 32 + $urandom_range(0, 3)), 6'b0}
            : (s == 1) ? {24'h900 + 24'($urandom_range(0, 1)), 6'($urandom_range(0, 3)), 6'b0}
                       : {24'hA00 + 24'($urandom_range(0, 3)), 12'($urandom)};
          snq.push_back(p);
        end
      end
      snoop_valid = (snq.size() != 0);
      if (snoop_valid) snoop_paddr = snq[0];
      // translation
      xresp_valid = 0;
      if (x_busy && cycle >= x_t + XLAT_LAT) begin
        xresp_valid = 1;
        xresp.paddr = x_pa;
        xresp.error = !x_ok;
        x_busy = 0;
      end
      // memory
      mem_req_ready  = ($urandom_range(0, 7) != 0);
      mem_resp_valid = 0;
      if (mrdq.size() != 0 && cycle >= mrdq[0].t + MEM_LAT) begin
        mem_resp_valid = 1;
        mem_resp.line  = mrdq[0].line;
        mem_resp.error = 0;
        void'(mrdq.pop_front());
      end
      #1;
      // ---------------- what happens at the coming edge
      if (dreq_valid && dreq_ready) begin
        exp_t e;
        paddr_t pa;
        automatic bit ok = translate(dreq.addr, pa);
        e.err = !ok; e.is_write = dreq.write; e.t = cycle; e.data = '0;
        if (ok && dreq.write) arch_mem[longint'(pa) >> 2] = merge(rd_arch(longint'(pa) >> 2), dreq.wdata, dreq.be);
        if (ok && !dreq.write) e.data = rd_arch(longint'(pa) >> 2);
        dexp.push_back(e);
        d_fired = 1;
      end
      if (ireq_valid && ireq_ready) begin
        exp_t e;
        paddr_t pa;
        automatic bit ok = translate(ireq.addr, pa);
        e.err = !ok; e.is_write = 0; e.t = cycle;
        e.data = rd_arch(longint'(pa) >> 2);
        iexp.push_back(e);
        i_fired = 1;
      end
      if (dresp_valid) begin
        exp_t e;
        if (dexp.size() == 0) begin failures++; $display("ERROR unexpected D response"); end
        else begin
          e = dexp.pop_front();
          checks++;
          if (dresp.error != e.err || (!e.err && !e.is_write && dresp.rdata != e.data)) begin
            failures++;
            $display("ERROR D resp cycle %0d: err %0b/%0b data %h exp %h", cycle, dresp.error, e.err, dresp.rdata, e.data);
          end
          if (dresp.error) n_xerr++;
          if (cycle == e.t + 1) n_lat1++;
          if (dut.u_dcache.hit_done && !dut.u_dcache.req_q.write) begin
            checks++;
            if (cycle != e.t + 1) begin failures++; $display("ERROR hit latency %0d", cycle - e.t); end
          end
          d_done++;
        end
      end
      if (iresp_valid) begin
        exp_t e;
        if (iexp.size() == 0) begin failures++; $display("ERROR unexpected I response"); end
        else begin
          e = iexp.pop_front();
          checks++;
          if (iresp.error != e.err || iresp.rdata != e.data) begin
            failures++;
            $display("ERROR I resp cycle %0d: data %h exp %h", cycle, iresp.rdata, e.data);
          end
          i_done++;
        end
      end
      if (snoop_valid && snoop_ready) void'(snq.pop_front());
      if (snoop_valid && !snoop_ready) n_invq_full++;
      if (xreq_valid && xreq_ready) begin
        x_busy = 1; x_t = cycle;
        x_ok = translate(xreq.vaddr, x_pa);
      end
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req.write) begin
          automatic longint wa = longint'(mem_req.paddr) >> 2;
          phys_mem[wa] = merge(rd_phys(wa), mem_req.wdata, mem_req.be);
        end else begin
          mrd_t m;
          m.line = read_line(mem_req.paddr);
          m.t = cycle;
          mrdq.push_back(m);
        end
      end
      if (mem_req_valid && !mem_req_ready) n_mem_bp++;
      // ---------------- mechanism counters
      if (dut.u_dcache.hit_done && !dut.u_dcache.req_q.write) n_rd_hit++;
      if (dut.u_dcache.hit_done &&  dut.u_dcache.req_q.write) n_wr_hit++;
      if (dut.u_dcache.hit_done &&  dut.u_dcache.take_req)    n_b2b++;
      if (dut.u_dcache.state_q == 1 && !dut.u_dcache.hit && dut.creq_ready[1]) begin
        if (dut.u_dcache.req_q.write) n_wmiss++; else n_rmiss++;
      end
      if (dut.u_icache.state_q == 1 && !dut.u_icache.hit && dut.creq_ready[0]) n_imiss++;
      for (int r = 0; r < 2; r++) begin
        if (dut.syn_valid[r] &&  dut.syn[r].inval) n_syn_inv++;
        if (dut.syn_valid[r] && !dut.syn[r].inval) n_syn_none++;
        if (dut.inv_valid[r] && dut.inv_ready[r])  n_snoop_inv++;
      end
      if (dut.g_rlut[0].u_rlut.s1_op == 1 && !dut.g_rlut[0].u_rlut.hit) n_snoop_nomatch++;
      if (dut.g_rlut[1].u_rlut.s1_op == 1 && !dut.g_rlut[1].u_rlut.hit) n_snoop_nomatch++;
      if (dut.g_rlut[0].u_rlut.hold_q || dut.g_rlut[1].u_rlut.hold_q) n_hold++;
      if (dut.g_rlut[1].u_rlut.s1_op == 2 && !dut.g_rlut[1].u_rlut.hit && dut.g_rlut[1].u_rlut.stale_found) n_stale++;
      if (dut.creq_valid[1] && !dut.creq_ready[1]) n_wt_stall++;
      if (dut.u_mmu.state_q == 0 && dut.u_mmu.q_valid == 2'b11) n_rr_both++;
      if (dut.u_dcache.inv_valid && dut.u_dcache.inv_ready && dreq_valid) n_inv_prio++;
      // ---------------- other cores' writes: pause, write, invalidate
      phase_cnt++;
      if (!pause && phase_cnt >= 400) begin pause = 1; phase_cnt = 0; end
      if (pause && phase_cnt == 150) begin
        // everything has drained by now: write one word and invalidate it
        paddr_t p;
        longint wa;
        checks++;
        if (dexp.size() != 0 || iexp.size() != 0 || dut.u_mmu.state_q != 0 || dut.u_mmu.q_valid != 0) begin
          failures++; $display("ERROR subsystem not idle after 150 cycles");
        end
        p = ($urandom_range(0, 2) == 0) ? {24'h900 + 24'($urandom_range(0, 1)), 6'($urandom_range(0, 3)), 4'($urandom), 2'b0}
                                       : {24'h800 + 24'($urandom_range(0, 3)), 6'($urandom_range(0, 1) * 32 + $urandom_range(0, 3)), 4'($urandom), 2'b0};
        wa = longint'(p) >> 2;
        phys_mem[wa] = $urandom;
        arch_mem[wa] = phys_mem[wa];
        snq.push_back(p);
        n_ext_wr++;
      end
      if (pause && phase_cnt == 170) begin pause = 0; phase_cnt = 0; end
      if (d_done >= N_DOPS && dexp.size() == 0 && iexp.size() == 0 && !dreq_valid && !ireq_valid) break;
    end
    // ---------------- every mechanism must have happened
    begin
      automatic string names [20] = '{"read hit", "write hit", "back-to-back hit", "read miss", "write miss",
        "synonym invalidate", "insert without synonym", "snoop invalidate applied", "snoop lookup no match",
        "RLUT hold register", "write-through queue full", "MMU both ports pending", "translation error",
        "stale RLUT entry replaced", "invalidation queue full", "invalidate before CPU request",
        "I-cache miss", "1-cycle response", "external write", "memory back-pressure"};
      automatic int cnt [20] = '{n_rd_hit, n_wr_hit, n_b2b, n_rmiss, n_wmiss, n_syn_inv, n_syn_none, n_snoop_inv,
        n_snoop_nomatch, n_hold, n_wt_stall, n_rr_both, n_xerr, n_stale, n_invq_full, n_inv_prio,
        n_imiss, n_lat1, n_ext_wr, n_mem_bp};
      for (int k = 0; k < 20; k++) begin
        $display("  %-30s %0d", names[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("ERROR mechanism never happened: %s", names[k]); end
      end
    end
    $display("D ops %0d, I ops %0d, cycles %0d", d_done, i_done, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("ERROR watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
