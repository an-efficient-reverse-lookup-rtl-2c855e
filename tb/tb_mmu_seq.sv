// tb_mmu_seq: checks the MMU miss / write-through sequencer.
//
// Two random request streams (I and D cache ports) of misses, write misses
// and write-throughs, each with a unique address so the bench can tell which
// request the MMU is serving. The bench plays the translation unit (3 cycles,
// some pages fault), memory (8-cycle reads, random back-pressure) and both
// RLUTs (random back-pressure, done strobe one cycle after an insert).
// Checked: each port is served in order and both are served; the translated
// address goes to the right RLUT with the virtual address, only for misses;
// a write goes to memory before the line read; the line returns to the right
// port, only after the RLUT finished, and carries the memory's data; a fault
// gives an error line (miss) or nothing (write-through) and no memory or
// RLUT access. Also counts the cycles in which the RLUT operation and the
// line fetch overlap, which must happen.
module tb_mmu_seq;
  import vivt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]  creq_valid, creq_ready, cline_valid, rlut_ins_valid, rlut_ins_ready, rlut_done;
  mmu_req_t    creq [2];
  line_resp_t  cline;
  logic        xreq_valid, xreq_ready, xresp_valid, mem_req_valid, mem_req_ready, mem_resp_valid;
  xlate_req_t  xreq;
  xlate_resp_t xresp;
  mem_req_t    mem_req;
  line_resp_t  mem_resp;
  rlut_ins_t   rlut_ins;

  mmu_seq dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;

  function automatic paddr_t xl(input vaddr_t va);
    return {4'h3, va[31:12] ^ 20'h5A5A5, va[11:0]};
  endfunction
  function automatic bit fault(input vaddr_t va);
    return va[31:28] == 4'hF;
  endfunction
  function automatic line_t line_of(input paddr_t pa);
    line_t l;
    for (int w = 0; w < WORDS; w++) l[w*32 +: 32] = word_t'(pa[35:6]) * 32'h9E3779B1 + 32'(w);
    return l;
  endfunction

  mmu_req_t q [2][$];
  bit       cur_on = 0;
  int       cur_p;
  mmu_req_t cur;
  bit       cur_wr_done, cur_rd_done, cur_ins_done, cur_rlut_done, cur_line_in;
  longint   ready_t;
  longint   x_t;  bit x_busy = 0;  vaddr_t x_va;
  longint   m_t [$];  paddr_t m_pa [$];
  longint   done_t [2] = '{-10, -10};
  bit       cr_f [2] = '{0, 0};
  int       uniq = 0;
  int n_served [2] = '{0, 0};
  int n_overlap = 0, n_fault = 0, n_wmiss = 0, n_wt = 0;

  initial begin
    creq_valid = 0; creq[0] = '0; creq[1] = '0;
    xreq_ready = 1; xresp_valid = 0; xresp = '0;
    mem_req_ready = 1; mem_resp_valid = 0; mem_resp = '0;
    rlut_ins_ready = 2'b11; rlut_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30000; n++) begin
      @(negedge clk);
      cycle++;
      for (int p = 0; p < 2; p++) begin
        if (cr_f[p]) begin creq_valid[p] = 0; cr_f[p] = 0; end
        if (!creq_valid[p] && n < 29000 && $urandom_range(0, 9) == 0) begin
          creq_valid[p]   = 1;
          uniq++;
          creq[p].miss    = ($urandom_range(0, 2) != 0);
          creq[p].write   = (p == 1) && $urandom_range(0, 1);
          if (!creq[p].miss) creq[p].write = 1;
          creq[p].vaddr   = {($urandom_range(0, 15) == 0) ? 4'hF : 4'h1, 16'(uniq), 6'($urandom), 6'b0};
          creq[p].wdata   = $urandom;
          creq[p].be      = 4'($urandom);
        end
      end
      // translation, memory, RLUT models
      xresp_valid = 0;
      if (x_busy && cycle == x_t + 3) begin
        xresp_valid = 1; xresp.paddr = xl(x_va); xresp.error = fault(x_va); x_busy = 0;
      end
      mem_req_ready  = ($urandom_range(0, 3) != 0);
      mem_resp_valid = 0;
      if (m_t.size() != 0 && cycle >= m_t[0] + 8) begin
        mem_resp_valid = 1; mem_resp.line = line_of(m_pa[0]); mem_resp.error = 0;
        void'(m_t.pop_front()); void'(m_pa.pop_front());
      end
      rlut_ins_ready = (n % 500 > 440) ? 2'b00 : 2'($urandom);   // phases of a slow RLUT
      rlut_done = '0;
      for (int p = 0; p < 2; p++) if (done_t[p] == cycle - 1) rlut_done[p] = 1;
      #1;
      // -------- checks on what happens at the coming edge
      if (cur_on && cur.miss && cur_ins_done && !cur_rlut_done && cur_rd_done && !cur_line_in) n_overlap++;
      if (xreq_valid && xreq_ready) begin
        automatic int found = -1;
        checks++;
        if (cur_on) begin failures++; $display("ERROR translation while busy"); end
        for (int p = 0; p < 2; p++) if (q[p].size() != 0 && q[p][0].vaddr == xreq.vaddr) found = p;
        if (found < 0) begin failures++; $display("ERROR translation for unknown or out-of-order request %h", xreq.vaddr); end
        else begin
          cur = q[found].pop_front(); cur_p = found; cur_on = 1;
          cur_wr_done = 0; cur_rd_done = 0; cur_ins_done = 0; cur_rlut_done = 0; cur_line_in = 0;
          n_served[found]++;
          if (fault(cur.vaddr)) n_fault++;
          if (cur.miss && cur.write) n_wmiss++;
          if (!cur.miss) n_wt++;
        end
        x_busy = 1; x_t = cycle; x_va = xreq.vaddr;
      end
      for (int p = 0; p < 2; p++) if (rlut_ins_valid[p] && rlut_ins_ready[p]) begin
        checks++;
        if (!cur_on || p != cur_p || !cur.miss || cur_ins_done || fault(cur.vaddr) ||
            rlut_ins.paddr != xl(cur.vaddr) || rlut_ins.vaddr != cur.vaddr) begin
          failures++; $display("ERROR RLUT insert");
        end
        cur_ins_done = 1; done_t[p] = cycle;
      end
      if (rlut_done[cur_p] && cur_on) cur_rlut_done = 1;
      if (mem_req_valid && mem_req_ready) begin
        checks++;
        if (!cur_on || fault(cur.vaddr) || mem_req.paddr != xl(cur.vaddr)) begin failures++; $display("ERROR memory address"); end
        else if (mem_req.write) begin
          if (!cur.write || cur_wr_done || mem_req.wdata != cur.wdata || mem_req.be != cur.be) begin failures++; $display("ERROR memory write"); end
          cur_wr_done = 1;
          if (!cur.miss) cur_on = 0;              // write-through complete
        end else begin
          if (!cur.miss || cur_rd_done || (cur.write && !cur_wr_done)) begin failures++; $display("ERROR memory read"); end
          cur_rd_done = 1;
          m_t.push_back(cycle); m_pa.push_back(mem_req.paddr);
        end
      end
      if (mem_resp_valid && cur_on) begin cur_line_in = 1; ready_t = cycle; end
      if (cur_on && fault(cur.vaddr) && xresp_valid && !cur.miss) cur_on = 0;
      for (int p = 0; p < 2; p++) if (cline_valid[p]) begin
        checks++;
        if (!cur_on || p != cur_p || !cur.miss) begin failures++; $display("ERROR unexpected line response"); end
        else if (fault(cur.vaddr)) begin
          if (!cline.error || cur_ins_done || cur_rd_done || cur_wr_done) begin failures++; $display("ERROR fault handling"); end
        end else begin
          if (cline.error || cline.line != line_of(xl(cur.vaddr)) || !cur_rlut_done || !cur_line_in)
            begin failures++; $display("ERROR line response"); end
        end
        cur_on = 0;
      end
      for (int p = 0; p < 2; p++) if (creq_valid[p] && creq_ready[p]) begin
        q[p].push_back(creq[p]); cr_f[p] = 1;
      end
    end
    checks++;
    if (cur_on || q[0].size() != 0 || q[1].size() != 0) begin failures++; $display("ERROR requests left over"); end
    checks++;
    if (n_served[0] == 0 || n_served[1] == 0 || n_overlap == 0 || n_fault == 0 || n_wmiss == 0 || n_wt == 0) begin
      failures++; $display("ERROR coverage");
    end
    $display("served I %0d D %0d, RLUT/fetch overlap %0d, faults %0d, write misses %0d, write-throughs %0d",
             n_served[0], n_served[1], n_overlap, n_fault, n_wmiss, n_wt);
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
