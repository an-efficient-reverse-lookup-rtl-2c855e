// ajit_mem_subsystem: one core's level-1 memory subsystem with VIVT
// direct-mapped I- and D-caches kept synonym-free and coherent by two
// reverse lookup tables.
//
//   CPU fetch ----> ICACHE (32 KB) <-- IRLUT (64 x 8, 1728 B) <--+
//                      |                  ^                      |
//                      v                  | lookup+insert        | invalidates
//                     MMU sequencer ------+------> memory port   | (physical
//                      ^                  | lookup+insert        |  addresses)
//                      |                  v                      |
//   CPU ld/st ----> DCACHE (32 KB) <-- DRLUT (64 x 8, 1728 B) <--+-- queue
//
// On a miss the MMU translates V to P, then presents (P, V) to the cache's
// RLUT while it fetches the line; the RLUT names the line of any older alias
// of P, which the cache drops before the new line is installed, so at most
// one virtual copy of each physical line is ever cached. Coherence
// invalidates from the memory system (physical addresses) go through an
// invalidation queue to both RLUTs, which turn each into the cache line
// index to invalidate, at one lookup per clock.
//
// Ports: two CPU ports (request valid/ready, response valid), the snoop
// invalidate input (valid/ready, physical address), the translation port of
// the MMU (request valid/ready, response valid) and the memory port (request
// valid/ready, writes posted, in-order line responses). The CPU, the
// translation unit, the memory and the coherent memory controller are
// outside this block. Queue depths are this design's choices.
module ajit_mem_subsystem
  import vivt_pkg::*;
#(
  parameter int unsigned INVQ_DEPTH  = 4,
  parameter int unsigned REQ_Q_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // CPU instruction fetch port
  input  logic        ireq_valid,
  output logic        ireq_ready,
  input  cpu_req_t    ireq,
  output logic        iresp_valid,
  output cpu_resp_t   iresp,
  // CPU load/store port
  input  logic        dreq_valid,
  output logic        dreq_ready,
  input  cpu_req_t    dreq,
  output logic        dresp_valid,
  output cpu_resp_t   dresp,
  // coherence invalidates from the memory controller
  input  logic        snoop_valid,
  output logic        snoop_ready,
  input  paddr_t      snoop_paddr,
  // address translation
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
  input  line_resp_t  mem_resp
);

  // cache <-> MMU
  logic [1:0] creq_valid, creq_ready, cline_valid;
  mmu_req_t   creq [2];
  line_resp_t cline;
  // MMU <-> RLUT
  logic [1:0] ins_valid, ins_ready, syn_valid;
  rlut_ins_t  ins;
  inval_msg_t syn [2];
  // RLUT <-> cache snoop invalidates
  logic [1:0] inv_valid, inv_ready;
  cidx_t      inv_index [2];
  // invalidation queue -> RLUT lookups
  logic       q_valid, q_pop;
  paddr_t     q_paddr;
  logic [1:0] lk_valid, lk_ready, lk_done_q;

  sync_fifo #(.WIDTH(PA_W), .DEPTH(INVQ_DEPTH)) u_invq (
    .clk, .rst_n,
    .in_valid(snoop_valid), .in_ready(snoop_ready), .in_data(snoop_paddr),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_paddr)
  );

  // every invalidate goes to both RLUTs; it leaves the queue once both took it
  for (genvar r = 0; r < 2; r++) begin : g_fork
    assign lk_valid[r] = q_valid && !lk_done_q[r];
  end
  assign q_pop = q_valid && (lk_done_q[0] || lk_ready[0]) && (lk_done_q[1] || lk_ready[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     lk_done_q <= '0;
    else if (q_pop) lk_done_q <= '0;
    else            lk_done_q <= lk_done_q | (lk_valid & lk_ready);
  end

  vivt_dm_cache u_icache (
    .clk, .rst_n,
    .req_valid(ireq_valid), .req_ready(ireq_ready), .req(ireq),
    .resp_valid(iresp_valid), .resp(iresp),
    .mreq_valid(creq_valid[0]), .mreq_ready(creq_ready[0]), .mreq(creq[0]),
    .line_valid(cline_valid[0]), .line_resp(cline),
    .syn_valid(syn_valid[0]), .syn(syn[0]),
    .inv_valid(inv_valid[0]), .inv_ready(inv_ready[0]), .inv_index(inv_index[0])
  );

  vivt_dm_cache u_dcache (
    .clk, .rst_n,
    .req_valid(dreq_valid), .req_ready(dreq_ready), .req(dreq),
    .resp_valid(dresp_valid), .resp(dresp),
    .mreq_valid(creq_valid[1]), .mreq_ready(creq_ready[1]), .mreq(creq[1]),
    .line_valid(cline_valid[1]), .line_resp(cline),
    .syn_valid(syn_valid[1]), .syn(syn[1]),
    .inv_valid(inv_valid[1]), .inv_ready(inv_ready[1]), .inv_index(inv_index[1])
  );

  for (genvar r = 0; r < 2; r++) begin : g_rlut
    rlut u_rlut (
      .clk, .rst_n,
      .ins_valid(ins_valid[r]), .ins_ready(ins_ready[r]), .ins(ins),
      .syn_valid(syn_valid[r]), .syn(syn[r]),
      .lk_valid(lk_valid[r]), .lk_ready(lk_ready[r]), .lk_paddr(q_paddr),
      .inv_valid(inv_valid[r]), .inv_ready(inv_ready[r]), .inv_index(inv_index[r])
    );
  end

  mmu_seq #(.REQ_Q_DEPTH(REQ_Q_DEPTH)) u_mmu (
    .clk, .rst_n,
    .creq_valid, .creq_ready, .creq, .cline_valid, .cline,
    .xreq_valid, .xreq_ready, .xreq, .xresp_valid, .xresp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp,
    .rlut_ins_valid(ins_valid), .rlut_ins_ready(ins_ready), .rlut_ins(ins),
    .rlut_done(syn_valid)
  );

endmodule
