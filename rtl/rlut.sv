// rlut: reverse lookup table of a 1-synonym-safe VIVT direct-mapped cache.
//
// For every physical line P whose data is in the cache, the RLUT remembers
// where the (single) virtual alias V of P sits in the cache. Because a page
// maps virtual to physical with V[11:0] == P[11:0], the cache index V[14:6]
// is fully given by P[11:6] and the three "colour" bits V[14:12]. The RLUT is
// therefore a set-associative memory indexed by P[11:6] (64 sets), tagged by
// P[35:12] (24 bits), 8 ways, holding V[14:12] (3 bits) per entry. With the
// cache index {V[14:12], P[11:6]} it can tell the cache which line to drop.
//
// Two operations, each on its own request channel:
//  * lookup+insert (ins_*), from the MMU after translating a miss (P, V):
//    cycle 1 reads the set, cycle 2 compares, writes the updated set back
//    and sends the synonym message (syn_*) to the cache: inval=1 with the
//    index of the old alias W if P was present, inval=0 otherwise. Not
//    pipelined: 2 cycles per operation.
//  * lookup (lk_*), for coherence (snoop) invalidates with address P: the
//    set is read, compared the next cycle, and on a match an invalidate of
//    line {W[14:12], P[11:6]} is offered on inv_*. Fully pipelined: one
//    lookup per clock, result the cycle after acceptance. No match, no
//    message. If the cache does not take the message at once it waits in a
//    one-entry hold register and new lookups are held off.
//
// Insert policy (the paper gives the what, this is the how): if P is
// present, its way gets the new colour. Any other entry whose colour equals
// the new one names the same cache line, which the new fill replaces, so it
// is dropped. If P is absent, the new entry goes into the way holding that
// stale colour, else into the first free way. Valid entries of a set thus
// always have distinct colours, so a set never overflows (8 colours,
// 8 ways). The set memory is a single-port synchronous SRAM; valid bits are
// flip-flops so that reset clears the table. Insert has priority over
// lookup for the SRAM port.
module rlut
  import vivt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // lookup + insert from the MMU
  input  logic        ins_valid,
  output logic        ins_ready,
  input  rlut_ins_t   ins,
  // synonym message to the cache (one per insert, the second cycle)
  output logic        syn_valid,
  output inval_msg_t  syn,
  // lookup from the invalidation queue
  input  logic        lk_valid,
  output logic        lk_ready,
  input  paddr_t      lk_paddr,
  // snoop invalidate to the cache
  output logic        inv_valid,
  input  logic        inv_ready,
  output cidx_t       inv_index
);

  localparam int unsigned EW = RTAG_W + RDATA_W;     // SRAM bits per way

  typedef enum logic [1:0] {OP_NONE, OP_LOOKUP, OP_INSERT} op_e;

  // stage 1 (compare) registers
  op_e    s1_op;
  rset_t  s1_set;
  rtag_t  s1_tag;
  rdata_t s1_va;

  logic [RLUT_WAYS-1:0] valid_q [RLUT_SETS];

  // SRAM port
  logic                      ram_en, ram_we;
  rset_t                     ram_addr;
  logic [RLUT_WAYS*EW-1:0]   ram_wdata, ram_rdata;

  sp_sram #(.DEPTH(RLUT_SETS), .WIDTH(RLUT_WAYS*EW), .LANE_W(RLUT_WAYS*EW)) u_set_mem (
    .clk, .en(ram_en), .we(ram_we), .addr(ram_addr),
    .wdata(ram_wdata), .wmask(1'b1), .rdata(ram_rdata)
  );

  // ------------------------------------------------------------------
  // multiplexor: tag compare over the set just read
  rlut_entry_t set_rd [RLUT_WAYS];
  logic [RLUT_WAYS-1:0] match;
  logic   hit;
  rdata_t hit_va;
  int unsigned hit_way;

  always_comb begin
    hit     = 1'b0;
    hit_va  = '0;
    hit_way = 0;
    for (int w = 0; w < RLUT_WAYS; w++) begin
      set_rd[w].valid = valid_q[s1_set][w];
      set_rd[w].tag   = ram_rdata[w*EW + RDATA_W +: RTAG_W];
      set_rd[w].va    = ram_rdata[w*EW +: RDATA_W];
      match[w]        = set_rd[w].valid && (set_rd[w].tag == s1_tag);
      if (match[w] && !hit) begin
        hit     = 1'b1;
        hit_va  = set_rd[w].va;
        hit_way = w;
      end
    end
  end

  // ------------------------------------------------------------------
  // insert: new contents of the set
  rlut_entry_t          set_wr [RLUT_WAYS];
  logic [RLUT_WAYS-1:0] new_valid;
  logic                 stale_found, free_found;
  int unsigned          stale_way, free_way, tgt_way;

  always_comb begin
    stale_found = 1'b0;
    free_found  = 1'b0;
    stale_way   = 0;
    free_way    = 0;
    for (int w = 0; w < RLUT_WAYS; w++) begin
      set_wr[w] = set_rd[w];
      if (set_rd[w].valid && !match[w] && set_rd[w].va == s1_va && !stale_found) begin
        stale_found = 1'b1;
        stale_way   = w;
      end
      if (!set_rd[w].valid && !free_found) begin
        free_found = 1'b1;
        free_way   = w;
      end
    end
    if (hit)              tgt_way = hit_way;
    else if (stale_found) tgt_way = stale_way;
    else                  tgt_way = free_way;
    // drop the entry naming the cache line that the fill replaces
    if (hit && stale_found) set_wr[stale_way].valid = 1'b0;
    set_wr[tgt_way].valid = 1'b1;
    set_wr[tgt_way].tag   = s1_tag;
    set_wr[tgt_way].va    = s1_va;
    for (int w = 0; w < RLUT_WAYS; w++) begin
      new_valid[w] = set_wr[w].valid;
      ram_wdata[w*EW +: EW] = {set_wr[w].tag, set_wr[w].va};
    end
  end

  // ------------------------------------------------------------------
  // snoop result and hold register
  logic  hold_q;
  cidx_t hold_idx_q;
  logic  s1_lk_hit;

  assign s1_lk_hit = (s1_op == OP_LOOKUP) && hit;
  assign inv_valid = hold_q || s1_lk_hit;
  assign inv_index = hold_q ? hold_idx_q : {hit_va, s1_set};

  // synonym message
  assign syn_valid = (s1_op == OP_INSERT);
  assign syn.inval = hit;
  assign syn.index = {hit_va, s1_set};

  // ------------------------------------------------------------------
  // control logic: accept and SRAM port arbitration
  logic port_free, ins_go, lk_go;

  assign port_free = (s1_op != OP_INSERT);           // insert writes in stage 1
  assign ins_ready = port_free;
  assign ins_go    = ins_valid && ins_ready;
  assign lk_ready  = port_free && !ins_valid && !hold_q && !(s1_lk_hit && !inv_ready);
  assign lk_go     = lk_valid && lk_ready;

  always_comb begin
    ram_en   = ins_go || lk_go || (s1_op == OP_INSERT);
    ram_we   = (s1_op == OP_INSERT);
    ram_addr = ram_we ? s1_set
             : ins_go ? ins.paddr[OFF_W +: RSET_W]
             : lk_paddr[OFF_W +: RSET_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_op      <= OP_NONE;
      s1_set     <= '0;
      s1_tag     <= '0;
      s1_va      <= '0;
      hold_q     <= 1'b0;
      hold_idx_q <= '0;
      for (int s = 0; s < RLUT_SETS; s++) valid_q[s] <= '0;
    end else begin
      if (s1_op == OP_INSERT) valid_q[s1_set] <= new_valid;
      // hold register
      if (hold_q && inv_ready)
        hold_q <= 1'b0;
      else if (!hold_q && s1_lk_hit && !inv_ready) begin
        hold_q     <= 1'b1;
        hold_idx_q <= {hit_va, s1_set};
      end
      // stage 1
      if (ins_go) begin
        s1_op  <= OP_INSERT;
        s1_set <= ins.paddr[OFF_W +: RSET_W];
        s1_tag <= ins.paddr[PGOFF_W +: RTAG_W];
        s1_va  <= ins.vaddr[PGOFF_W +: RDATA_W];
      end else if (lk_go) begin
        s1_op  <= OP_LOOKUP;
        s1_set <= lk_paddr[OFF_W +: RSET_W];
        s1_tag <= lk_paddr[PGOFF_W +: RTAG_W];
      end else begin
        s1_op  <= OP_NONE;
      end
    end
  end

  // the 1-synonym invariant: at most one way matches a physical tag
  assert property (@(posedge clk) disable iff (!rst_n)
                   (s1_op != OP_NONE) |-> $onehot0(match));
  // an insert always finds a way (colours in a set are distinct)
  assert property (@(posedge clk) disable iff (!rst_n)
                   (s1_op == OP_INSERT) |-> (hit || stale_found || free_found));

endmodule
