// ced_top: the coset ensemble decoder, clustering engine plus K candidates.
//
// One decoding task: the defects (non-trivial detectors) of an L x L x R
// syndrome volume are streamed in, clustered by a Union-Find style growth
// and merge, compressed into a root-to-root graph, explored by K parallel
// forest instances with different random priorities, and voted on.
//
// Clustering engine, seven stages, one vertex (VID) per cycle:
//  S1  dispatch a boundary vertex from the vertex FIFO;
//  S2  hash its neighbourhood and read the multi-bank RID buffer (centre and
//      six neighbours) and edge buffer (six incident edges);
//  S3  map the seven RIDs to CIDs (RID->CID map);
//  S4  grow/merge decision (grow_decision), commit of edge growth, claimed
//      vertices, merges and compressed edges;
//  S5  the grown vertex goes back to the boundary buffer if it still has
//      unfinished edges; claimed neighbours go to the FIFO group;
//  S6  the FIFO controller drains one claimed vertex per cycle;
//  S7  it is written into the boundary buffer, which refills the vertex FIFO.
// S4's writes are forwarded to the vertices in S2 and S3 (bypass_net for
// memory words, merge forwarding for CIDs), so dependent vertices follow
// back to back without stalling. S1..S4 hold only when S5 cannot accept
// (a FIFO-group member or the compressed-edge queue is full).
// Clustering ends when no cluster is odd. The compressed edges, produced in
// S4 while clustering runs, reach every EFE through a queue, so adjacency
// building overlaps clustering. Then all EFEs start together; when every one
// is done the vote picks the result.
//
// Interface: syn_valid/syn_ready/syn_coord/syn_last stream one task's
// defects (at least one, all distinct); res_valid pulses with the final
// logical class (bit 0: x winding, bit 1: y winding), the weight, the index
// of the winning candidate and its correction as a mask over compressed
// edges, readable through ce_rd_idx/ce_rd_edge. Candidate results and event
// counters are exported for observation. Task order, port protocol, the
// lattice boundary handling, the compressed-edge labels and the budgets
// NR/NE are this design's choices; the stage split, the hashed banks, the
// RID/CID hierarchy, forwarding, the FIFO group, K = 24 parallel EFEs and the
// vote follow the paper.
module ced_top
  import ced_pkg::*;
#(
  parameter int unsigned LX   = ced_pkg::L,
  parameter int unsigned LZ   = ced_pkg::R,
  parameter int unsigned NR   = ced_pkg::MAX_ROOTS,
  parameter int unsigned NE   = ced_pkg::MAX_CEDGES,
  parameter int unsigned NK   = ced_pkg::K,
  parameter int unsigned FGD  = 8,     // depth of each FIFO-group member
  parameter int unsigned EQD  = 64,    // depth of the compressed-edge queue
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            syn_valid,
  output logic            syn_ready,
  input  coord_t          syn_coord,
  input  logic            syn_last,
  output logic            busy,
  output logic            res_valid,
  output logic [LOGW-1:0] res_logical,
  output logic [WW-1:0]   res_weight,
  output logic [4:0]      res_index,
  output logic [5:0]      res_votes,
  output logic [NE-1:0]   res_mask,
  output logic [WW-1:0]   cand_weight  [NK],
  output logic [LOGW-1:0] cand_logical [NK],
  output logic [EIW:0]    n_cedges,
  output logic [RW:0]     n_roots,
  input  logic [EIW-1:0]  ce_rd_idx,
  output cedge_t          ce_rd_edge,
  output logic            err_roots,
  output logic            err_edges,
  output logic            err_stuck,
  output ced_stats_t      stats
);

  localparam int unsigned NV    = LX * LX * LZ;
  localparam int unsigned DEPTH = bank_depth(LX, LZ);
  localparam int unsigned BBD   = 1 << $clog2(NV + 16);
  localparam int unsigned CEW   = $bits(cedge_t);
  localparam int unsigned VW    = $bits(coord_t);
  localparam int unsigned RWD   = $bits(rid_word_t);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_CLUSTER, T_DRAIN, T_EFE, T_VOTE, T_OUT} tstate_e;
  tstate_e st;

  logic clear;
  assign clear     = (st == T_IDLE) && syn_valid;
  assign syn_ready = (st == T_LOAD);
  assign busy      = (st != T_IDLE);

  // ---------------------------------------------------------------- PRNG
  logic [31:0] seed;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seed <= SEED;
    else if (clear) begin
      seed <= seed ^ (seed << 13) ^ ((seed ^ (seed << 13)) >> 17)
                   ^ ((seed ^ (seed << 13) ^ ((seed ^ (seed << 13)) >> 17)) << 5);
    end
  end

  // ------------------------------------------------------- pipeline regs
  logic      s1_v;  coord_t s1_c;
  logic      s2_v;  coord_t s2_c;
  logic      s3_v;  coord_t s3_c;
  rid_word_t s2_rw [7], s3_rw [7];
  logic [BW-1:0] s2_rb [7], s3_rb [7];
  logic [AW-1:0] s2_ra [7], s3_ra [7];
  logic          s2_rk [7], s3_rk [7];
  edge_word_t s2_ew [4], s3_ew [4];
  logic [BW-1:0] s2_eb [4], s3_eb [4];
  logic [AW-1:0] s2_ea [4], s3_ea [4];
  logic          s2_ek [4], s3_ek [4];
  logic [RW-1:0] s3_cid [7];
  logic      s6_v;  coord_t s6_c;
  logic      s7_v;  coord_t s7_c;

  // ------------------------------------------------------------- buffers
  logic          bb_push [2];
  logic [VW-1:0] bb_in   [2];
  logic [VW-1:0] bb_out;
  logic          bb_empty;
  logic [$clog2(BBD):0] bb_free;
  logic          vf_push, vf_pop, vf_empty, vf_full;
  logic [VW-1:0] vf_out;
  sync_fifo #(.WIDTH(VW), .DEPTH(4)) u_vertex_fifo (
    .clk, .rst_n, .flush(clear), .push(vf_push), .wr_data(bb_out),
    .pop(vf_pop), .rd_data(vf_out), .empty(vf_empty), .full(vf_full), .count()
  );

  mpush_fifo #(.WIDTH(VW), .DEPTH(BBD), .NPUSH(2)) u_boundary_buffer (
    .clk, .rst_n, .flush(clear), .push(bb_push), .wr_data(bb_in),
    .pop(vf_push), .rd_data(bb_out), .empty(bb_empty), .count(), .free(bb_free)
  );

  logic          fg_push [6];
  logic [VW-1:0] fg_in   [6];
  logic          fg_valid, fg_stall, fg_empty;
  logic [VW-1:0] fg_out;
  fifo_group #(.WIDTH(VW), .NF(6), .DEPTH(FGD)) u_fifo_group (
    .clk, .rst_n, .flush(clear), .push(fg_push), .wr_data(fg_in),
    .out_ready(1'b1), .out_valid(fg_valid), .out_data(fg_out),
    .stall(fg_stall), .empty(fg_empty)
  );

  logic          eq_push [6];
  logic [CEW-1:0] eq_in  [6];
  logic [CEW-1:0] eq_out;
  logic          eq_empty;
  logic [$clog2(EQD):0] eq_free;
  mpush_fifo #(.WIDTH(CEW), .DEPTH(EQD), .NPUSH(6)) u_cedge_queue (
    .clk, .rst_n, .flush(clear), .push(eq_push), .wr_data(eq_in),
    .pop(!eq_empty), .rd_data(eq_out), .empty(eq_empty), .count(), .free(eq_free)
  );

  // ---------------------------------------------------- pipeline control
  logic hold, adv, issue;
  logic any_odd;
  logic [NR-1:0] parity;
  assign hold  = s3_v && (fg_stall || 32'(eq_free) < 6 || bb_free < 2);
  assign adv   = !hold;
  assign issue = (st == T_CLUSTER) && adv && !vf_empty && any_odd;
  assign vf_pop  = issue;
  assign vf_push = (st == T_CLUSTER) && !bb_empty && !vf_full;

  // ------------------------------------------------------ S2: memories
  rid_word_t rb_word [7];
  logic [BW-1:0] rb_bank [7];
  logic [AW-1:0] rb_addr [7];
  logic          rb_ok   [7];
  logic          rb_we   [7];
  logic [BW-1:0] rb_wb   [7];
  logic [AW-1:0] rb_wa   [7];
  rid_word_t     rb_wd   [7];
  logic          rb_conf;
  rid_buffer #(.LX(LX), .LZ(LZ), .DEPTH(DEPTH)) u_rid_buffer (
    .clk, .clear, .rd_c(s1_c), .rd_en(s1_v),
    .rd_word(rb_word), .rd_bank(rb_bank), .rd_addr(rb_addr), .rd_ok(rb_ok),
    .wr_en(rb_we), .wr_bank(rb_wb), .wr_addr(rb_wa), .wr_word(rb_wd),
    .conflict(rb_conf)
  );

  edge_word_t eb_word [4];
  logic [BW-1:0] eb_bank [4];
  logic [AW-1:0] eb_addr [4];
  logic          eb_ok   [4];
  logic          eb_we   [4];
  edge_word_t    eb_wd   [4];
  logic          eb_conf;
  edge_buffer #(.LX(LX), .LZ(LZ), .DEPTH(DEPTH)) u_edge_buffer (
    .clk, .clear, .rd_c(s1_c), .rd_en(s1_v),
    .rd_word(eb_word), .rd_bank(eb_bank), .rd_addr(eb_addr), .rd_ok(eb_ok),
    .wr_en(eb_we), .wr_bank(s3_eb), .wr_addr(s3_ea), .wr_word(eb_wd),
    .conflict(eb_conf)
  );

  // S4 write sets as plain vectors for the bypass network
  logic [RWD-1:0] rb_wd_v [7];
  logic [5:0]     eb_wd_v [4];
  always_comb begin
    for (int i = 0; i < 7; i++) rb_wd_v[i] = RWD'(rb_wd[i]);
    for (int i = 0; i < 4; i++) eb_wd_v[i] = 6'(eb_wd[i]);
  end

  // S2 bypass
  logic [RWD-1:0] byp2_r_in [7], byp2_r_out [7];
  logic [5:0]     byp2_e_in [4], byp2_e_out [4];
  logic           byp2_r_hit [7], byp2_e_hit [4];
  always_comb begin
    for (int i = 0; i < 7; i++) byp2_r_in[i] = RWD'(rb_word[i]);
    for (int i = 0; i < 4; i++) byp2_e_in[i] = 6'(eb_word[i]);
  end
  bypass_net #(.N(7), .M(7), .WIDTH(RWD)) u_byp2_rid (
    .rd_ok(rb_ok), .rd_bank(rb_bank), .rd_addr(rb_addr), .rd_data(byp2_r_in),
    .wr_en(rb_we), .wr_bank(rb_wb), .wr_addr(rb_wa), .wr_data(rb_wd_v),
    .out(byp2_r_out), .hit(byp2_r_hit)
  );
  bypass_net #(.N(4), .M(4), .WIDTH(6)) u_byp2_edge (
    .rd_ok(eb_ok), .rd_bank(eb_bank), .rd_addr(eb_addr), .rd_data(byp2_e_in),
    .wr_en(eb_we), .wr_bank(s3_eb), .wr_addr(s3_ea), .wr_data(eb_wd_v),
    .out(byp2_e_out), .hit(byp2_e_hit)
  );

  // S3 bypass and RID -> CID
  logic [RWD-1:0] byp3_r_in [7], byp3_r_out [7];
  logic [5:0]     byp3_e_in [4], byp3_e_out [4];
  logic           byp3_r_hit [7], byp3_e_hit [4];
  rid_word_t      s3n_rw [7];
  logic [RW-1:0]  lk_rid [7], lk_cid [7];
  always_comb begin
    for (int i = 0; i < 7; i++) byp3_r_in[i] = RWD'(s2_rw[i]);
    for (int i = 0; i < 4; i++) byp3_e_in[i] = 6'(s2_ew[i]);
  end
  bypass_net #(.N(7), .M(7), .WIDTH(RWD)) u_byp3_rid (
    .rd_ok(s2_rk), .rd_bank(s2_rb), .rd_addr(s2_ra), .rd_data(byp3_r_in),
    .wr_en(rb_we), .wr_bank(rb_wb), .wr_addr(rb_wa), .wr_data(rb_wd_v),
    .out(byp3_r_out), .hit(byp3_r_hit)
  );
  bypass_net #(.N(4), .M(4), .WIDTH(6)) u_byp3_edge (
    .rd_ok(s2_ek), .rd_bank(s2_eb), .rd_addr(s2_ea), .rd_data(byp3_e_in),
    .wr_en(eb_we), .wr_bank(s3_eb), .wr_addr(s3_ea), .wr_data(eb_wd_v),
    .out(byp3_e_out), .hit(byp3_e_hit)
  );
  always_comb
    for (int i = 0; i < 7; i++) begin
      s3n_rw[i] = rid_word_t'(byp3_r_out[i]);
      lk_rid[i] = s3n_rw[i].rid;
    end

  merge_t        mg [6];
  logic          map_init;
  logic [RW-1:0] map_init_rid;
  rid_cid_map #(.NR(NR), .NLK(7), .NM(6)) u_rid_cid_map (
    .clk, .rst_n, .clear, .init_en(map_init), .init_rid(map_init_rid),
    .lk_rid, .lk_cid, .merge(mg), .parity, .any_odd
  );

  // ------------------------------------------------------ S4: decision
  logic          s4_fire;
  logic          gd_odd;
  edge_word_t    gd_ew  [4];
  logic          gd_ewe [4];
  logic          gd_claim [6];
  rid_word_t     gd_cw    [6];
  merge_t        gd_mg    [6];
  logic          gd_cev   [6];
  cedge_t        gd_ce    [6];
  logic          gd_self;
  rid_word_t     s4_nb    [6];
  logic          s4_nbok  [6];
  logic [RW-1:0] s4_nbcid [6];

  assign s4_fire = s3_v && adv;
  always_comb begin
    gd_odd = s3_rw[0].owned && parity[s3_cid[0]];
    for (int d = 0; d < 6; d++) begin
      s4_nb[d]    = s3_rw[d+1];
      s4_nbok[d]  = s3_rk[d+1];
      s4_nbcid[d] = s3_cid[d+1];
    end
  end

  grow_decision #(.LX(LX)) u_grow (
    .v(s3_c), .odd(gd_odd), .v_rid(s3_rw[0]), .v_cid(s3_cid[0]),
    .nb(s4_nb), .nb_ok(s4_nbok), .nb_cid(s4_nbcid), .ew(s3_ew),
    .ew_new(gd_ew), .ew_we(gd_ewe), .claim(gd_claim), .claim_word(gd_cw),
    .merge(gd_mg), .ce_valid(gd_cev), .ce(gd_ce), .push_self(gd_self)
  );

  // load port (rid buffer port 6)
  logic [BW-1:0] ld_bank;
  logic [AW-1:0] ld_addr;
  bank_hash #(.LX(LX), .LZ(LZ)) u_ld_hash (.c(syn_coord), .bank(ld_bank), .addr(ld_addr));
  logic load_fire;
  assign load_fire = (st == T_LOAD) && syn_valid && (32'(n_roots) < NR);

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      eb_we[i] = s4_fire && gd_ewe[i] && s3_ek[i];
      eb_wd[i] = gd_ew[i];
    end
    for (int d = 0; d < 6; d++) begin
      rb_we[d] = s4_fire && gd_claim[d];
      rb_wb[d] = s3_rb[d+1];
      rb_wa[d] = s3_ra[d+1];
      rb_wd[d] = gd_cw[d];
      mg[d]    = gd_mg[d];
      mg[d].valid = s4_fire && gd_mg[d].valid;
      eq_push[d] = s4_fire && gd_cev[d];
      eq_in[d]   = CEW'(gd_ce[d]);
      fg_push[d] = s4_fire && gd_claim[d];
      fg_in[d]   = VW'(nbr(s3_c, d, LX));
    end
    rb_we[6] = load_fire;
    rb_wb[6] = ld_bank;
    rb_wa[6] = ld_addr;
    rb_wd[6] = '{owned: 1'b1, rid: n_roots[RW-1:0], wind: '0, hops: '0};
    map_init     = load_fire;
    map_init_rid = n_roots[RW-1:0];
    bb_push[0] = load_fire || (s4_fire && gd_self);
    bb_in[0]   = load_fire ? VW'(syn_coord) : VW'(s3_c);
    bb_push[1] = s7_v;
    bb_in[1]   = VW'(s7_c);
  end

  // ------------------------------------------------- pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_v, s2_v, s3_v, s6_v, s7_v} <= '0;
      {s1_c, s2_c, s3_c, s6_c, s7_c} <= '0;
      for (int i = 0; i < 7; i++) begin
        s2_rw[i] <= '0; s3_rw[i] <= '0; s2_rb[i] <= '0; s3_rb[i] <= '0;
        s2_ra[i] <= '0; s3_ra[i] <= '0; s2_rk[i] <= '0; s3_rk[i] <= '0;
        s3_cid[i] <= '0;
      end
      for (int i = 0; i < 4; i++) begin
        s2_ew[i] <= '0; s3_ew[i] <= '0; s2_eb[i] <= '0; s3_eb[i] <= '0;
        s2_ea[i] <= '0; s3_ea[i] <= '0; s2_ek[i] <= '0; s3_ek[i] <= '0;
      end
    end else if (clear) begin
      {s1_v, s2_v, s3_v, s6_v, s7_v} <= '0;
    end else begin
      if (adv) begin
        s1_v <= issue;
        s1_c <= coord_t'(vf_out);
        s2_v <= s1_v;
        s2_c <= s1_c;
        for (int i = 0; i < 7; i++) begin
          s2_rw[i] <= rid_word_t'(byp2_r_out[i]);
          s2_rb[i] <= rb_bank[i];
          s2_ra[i] <= rb_addr[i];
          s2_rk[i] <= rb_ok[i];
        end
        for (int i = 0; i < 4; i++) begin
          s2_ew[i] <= edge_word_t'(byp2_e_out[i]);
          s2_eb[i] <= eb_bank[i];
          s2_ea[i] <= eb_addr[i];
          s2_ek[i] <= eb_ok[i];
        end
        s3_v <= s2_v;
        s3_c <= s2_c;
        for (int i = 0; i < 7; i++) begin
          s3_rw[i]  <= s3n_rw[i];
          s3_rb[i]  <= s2_rb[i];
          s3_ra[i]  <= s2_ra[i];
          s3_rk[i]  <= s2_rk[i];
          s3_cid[i] <= fwd_cid(lk_cid[i], mg);
        end
        for (int i = 0; i < 4; i++) begin
          s3_ew[i] <= edge_word_t'(byp3_e_out[i]);
          s3_eb[i] <= s2_eb[i];
          s3_ea[i] <= s2_ea[i];
          s3_ek[i] <= s2_ek[i];
        end
      end
      s6_v <= fg_valid;
      s6_c <= coord_t'(fg_out);
      s7_v <= s6_v;
      s7_c <= s6_c;
    end
  end

  // ------------------------------------------------------------ EFEs
  logic          efe_start;
  logic          efe_done [NK];
  logic [NE-1:0] efe_mask [NK];
  logic          efe_ovf  [NK];
  logic [EIW:0]  efe_ne   [NK];
  cedge_t        efe_rd   [NK];
  for (genvar k = 0; k < NK; k++) begin : g_efe
    efe #(.NR(NR), .NE(NE)) u_efe (
      .clk, .rst_n, .clear,
      .e_valid(!eq_empty), .e_in(cedge_t'(eq_out)),
      .start(efe_start), .n_nodes(n_roots), .seed, .inst(5'(k)),
      .busy(), .done(efe_done[k]),
      .cand_logical(cand_logical[k]), .cand_weight(cand_weight[k]),
      .cand_mask(efe_mask[k]), .n_edges(efe_ne[k]), .overflow(efe_ovf[k]),
      .rd_idx(ce_rd_idx), .rd_edge(efe_rd[k])
    );
  end
  assign n_cedges   = efe_ne[0];
  assign ce_rd_edge = efe_rd[0];
  assign err_edges  = efe_ovf[0];

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int k = 0; k < NK; k++) all_done &= efe_done[k];
  end

  logic vt_valid;
  logic [LOGW-1:0] vt_log;
  logic [WW-1:0]   vt_w;
  logic [4:0]      vt_idx;
  logic [5:0]      vt_votes;
  vote #(.NK(NK)) u_vote (
    .clk, .rst_n, .in_valid(st == T_VOTE), .weight(cand_weight), .logical(cand_logical),
    .out_valid(vt_valid), .win_logical(vt_log), .win_weight(vt_w),
    .win_index(vt_idx), .win_votes(vt_votes)
  );

  // ------------------------------------------------------- task control
  logic pipe_empty;
  assign pipe_empty = !s1_v && !s2_v && !s3_v;
  assign efe_start  = (st == T_DRAIN) && eq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE;
      n_roots <= '0;
      err_roots <= 1'b0;
      err_stuck <= 1'b0;
      res_valid <= 1'b0;
      res_logical <= '0;
      res_weight <= '0;
      res_index <= '0;
      res_votes <= '0;
      res_mask <= '0;
      stats <= '0;
    end else begin
      res_valid <= 1'b0;
      if (st != T_IDLE && st != T_OUT) stats.cycles <= stats.cycles + 1;
      case (st)
        T_IDLE: if (syn_valid) begin
          st <= T_LOAD;
          n_roots <= '0;
          err_roots <= 1'b0;
          err_stuck <= 1'b0;
          stats <= '0;
        end
        T_LOAD: if (syn_valid) begin
          if (load_fire) n_roots <= n_roots + 1'b1;
          else err_roots <= 1'b1;
          if (syn_last) st <= T_CLUSTER;
        end
        T_CLUSTER: begin
          if (!any_odd && pipe_empty) st <= T_DRAIN;
          else if (any_odd && pipe_empty && vf_empty && bb_empty && fg_empty && !s6_v && !s7_v) begin
            err_stuck <= 1'b1;
            st <= T_DRAIN;
          end
        end
        T_DRAIN: if (eq_empty) st <= T_EFE;
        T_EFE:   if (all_done) st <= T_VOTE;
        T_VOTE:  st <= T_OUT;
        T_OUT:   if (vt_valid) begin
          res_valid   <= 1'b1;
          res_logical <= vt_log;
          res_weight  <= vt_w;
          res_index   <= vt_idx;
          res_votes   <= vt_votes;
          res_mask    <= efe_mask[vt_idx];
          st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
      if (st == T_CLUSTER) begin
        if (issue) stats.issued <= stats.issued + 1;
        if (hold) stats.stall <= stats.stall + 1;
        if (adv && !issue && any_odd) stats.bubble <= stats.bubble + 1;
        for (int i = 0; i < 4; i++) begin
          if (byp2_e_hit[i] && s1_v && adv) stats.fwd_edge <= stats.fwd_edge + 1;
          if (byp3_e_hit[i] && s2_v && adv) stats.fwd_edge <= stats.fwd_edge + 1;
        end
        for (int i = 0; i < 7; i++) begin
          if (byp2_r_hit[i] && s1_v && adv) stats.fwd_rid <= stats.fwd_rid + 1;
          if (byp3_r_hit[i] && s2_v && adv) stats.fwd_rid <= stats.fwd_rid + 1;
          if (s2_v && adv && fwd_cid(lk_cid[i], mg) != lk_cid[i]) stats.fwd_cid <= stats.fwd_cid + 1;
        end
        if (s4_fire) begin
          int nc, nm, ne;
          nc = 0; nm = 0; ne = 0;
          for (int d = 0; d < 6; d++) begin
            nc += int'(gd_claim[d]);
            nm += int'(gd_mg[d].valid);
            ne += int'(gd_cev[d]);
          end
          stats.claims <= stats.claims + 32'(nc);
          stats.merges <= stats.merges + 32'(nm);
          stats.cedges <= stats.cedges + 32'(ne);
          if (nc >= 2) stats.multi_claim <= stats.multi_claim + 1;
        end
      end
    end
  end

  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n) !rb_conf && !eb_conf);

endmodule
