// grow_decision: the S4 grow/merge logic of the clustering pipeline.
//
// Input: one boundary vertex v with its own RID word, the RID words of its
// six neighbours, the four edge words that hold its six incident edges
// (all already corrected by the bypass network), the current CIDs of v's
// root and of each neighbour's root, and whether v's cluster is odd.
//
// If v's cluster is odd, every incident edge that is not yet fully grown
// gains one half-edge (an "Edge == 2?" test in the published pipeline). When an edge
// becomes full:
//  * an unclaimed neighbour is claimed for v's root: its RID word gets v's
//    RID, v's winding XOR the wrap crossed, and one more hop;
//  * a neighbour owned by a different root yields one compressed-graph edge
//    root(v) -- root(n), labelled with the homology of the path
//    root(v) -> v -> n -> root(n) and weighted with its length. This is the
//    paper's lossless graph compression: only root-to-root connections made
//    at merge points are kept, inner vertices are dropped;
//  * if that root is in a different cluster, the two clusters merge (CID
//    equality comparators of the published pipeline); the neighbour's cluster is absorbed
//    into v's, and later neighbours in the same step see the new CID.
// 'push_self' keeps v on the boundary while any incident edge is not full.
// A vertex of an even cluster does not grow and is only kept on the
// boundary. Edge direction d maps to (word, field): +x (1,x), -x (0,x),
// +y (2,y), -y (0,y), +z (3,z), -z (0,z). Purely combinational.
// The growth rule is Union-Find's half-edge growth; the merge direction and
// the labelling are this design's choices.
module grow_decision
  import ced_pkg::*;
#(
  parameter int unsigned LX = ced_pkg::L
) (
  input  coord_t        v,
  input  logic          odd,
  input  rid_word_t     v_rid,
  input  logic [RW-1:0] v_cid,
  input  rid_word_t     nb     [6],
  input  logic          nb_ok  [6],
  input  logic [RW-1:0] nb_cid [6],
  input  edge_word_t    ew     [4],
  output edge_word_t    ew_new [4],
  output logic          ew_we  [4],
  output logic          claim  [6],
  output rid_word_t     claim_word [6],
  output merge_t        merge  [6],
  output logic          ce_valid [6],
  output cedge_t        ce     [6],
  output logic          push_self
);

  function automatic logic [1:0] get_w(edge_word_t w [4], int unsigned d);
    case (d)
      0: return w[1].wx;
      1: return w[0].wx;
      2: return w[2].wy;
      3: return w[0].wy;
      4: return w[3].wz;
      default: return w[0].wz;
    endcase
  endfunction

  always_comb begin
    logic [RW-1:0] cids [6];
    logic [1:0]    wv;
    logic [LOGW-1:0] wind_n;
    for (int i = 0; i < 4; i++) begin
      ew_new[i] = ew[i];
      ew_we[i]  = 1'b0;
    end
    for (int d = 0; d < 6; d++) begin
      claim[d]      = 1'b0;
      claim_word[d] = '0;
      merge[d]      = '0;
      ce_valid[d]   = 1'b0;
      ce[d]         = '0;
      cids[d]       = nb_cid[d];
    end
    push_self = 1'b0;

    for (int d = 0; d < 6; d++) begin
      if (nb_ok[d]) begin
        wv = get_w(ew_new, d);
        if (odd && wv != 2'd2) begin
          wv = wv + 2'd1;
          case (d)
            0: begin ew_new[1].wx = wv; ew_we[1] = 1'b1; end
            1: begin ew_new[0].wx = wv; ew_we[0] = 1'b1; end
            2: begin ew_new[2].wy = wv; ew_we[2] = 1'b1; end
            3: begin ew_new[0].wy = wv; ew_we[0] = 1'b1; end
            4: begin ew_new[3].wz = wv; ew_we[3] = 1'b1; end
            default: begin ew_new[0].wz = wv; ew_we[0] = 1'b1; end
          endcase
          if (wv == 2'd2) begin
            wind_n = v_rid.wind ^ nbr_cross(v, d, LX);
            if (!nb[d].owned) begin
              claim[d]            = 1'b1;
              claim_word[d].owned = 1'b1;
              claim_word[d].rid   = v_rid.rid;
              claim_word[d].wind  = wind_n;
              claim_word[d].hops  = v_rid.hops + 1'b1;
            end else begin
              if (nb[d].rid != v_rid.rid) begin
                ce_valid[d]  = 1'b1;
                ce[d].a      = v_rid.rid;
                ce[d].b      = nb[d].rid;
                ce[d].label  = wind_n ^ nb[d].wind;
                ce[d].weight = WW'(v_rid.hops) + WW'(nb[d].hops) + WW'(1);
              end
              if (cids[d] != v_cid) begin
                merge[d].valid = 1'b1;
                merge[d].from  = cids[d];
                merge[d].to    = v_cid;
                for (int j = 0; j < 6; j++)
                  if (j > d && cids[j] == merge[d].from) cids[j] = v_cid;
              end
            end
          end
        end
        if (wv != 2'd2) push_self = 1'b1;
      end
    end
  end

endmodule
