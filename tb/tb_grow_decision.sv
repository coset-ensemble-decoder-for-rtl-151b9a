// tb_grow_decision: directed and random test of the S4 grow/merge logic.
// Directed: an even cluster does not grow; half-edge growth from 0 to 1; a
// full edge to a free neighbour across the x wrap claims it with winding 01
// and one more hop; a full edge to another cluster merges it and emits a
// root-to-root edge with the expected label and weight; two neighbours of the
// same foreign cluster merge it only once. Random: inputs drawn at random are
// compared with a reference written from the Union-Find growth rules.
module tb_grow_decision;
  import ced_pkg::*;
  localparam int unsigned N = 5;
  coord_t v;
  logic odd;
  rid_word_t v_rid;
  logic [RW-1:0] v_cid;
  rid_word_t nb [6];
  logic nb_ok [6];
  logic [RW-1:0] nb_cid [6];
  edge_word_t ew [4];
  edge_word_t ew_new [4];
  logic ew_we [4];
  logic claim [6];
  rid_word_t claim_word [6];
  merge_t merge [6];
  logic ce_valid [6];
  cedge_t ce [6];
  logic push_self;
  grow_decision #(.LX(N)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  // edge direction d -> (word, field)
  function automatic int wi(int d); return (d == 0) ? 1 : (d == 2) ? 2 : (d == 4) ? 3 : 0; endfunction
  function automatic int fi(int d); return d / 2; endfunction
  function automatic logic [1:0] getw(edge_word_t w [4], int d);
    logic [5:0] b = 6'(w[wi(d)]);
    return b[2*fi(d) +: 2];
  endfunction

  task automatic reference();
    logic [5:0] e [4];
    int cid [6];
    bit ps;
    for (int i = 0; i < 4; i++) e[i] = 6'(ew[i]);
    for (int d = 0; d < 6; d++) cid[d] = nb_cid[d];
    ps = 0;
    for (int d = 0; d < 6; d++) begin
      int w;
      bit cw, mg, cv;
      logic [1:0] wind;
      cw = 0; mg = 0; cv = 0;
      if (!nb_ok[d]) begin
        chk(!claim[d] && !merge[d].valid && !ce_valid[d], "absent neighbour untouched");
        continue;
      end
      w = e[wi(d)][2*fi(d) +: 2];
      if (odd && w != 2) begin
        w++;
        e[wi(d)][2*fi(d) +: 2] = 2'(w);
        if (w == 2) begin
          wind = v_rid.wind;
          if (d == 0 && v.x == N-1) wind[0] ^= 1;
          if (d == 1 && v.x == 0)   wind[0] ^= 1;
          if (d == 2 && v.y == N-1) wind[1] ^= 1;
          if (d == 3 && v.y == 0)   wind[1] ^= 1;
          if (!nb[d].owned) begin
            cw = 1;
            chk(claim_word[d].owned && claim_word[d].rid == v_rid.rid && claim_word[d].wind == wind
                && claim_word[d].hops == v_rid.hops + 1, $sformatf("claim word d=%0d", d));
          end else begin
            if (nb[d].rid != v_rid.rid) begin
              cv = 1;
              chk(ce[d].a == v_rid.rid && ce[d].b == nb[d].rid && ce[d].label == (wind ^ nb[d].wind)
                  && int'(ce[d].weight) == int'(v_rid.hops) + int'(nb[d].hops) + 1, $sformatf("cedge d=%0d", d));
            end
            if (cid[d] != v_cid) begin
              int f;
              mg = 1;
              f = cid[d];
              chk(int'(merge[d].from) == f && merge[d].to == v_cid, $sformatf("merge d=%0d", d));
              for (int j = d + 1; j < 6; j++) if (cid[j] == f) cid[j] = v_cid;
            end
          end
        end
      end
      if (w != 2) ps = 1;
      chk(claim[d] == cw && merge[d].valid == mg && ce_valid[d] == cv, $sformatf("event flags d=%0d", d));
    end
    for (int i = 0; i < 4; i++) chk(6'(ew_new[i]) == e[i], $sformatf("edge word %0d", i));
    chk(push_self == ps, "push_self");
  endtask

  task automatic randomize_inputs(int owned_pct);
    v = '{x: CW'($urandom_range(0, N-1)), y: CW'($urandom_range(0, N-1)), z: CW'($urandom_range(0, N-1))};
    odd = $urandom_range(0, 3) != 0;
    v_rid = rid_word_t'($urandom); v_rid.owned = 1; v_rid.hops = DW'($urandom_range(0, 20));
    v_cid = RW'($urandom_range(0, 3));
    for (int d = 0; d < 6; d++) begin
      nb[d] = rid_word_t'($urandom);
      nb[d].owned = $urandom_range(0, 99) < owned_pct;
      nb[d].rid = RW'($urandom_range(0, 3));
      nb[d].hops = DW'($urandom_range(0, 20));
      nb[d].wind = LOGW'($urandom);
      nb_cid[d] = RW'($urandom_range(0, 3));
      nb_ok[d] = nbr_exists(v, d, N);
    end
    for (int i = 0; i < 4; i++) begin
      logic [5:0] b;
      for (int f = 0; f < 3; f++) b[2*f +: 2] = 2'($urandom_range(0, 2));
      ew[i] = edge_word_t'(b);
    end
  endtask

  initial begin
    // directed: even cluster, nothing grows
    randomize_inputs(50); odd = 0;
    for (int i = 0; i < 4; i++) ew[i] = '0;
    #1;
    chk(!ew_we[0] && !ew_we[1] && !ew_we[2] && !ew_we[3] && push_self, "even cluster does not grow");
    // directed: claim across the x wrap
    randomize_inputs(0); odd = 1; v.x = N-1; v_rid.wind = 2'b00; v_rid.hops = 3;
    for (int i = 0; i < 4; i++) ew[i] = '0;
    ew[1].wx = 2'd1;
    #1;
    chk(claim[0] && claim_word[0].wind == 2'b01 && claim_word[0].hops == 4 && ew_new[1].wx == 2'd2, "claim across x wrap");
    chk(!claim[1] && ew_new[0].wx == 2'd1, "half-edge growth 0 -> 1");
    // directed: two neighbours in one foreign cluster merge once
    randomize_inputs(100); odd = 1; v.z = 2; v_rid.rid = 0; v_cid = 0;
    for (int i = 0; i < 4; i++) ew[i] = edge_word_t'(6'b01_01_01);
    for (int d = 0; d < 6; d++) begin nb[d].rid = 1; nb_cid[d] = 0; end
    nb_cid[2] = 3; nb_cid[3] = 3; nb[2].rid = 2; nb[3].rid = 3;
    #1;
    chk(merge[2].valid && merge[2].from == 3 && !merge[3].valid, "one merge per foreign cluster");
    chk(ce_valid[2] && ce_valid[3] && ce_valid[0], "root-root edges emitted");
    reference();
    for (int t = 0; t < 20000; t++) begin
      randomize_inputs($urandom_range(0, 100));
      #1;
      reference();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
