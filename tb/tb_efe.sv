// tb_efe: checks one forest-exploration / ROE instance against a reference.
// Each task builds a random compressed graph (up to 16 nodes, up to 32 edges
// with parallel edges allowed, random labels and weights), streams its edges
// in one per cycle, starts the instance with a random seed and instance
// number, and waits for done. The reference in this file:
//  - visits roots in ascending (priority, index) order, grows each tree
//    breadth first, and takes each node's incident edges in ascending
//    (priority, index) order (the priorities use the same mixing hash,
//    which tb_priority_gen checks against worked examples);
//  - peels the forest in reverse discovery order with all nodes starting odd.
// The selected edge set, the weight and the logical class must match exactly.
// Independent of the reference, every node in a component with an even
// number of nodes must have odd degree in the selected set, and each
// component with an odd node count leaves only its tree root unmatched.
// The latency must stay under n*(n+4) + 2n + 4 + sum over nodes of (deg+1)^2
// cycles: one PICK scan per tree, deg+1 list walks per node, one ROE pop per
// node.
module tb_efe;
  import ced_pkg::*;
  localparam int unsigned NR = 16, NE = 32;
  logic clk = 0, rst_n = 0, clear = 0, e_valid = 0, start = 0;
  cedge_t e_in;
  logic [RW:0] n_nodes;
  logic [31:0] seed;
  logic [4:0] inst;
  logic busy, done, overflow;
  logic [LOGW-1:0] cand_logical;
  logic [WW-1:0] cand_weight;
  logic [NE-1:0] cand_mask;
  logic [EIW:0] n_edges;
  logic [EIW-1:0] rd_idx = '0;
  cedge_t rd_edge;
  efe #(.NR(NR), .NE(NE)) u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  function automatic logic [15:0] hprio(logic [31:0] s, logic [4:0] i, bit e, int id);
    logic [31:0] h;
    h = s ^ {i, 2'b0, e, 24'(id)};
    h = h ^ (h >> 16); h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15); h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h[15:0];
  endfunction

  int ea [NE], eb [NE], ew [NE], el [NE];
  int nn, ne;

  task automatic reference(logic [31:0] s, logic [4:0] i, output bit mask [NE], output int w, output int lg);
    bit vis [NR];
    int par [NR], parent [NR], pedge [NR], order [$], q [$];
    for (int n = 0; n < NR; n++) begin vis[n] = 0; par[n] = (n < nn); parent[n] = -1; end
    for (int e = 0; e < NE; e++) mask[e] = 0;
    forever begin
      int r = -1;
      for (int n = 0; n < nn; n++)
        if (!vis[n] && (r < 0 || hprio(s, i, 0, n) < hprio(s, i, 0, r))) r = n;
      if (r < 0) break;
      vis[r] = 1; order.push_back(r); q.push_back(r);
      while (q.size() != 0) begin
        int x = q.pop_front();
        int inc [$];
        for (int e = 0; e < ne; e++) if (ea[e] == x || eb[e] == x) inc.push_back(e);
        inc.sort() with ({hprio(s, i, 1, item), 8'(item)});
        foreach (inc[k]) begin
          int e = inc[k];
          int y = (ea[e] == x) ? eb[e] : ea[e];
          if (!vis[y]) begin
            vis[y] = 1; parent[y] = x; pedge[y] = e;
            order.push_back(y); q.push_back(y);
          end
        end
      end
    end
    w = 0; lg = 0;
    for (int k = order.size() - 1; k >= 0; k--) begin
      int x = order[k];
      if (parent[x] >= 0 && par[x]) begin
        mask[pedge[x]] = 1; w += ew[pedge[x]]; lg ^= el[pedge[x]];
        par[x] = 0; par[parent[x]] ^= 1;
      end
    end
  endtask

  // component sizes by union-find over the edge list
  int comp [NR];
  function automatic int findc(int a);
    while (comp[a] != a) a = comp[a];
    return a;
  endfunction

  initial begin
    int ntasks_multi = 0;
    e_in = '0; n_nodes = '0; seed = '0; inst = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      bit rmask [NE];
      int rw, rl, cyc, bound, deg [NR], csize [NR], unmatched [NR];
      nn = $urandom_range(2, NR);
      ne = (t % 10 == 0) ? 0 : $urandom_range(1, NE);
      for (int e = 0; e < ne; e++) begin
        ea[e] = $urandom_range(0, nn - 1);
        do eb[e] = $urandom_range(0, nn - 1); while (eb[e] == ea[e]);
        ew[e] = $urandom_range(1, 30);
        el[e] = $urandom_range(0, 3);
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int e = 0; e < ne; e++) begin
        e_valid = 1;
        e_in = '{a: RW'(ea[e]), b: RW'(eb[e]), label: LOGW'(el[e]), weight: WW'(ew[e])};
        @(negedge clk);
      end
      e_valid = 0;
      chk(int'(n_edges) == ne && !overflow, $sformatf("t=%0d edge count", t));
      for (int e = 0; e < ne; e++) begin
        rd_idx = EIW'(e);
        #1 chk(int'(rd_edge.a) == ea[e] && int'(rd_edge.b) == eb[e] && int'(rd_edge.weight) == ew[e],
               $sformatf("t=%0d edge table read %0d", t, e));
      end
      @(negedge clk);
      seed = $urandom; inst = 5'($urandom_range(0, 23)); n_nodes = (RW+1)'(nn);
      start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      bound = nn * (nn + 4) + 2 * nn + 4;
      for (int n = 0; n < NR; n++) deg[n] = 0;
      for (int e = 0; e < ne; e++) begin deg[ea[e]]++; deg[eb[e]]++; end
      for (int n = 0; n < nn; n++) bound += (deg[n] + 1) * (deg[n] + 1);
      chk(done && cyc <= bound, $sformatf("t=%0d latency %0d bound %0d", t, cyc, bound));
      reference(seed, inst, rmask, rw, rl);
      for (int e = 0; e < NE; e++) chk(cand_mask[e] == rmask[e], $sformatf("t=%0d mask bit %0d", t, e));
      chk(int'(cand_weight) == rw && int'(cand_logical) == rl,
          $sformatf("t=%0d weight %0d/%0d logical %0d/%0d", t, cand_weight, rw, cand_logical, rl));
      // independent check: selected set pairs up the nodes inside each component
      for (int n = 0; n < NR; n++) begin comp[n] = n; csize[n] = 0; unmatched[n] = 0; deg[n] = 0; end
      for (int e = 0; e < ne; e++) comp[findc(ea[e])] = findc(eb[e]);
      for (int n = 0; n < nn; n++) csize[findc(n)]++;
      for (int e = 0; e < ne; e++) if (cand_mask[e]) begin deg[ea[e]]++; deg[eb[e]]++; end
      for (int n = 0; n < nn; n++) if (deg[n] % 2 == 0) unmatched[findc(n)]++;
      for (int n = 0; n < nn; n++)
        if (findc(n) == n)
          chk(unmatched[n] == csize[n] % 2, $sformatf("t=%0d component of %0d: %0d even-degree nodes", t, csize[n], unmatched[n]));
      if (ne > nn) ntasks_multi++;
    end
    // overflow: more than NE edges
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int e = 0; e <= NE; e++) begin
      e_valid = 1; e_in = '{a: RW'(0), b: RW'(1), label: '0, weight: WW'(1)};
      @(negedge clk);
    end
    e_valid = 0;
    chk(overflow && int'(n_edges) == NE, "edge-table overflow flagged");
    chk(ntasks_multi > 0, "graphs with cycles exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
