// tb_ced_full: the decoder at its full default size (15 x 15 x 15 decoding
// lattice, 128 roots, 256 compressed edges, 24 ensemble members), taken
// through complete decode operations end to end.
//
// Runs the hand-made cases with known answers (neighbours, neighbours across
// the x and y wraps, a pair two apart, a time-like pair) and then a few
// random syndromes made of 4 to 10 independent single-edge errors placed
// anywhere in the lattice (up to 20 defects). Each
// result is checked independently of the design, as in tb_ced_top: every
// root gets odd degree in the chosen correction, class and weight equal the
// XOR of the labels and the sum of the weights, every compressed edge is a
// possible lattice path, and the vote is recomputed from the candidates.
// Mechanism counts are printed for information only; at the default FIFO
// depths some of them (stalls) need not occur in a short run.
module tb_ced_full;
  import ced_pkg::*;

  localparam int unsigned TLX = ced_pkg::L;
  localparam int unsigned TLZ = ced_pkg::R;
  localparam int unsigned TNK = ced_pkg::K;
  localparam int unsigned TNE = ced_pkg::MAX_CEDGES;
  localparam int unsigned NTASK = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic syn_valid, syn_ready, syn_last, busy, res_valid;
  coord_t syn_coord;
  logic [LOGW-1:0] res_logical;
  logic [WW-1:0] res_weight;
  logic [4:0] res_index;
  logic [5:0] res_votes;
  logic [TNE-1:0] res_mask;
  logic [WW-1:0] cand_weight [TNK];
  logic [LOGW-1:0] cand_logical [TNK];
  logic [EIW:0] n_cedges;
  logic [RW:0] n_roots;
  logic [EIW-1:0] ce_rd_idx;
  cedge_t ce_rd_edge;
  logic err_roots, err_edges, err_stuck;
  ced_stats_t stats;

  ced_top dut (.*);

  int checks = 0, failures = 0;
  int m_fwd_edge = 0, m_fwd_rid = 0, m_fwd_cid = 0, m_merge = 0, m_multi = 0,
      m_stall = 0, m_wdiff = 0, m_ldiff = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  coord_t defs [$];

  function automatic int tdist(int a, int b, int n, bit wrap);
    int d = (a > b) ? a - b : b - a;
    if (wrap && n - d < d) d = n - d;
    return d;
  endfunction

  task automatic run_task(input coord_t d [$], input int exp_w, input int exp_l);
    int deg [];
    int lg, wsum, cyc;
    // stream defects
    for (int i = 0; i < d.size(); i++) begin
      syn_valid <= 1; syn_coord <= d[i]; syn_last <= (i == d.size()-1);
      @(posedge clk);
      while (!syn_ready) @(posedge clk);
    end
    syn_valid <= 0; syn_last <= 0;
    cyc = 0;
    while (!res_valid && cyc < 20000) begin @(posedge clk); cyc++; end
    check(res_valid, "result arrives");
    check(!err_roots && !err_edges && !err_stuck, "no error flags");
    check(32'(n_roots) == d.size(), "root count");
    // correction validity
    deg = new[d.size()];
    lg = 0; wsum = 0;
    for (int e = 0; e < int'(n_cedges); e++) begin
      int ax, ay, az, bx, by, bz, dxp, dyp, dzp, par;
      ce_rd_idx = EIW'(e);
      #1;
      check(int'(ce_rd_edge.a) < d.size() && int'(ce_rd_edge.b) < d.size(), "edge endpoints");
      ax = d[ce_rd_edge.a].x; ay = d[ce_rd_edge.a].y; az = d[ce_rd_edge.a].z;
      bx = d[ce_rd_edge.b].x; by = d[ce_rd_edge.b].y; bz = d[ce_rd_edge.b].z;
      check(int'(ce_rd_edge.weight) >= tdist(ax, bx, TLX, 1) + tdist(ay, by, TLX, 1) + tdist(az, bz, TLZ, 0),
            "edge weight at least lattice distance");
      par = (bx - ax) + TLX * ce_rd_edge.label[0] + (by - ay) + TLX * ce_rd_edge.label[1] + (bz - az);
      check(((int'(ce_rd_edge.weight) - par) % 2) == 0, "edge weight parity matches winding label");
      if (res_mask[e]) begin
        deg[ce_rd_edge.a]++; deg[ce_rd_edge.b]++;
        lg ^= int'(ce_rd_edge.label);
        wsum += int'(ce_rd_edge.weight);
      end
    end
    for (int i = 0; i < d.size(); i++) check(deg[i] % 2 == 1, "every defect matched (odd degree)");
    check(lg == int'(res_logical), "logical class equals XOR of labels");
    check(wsum == int'(res_weight), "weight equals sum of edge weights");
    // recompute the vote
    begin
      int wmin, cnt [4], cls, idx;
      bit wd, ld;
      wd = 0; ld = 0;
      wmin = cand_weight[0];
      foreach (cand_weight[k]) begin
        if (cand_weight[k] < wmin) wmin = cand_weight[k];
        if (cand_weight[k] != cand_weight[0]) wd = 1;
        if (cand_logical[k] != cand_logical[0]) ld = 1;
      end
      cnt = '{0, 0, 0, 0};
      foreach (cand_weight[k]) if (cand_weight[k] == wmin) cnt[cand_logical[k]]++;
      cls = 0;
      for (int c = 1; c < 4; c++) if (cnt[c] > cnt[cls]) cls = c;
      idx = -1;
      foreach (cand_weight[k]) if (idx < 0 && cand_weight[k] == wmin && cand_logical[k] == cls) idx = k;
      check(int'(res_logical) == cls && int'(res_weight) == wmin && int'(res_index) == idx
            && int'(res_votes) == cnt[cls], "vote matches reference");
      m_wdiff += wd; m_ldiff += ld;
    end
    if (exp_w >= 0) check(int'(res_weight) == exp_w, $sformatf("known weight %0d got %0d", exp_w, res_weight));
    if (exp_l >= 0) check(int'(res_logical) == exp_l, "known logical");
    m_fwd_edge += (stats.fwd_edge != 0); m_fwd_rid += (stats.fwd_rid != 0);
    m_fwd_cid += (stats.fwd_cid != 0); m_merge += (stats.merges != 0);
    m_multi += (stats.multi_claim != 0); m_stall += (stats.stall != 0);
    @(posedge clk);
  endtask

  function automatic coord_t mk(int x, int y, int z);
    coord_t c;
    c.x = CW'(x); c.y = CW'(y); c.z = CW'(z);
    return c;
  endfunction

  initial begin
    syn_valid = 0; syn_last = 0; syn_coord = '0; ce_rd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    defs = {mk(1,1,1), mk(2,1,1)};        run_task(defs, 1, 0);
    defs = {mk(0,2,2), mk(TLX-1,2,2)};    run_task(defs, 1, 1);
    defs = {mk(1,0,2), mk(1,TLX-1,2)};    run_task(defs, 1, 2);
    defs = {mk(1,1,0), mk(1,3,0)};        run_task(defs, 2, 0);
    defs = {mk(2,2,1), mk(2,2,2)};        run_task(defs, 1, 0);
    for (int t = 0; t < NTASK; t++) begin
      // physically shaped syndrome: independent single-edge errors, each
      // flipping the two vertices it joins (x and y wrap, z is open)
      int nerr;
      nerr = $urandom_range(4, 10);
      defs = {};
      for (int k = 0; k < nerr; k++) begin
        int x, y, z, dir, idx [$];
        coord_t c [2];
        x = $urandom_range(0, TLX-1); y = $urandom_range(0, TLX-1); z = $urandom_range(0, TLZ-2);
        dir = $urandom_range(0, 2);
        c[0] = mk(x, y, z);
        c[1] = (dir == 0) ? mk((x + 1) % TLX, y, z) : (dir == 1) ? mk(x, (y + 1) % TLX, z) : mk(x, y, z + 1);
        for (int j = 0; j < 2; j++) begin
          idx = defs.find_first_index(e) with (e == c[j]);
          if (idx.size() != 0) defs.delete(idx[0]);
          else defs.push_back(c[j]);
        end
      end
      if (defs.size() == 0) continue;
      run_task(defs, -1, -1);
    end
    $display("mechanisms: fwd_edge=%0d fwd_rid=%0d fwd_cid=%0d merge=%0d multi_claim=%0d stall=%0d unequal_weight=%0d coset_disagree=%0d",
             m_fwd_edge, m_fwd_rid, m_fwd_cid, m_merge, m_multi, m_stall, m_wdiff, m_ldiff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
