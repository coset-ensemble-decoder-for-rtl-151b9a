// tb_rid_cid_map: random test of the RID -> CID map against a model that
// keeps an explicit cluster set per RID. Defects are initialised one by one,
// then random cycles apply up to six merges between current clusters (the
// absorbed CID is always a live CID, as the engine guarantees); after every
// edge all lookups of all RIDs, the parity vector and any_odd are compared.
module tb_rid_cid_map;
  import ced_pkg::*;
  localparam int unsigned NR = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, init_en;
  logic [RW-1:0] init_rid;
  logic [RW-1:0] lk_rid [NR], lk_cid [NR];
  merge_t merge [6];
  logic [NR-1:0] parity;
  logic any_odd;
  rid_cid_map #(.NR(NR), .NLK(NR), .NM(6)) u_dut (.*);

  int checks = 0, failures = 0;
  int mcid [NR];
  bit mpar [NR];

  task automatic compare();
    #1;
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (int'(lk_cid[r]) != mcid[r] || parity[r] != mpar[r]) begin
        failures++;
        if (failures < 10) $display("FAIL rid %0d cid %0d/%0d par %0d/%0d", r, lk_cid[r], mcid[r], parity[r], mpar[r]);
      end
    end
    checks++;
    if (any_odd != (|parity)) failures++;
  endtask

  initial begin
    clear = 0; init_en = 0; init_rid = '0;
    foreach (merge[k]) merge[k] = '0;
    for (int r = 0; r < NR; r++) begin lk_rid[r] = RW'(r); mcid[r] = r; mpar[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      @(posedge clk); #1 clear = 1;
      @(posedge clk); #1 clear = 0;
      for (int r = 0; r < NR; r++) begin mcid[r] = r; mpar[r] = 0; end
      compare();
      for (int r = 0; r < NR; r++) begin
        init_en = 1; init_rid = RW'(r);
        @(posedge clk); #1;
        mpar[r] = 1;
        init_en = 0;
        compare();
      end
      for (int t = 0; t < 12; t++) begin
        int nm;
        nm = $urandom_range(0, 6);
        for (int k = 0; k < 6; k++) merge[k] = '0;
        for (int k = 0; k < nm; k++) begin
          int a, b, from, to;
          a = $urandom_range(0, NR-1); b = $urandom_range(0, NR-1);
          from = mcid[a]; to = mcid[b];
          merge[k].valid = (from != to);
          merge[k].from = RW'(from); merge[k].to = RW'(to);
          if (from != to) begin
            mpar[to] ^= mpar[from]; mpar[from] = 0;
            for (int r = 0; r < NR; r++) if (mcid[r] == from) mcid[r] = to;
          end
        end
        @(posedge clk); #1;
        for (int k = 0; k < 6; k++) merge[k] = '0;
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
