// tb_vote: checks the candidate vote against a reference.
// The reference keeps only candidates of minimum weight, counts them per
// logical class, picks the class with the most votes (lowest class wins a
// tie), and reports the first candidate index of that class. Directed cases
// cover a unanimous ensemble, a heavier majority that must lose to a lighter
// minority, and a tie. 5000 random ensembles follow; weights are drawn from a
// narrow range so ties in weight are common. The result must appear exactly
// one cycle after in_valid.
module tb_vote;
  import ced_pkg::*;
  localparam int unsigned NK = 24;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [WW-1:0] weight [NK];
  logic [LOGW-1:0] logical [NK];
  logic out_valid;
  logic [LOGW-1:0] win_logical;
  logic [WW-1:0] win_weight;
  logic [4:0] win_index;
  logic [5:0] win_votes;
  vote #(.NK(NK)) u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  task automatic run_case(string name);
    int wmin, cnt [4], cls, idx;
    wmin = 1 << WW;
    for (int k = 0; k < NK; k++) if (int'(weight[k]) < wmin) wmin = weight[k];
    cnt = '{0, 0, 0, 0};
    for (int k = 0; k < NK; k++) if (int'(weight[k]) == wmin) cnt[logical[k]]++;
    cls = 0;
    for (int c = 1; c < 4; c++) if (cnt[c] > cnt[cls]) cls = c;
    idx = -1;
    for (int k = 0; k < NK; k++) if (idx < 0 && int'(weight[k]) == wmin && int'(logical[k]) == cls) idx = k;
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0;
    chk(out_valid, {name, ": out_valid one cycle later"});
    chk(int'(win_logical) == cls && int'(win_weight) == wmin && int'(win_index) == idx && int'(win_votes) == cnt[cls],
        $sformatf("%s: got class %0d w %0d idx %0d votes %0d, want %0d %0d %0d %0d", name,
                  win_logical, win_weight, win_index, win_votes, cls, wmin, idx, cnt[cls]));
    @(negedge clk);
    chk(!out_valid, {name, ": out_valid is a single pulse"});
  endtask

  initial begin
    for (int k = 0; k < NK; k++) begin weight[k] = '0; logical[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NK; k++) begin weight[k] = 10'd7; logical[k] = 2'd2; end
    run_case("unanimous");
    for (int k = 0; k < NK; k++) begin weight[k] = (k < 20) ? 10'd9 : 10'd5; logical[k] = (k < 20) ? 2'd1 : 2'd3; end
    run_case("lighter minority wins");
    chk(win_logical == 2'd3 && win_index == 5'd20, "lighter minority: class 3 at index 20");
    for (int k = 0; k < NK; k++) begin weight[k] = 10'd4; logical[k] = (k % 2) ? 2'd1 : 2'd2; end
    run_case("tie");
    chk(win_logical == 2'd1 && win_index == 5'd1, "tie goes to the lower class");
    for (int t = 0; t < 5000; t++) begin
      int base = $urandom_range(0, 1000);
      for (int k = 0; k < NK; k++) begin
        weight[k] = WW'(base + $urandom_range(0, 2));
        logical[k] = LOGW'($urandom);
      end
      run_case($sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
