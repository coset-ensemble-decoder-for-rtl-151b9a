// tb_fifo_group: random traffic on the group of six per-direction FIFOs.
// Each member is modelled as its own queue; the output must be the head of
// the lowest-numbered non-empty member, stall must be raised exactly when
// some member is full, and popping must remove that head only.
module tb_fifo_group;
  localparam int unsigned W = 12, NF = 6, D = 4;
  logic clk = 0, rst_n = 0, flush = 0, out_ready = 0;
  logic push [NF];
  logic [W-1:0] wr_data [NF];
  logic out_valid, stall, empty;
  logic [W-1:0] out_data;
  fifo_group #(.WIDTH(W), .NF(NF), .DEPTH(D)) u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  logic [W-1:0] q [NF][$];
  int nstall = 0;
  initial begin
    for (int i = 0; i < NF; i++) begin push[i] = 0; wr_data[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int head;
      bit anyfull;
      @(negedge clk);
      head = -1; anyfull = 0;
      for (int i = NF-1; i >= 0; i--) begin
        if (q[i].size() != 0) head = i;
        if (q[i].size() == D) anyfull = 1;
      end
      chk(out_valid == (head >= 0) && empty == (head < 0) && stall == anyfull, $sformatf("flags t=%0d", t));
      if (head >= 0) chk(out_data == q[head][0], $sformatf("head t=%0d", t));
      if (stall) nstall++;
      flush = $urandom_range(0, 299) == 0;
      out_ready = $urandom_range(0, 3) == 0;
      for (int i = 0; i < NF; i++) begin
        push[i] = q[i].size() < D && $urandom_range(0, 2) == 0;
        wr_data[i] = W'($urandom);
      end
      @(posedge clk);
      #1;
      if (flush) for (int i = 0; i < NF; i++) q[i].delete();
      else begin
        if (out_ready && head >= 0) void'(q[head].pop_front());
        for (int i = 0; i < NF; i++) if (push[i]) q[i].push_back(wr_data[i]);
      end
    end
    chk(nstall > 0, "stall raised at least once");
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
