// tb_sync_fifo: random push/pop/flush traffic on the single-port FIFO,
// compared cycle by cycle with a queue model: head data, empty, full and
// count. Pushes are only issued when the model says there is room, as the
// decoder's stall logic guarantees. Runs at the vertex-queue width, depth 4.
module tb_sync_fifo;
  localparam int unsigned W = 12, D = 4;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(D):0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  logic [W-1:0] q [$];
  int nfull = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0) && full == (q.size() == D) && int'(count) == q.size(), $sformatf("flags t=%0d", t));
      if (q.size() != 0) chk(rd_data == q[0], $sformatf("head t=%0d", t));
      if (full) nfull++;
      flush = $urandom_range(0, 199) == 0;
      pop = !empty && $urandom_range(0, 1);
      push = q.size() < D && $urandom_range(0, 2) != 0;
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(wr_data);
      end
    end
    chk(nfull > 0, "full state reached");
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
