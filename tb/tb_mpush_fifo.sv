// tb_mpush_fifo: random traffic on the multi-push FIFO used as the boundary
// buffer (2 pushes per cycle) and as the compressed-edge queue (6 pushes per
// cycle). Any subset of push ports may be active; entries must come out in
// port order within a cycle and in cycle order across cycles. Data, empty,
// count and free are compared with a queue model.
module tb_mpush_fifo;
  localparam int unsigned W = 12, D = 16, NP = 6;
  logic clk = 0, rst_n = 0, flush = 0, pop = 0;
  logic push [NP];
  logic [W-1:0] wr_data [NP];
  logic [W-1:0] rd_data;
  logic empty;
  logic [$clog2(D):0] count, free;
  mpush_fifo #(.WIDTH(W), .DEPTH(D), .NPUSH(NP)) u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  logic [W-1:0] q [$];
  int maxfill = 0, multi = 0;
  initial begin
    for (int i = 0; i < NP; i++) begin push[i] = 0; wr_data[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int room, n;
      @(negedge clk);
      chk(empty == (q.size() == 0) && int'(count) == q.size() && int'(free) == D - q.size(),
          $sformatf("flags t=%0d", t));
      if (q.size() != 0) chk(rd_data == q[0], $sformatf("head t=%0d", t));
      if (q.size() > maxfill) maxfill = q.size();
      flush = $urandom_range(0, 299) == 0;
      pop = !empty && $urandom_range(0, 2) != 0;
      room = D - q.size();
      n = 0;
      for (int i = 0; i < NP; i++) begin
        push[i] = n < room && $urandom_range(0, 2) == 0;
        wr_data[i] = W'($urandom);
        n += int'(push[i]);
      end
      if (n > 1) multi++;
      @(posedge clk);
      #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        for (int i = 0; i < NP; i++) if (push[i]) q.push_back(wr_data[i]);
      end
    end
    chk(maxfill >= D - 1 && multi > 0, "queue filled and multi-push seen");
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
