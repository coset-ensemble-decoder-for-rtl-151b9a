// tb_priority_gen: checks the random-priority hash.
// 1) Known answers: five input tuples whose 16-bit priorities were worked out
//    by hand from the mixing formula (xor-shift, multiply, xor-shift,
//    multiply, xor-shift).
// 2) Sensitivity: flipping any one input bit changes the priority for at
//    least 99% of random inputs.
// 3) Balance: over 40000 random inputs every output bit is 1 between 47% and
//    53% of the time.
// 4) Independence across instances: for a fixed seed, two different instance
//    numbers give different priority orders for the same 32 ids.
module tb_priority_gen;
  import ced_pkg::*;
  logic [31:0] seed;
  logic [4:0] inst;
  logic is_edge;
  logic [7:0] id;
  logic [PW-1:0] prio;
  priority_gen #(.IDW(8)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  task automatic kat(logic [31:0] s, int i, bit e, int n, logic [15:0] exp);
    seed = s; inst = 5'(i); is_edge = e; id = 8'(n);
    #1;
    chk(prio == exp, $sformatf("known answer %h/%0d/%0d/%0d: got %h want %h", s, i, e, n, prio, exp));
  endtask

  int ones [PW];
  initial begin
    kat(32'h2545F491, 0, 0, 0,   16'h5fb1);
    kat(32'h2545F491, 3, 1, 17,  16'h2b00);
    kat(32'hdeadbeef, 23, 0, 127, 16'hd13c);
    kat(32'h00000001, 1, 1, 1,   16'h5d9b);
    kat(32'h00000000, 0, 0, 0,   16'h0000);
    // sensitivity to every input bit
    for (int b = 0; b < 46; b++) begin
      int same = 0;
      for (int t = 0; t < 500; t++) begin
        logic [45:0] in, in2;
        logic [15:0] p0;
        in = {$urandom, 14'($urandom)};
        {seed, inst, is_edge, id} = in;
        #1 p0 = prio;
        in2 = in ^ (46'd1 << b);
        {seed, inst, is_edge, id} = in2;
        #1 if (prio == p0) same++;
      end
      chk(same <= 5, $sformatf("input bit %0d changes output (%0d/500 unchanged)", b, same));
    end
    // output bit balance
    for (int i = 0; i < PW; i++) ones[i] = 0;
    for (int t = 0; t < 40000; t++) begin
      seed = $urandom; inst = 5'($urandom_range(0, 23)); is_edge = 1'($urandom); id = 8'($urandom);
      #1;
      for (int i = 0; i < PW; i++) ones[i] += int'(prio[i]);
    end
    for (int i = 0; i < PW; i++)
      chk(ones[i] > 18800 && ones[i] < 21200, $sformatf("bit %0d balance %0d/40000", i, ones[i]));
    // different instances order the same ids differently
    begin
      logic [15:0] pa [32], pb [32];
      int inversions;
      seed = 32'h2545F491; is_edge = 0;
      for (int n = 0; n < 32; n++) begin
        id = 8'(n);
        inst = 0; #1 pa[n] = prio;
        inst = 1; #1 pb[n] = prio;
      end
      inversions = 0;
      for (int a = 0; a < 32; a++)
        for (int b = a + 1; b < 32; b++)
          if ((pa[a] < pa[b]) != (pb[a] < pb[b])) inversions++;
      chk(inversions > 100, $sformatf("instances 0 and 1 disagree on %0d of 496 pairs", inversions));
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
