// tb_edge_buffer: random read/write test of the multi-bank edge buffer on a
// 5x5x5 lattice against an array model indexed by key coordinate. Each step
// picks a centre, checks the four key words it reads (v, v+x, v+y, v+z with
// x/y wrap and v+z missing on the last round), checks the key banks against
// the hash formula, then writes new random words back through the returned
// locations and updates the model. Finally checks that 'clear' empties it.
module tb_edge_buffer;
  import ced_pkg::*;
  localparam int unsigned N = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clear;
  coord_t rd_c;
  edge_word_t rd_word [4];
  logic [BW-1:0] rd_bank [4];
  logic [AW-1:0] rd_addr [4];
  logic rd_ok [4];
  logic wr_en [4];
  edge_word_t wr_word [4];
  logic conflict;
  edge_buffer #(.LX(N), .LZ(N), .DEPTH(6)) u_dut (
    .clk, .clear, .rd_c, .rd_en(1'b1), .rd_word, .rd_bank, .rd_addr, .rd_ok,
    .wr_en, .wr_bank(rd_bank), .wr_addr(rd_addr), .wr_word, .conflict);

  int checks = 0, failures = 0;
  logic [5:0] model [N][N][N];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic coord_t key(coord_t c, int i);
    coord_t k = c;
    if (i == 1) k.x = (c.x == N-1) ? 0 : c.x + 1;
    if (i == 2) k.y = (c.y == N-1) ? 0 : c.y + 1;
    if (i == 3) k.z = c.z + 1;
    return k;
  endfunction

  initial begin
    clear = 1; foreach (wr_en[i]) wr_en[i] = 0; rd_c = '0;
    @(posedge clk); #1 clear = 0;
    foreach (model[x, y, z]) model[x][y][z] = '0;
    for (int t = 0; t < 2000; t++) begin
      coord_t k;
      rd_c = '{x: CW'($urandom_range(0, N-1)), y: CW'($urandom_range(0, N-1)), z: CW'($urandom_range(0, N-1))};
      #1;
      chk(!conflict, "no bank conflict");
      chk(rd_ok[3] == (rd_c.z != N-1), "v+z exists");
      for (int i = 0; i < 4; i++) if (rd_ok[i]) begin
        k = key(rd_c, i);
        chk(6'(rd_word[i]) == model[k.x][k.y][k.z], $sformatf("read word key %0d", i));
        chk(int'(rd_bank[i]) == (k.x + 3*k.y + 5*k.z) % 22, "key bank");
      end
      for (int i = 0; i < 4; i++) begin
        wr_en[i] = rd_ok[i] && ($urandom_range(0, 1) == 1);
        wr_word[i] = edge_word_t'(6'($urandom));
        if (wr_en[i]) begin k = key(rd_c, i); model[k.x][k.y][k.z] = 6'(wr_word[i]); end
      end
      @(posedge clk); #1;
      foreach (wr_en[i]) wr_en[i] = 0;
    end
    clear = 1; @(posedge clk); #1 clear = 0;
    rd_c = '{x: 1, y: 2, z: 3}; #1;
    for (int i = 0; i < 4; i++) chk(rd_word[i] == '0, "cleared");
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
