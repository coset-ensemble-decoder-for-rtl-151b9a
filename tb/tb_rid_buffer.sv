// tb_rid_buffer: random read/write test of the multi-bank RID buffer on a
// 5x5x5 lattice against an array model. Each step reads a centre and its six
// neighbours (x/y wrap, z open), compares all present words with the model
// and the bank of each with the hash formula, then writes random words to a
// random subset of the neighbours (ports 0..5) or the centre (port 6).
module tb_rid_buffer;
  import ced_pkg::*;
  localparam int unsigned N = 5;
  localparam int unsigned WD = $bits(rid_word_t);
  logic clk = 0;
  always #5 clk = ~clk;
  logic clear;
  coord_t rd_c;
  rid_word_t rd_word [7];
  logic [BW-1:0] rd_bank [7];
  logic [AW-1:0] rd_addr [7];
  logic rd_ok [7];
  logic wr_en [7];
  rid_word_t wr_word [7];
  logic conflict;
  rid_buffer #(.LX(N), .LZ(N), .DEPTH(6)) u_dut (
    .clk, .clear, .rd_c, .rd_en(1'b1), .rd_word, .rd_bank, .rd_addr, .rd_ok,
    .wr_en, .wr_bank(rd_bank), .wr_addr(rd_addr), .wr_word, .conflict);

  int checks = 0, failures = 0;
  logic [WD-1:0] model [N][N][N];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic coord_t key(coord_t c, int i);
    coord_t k = c;
    case (i)
      1: k.x = (c.x == N-1) ? 0 : c.x + 1;
      2: k.x = (c.x == 0) ? N-1 : c.x - 1;
      3: k.y = (c.y == N-1) ? 0 : c.y + 1;
      4: k.y = (c.y == 0) ? N-1 : c.y - 1;
      5: k.z = c.z + 1;
      6: k.z = c.z - 1;
      default: ;
    endcase
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
      chk(rd_ok[5] == (rd_c.z != N-1) && rd_ok[6] == (rd_c.z != 0), "z neighbours exist");
      for (int i = 0; i < 7; i++) if (rd_ok[i]) begin
        k = key(rd_c, i);
        chk(WD'(rd_word[i]) == model[k.x][k.y][k.z], $sformatf("read word %0d", i));
        chk(int'(rd_bank[i]) == (k.x + 3*k.y + 5*k.z) % 22, "bank");
      end
      for (int i = 0; i < 7; i++) begin
        wr_en[i] = rd_ok[i] && ($urandom_range(0, 2) == 0);
        wr_word[i] = rid_word_t'(WD'($urandom));
      end
      for (int i = 0; i < 7; i++) if (wr_en[i]) begin k = key(rd_c, i); model[k.x][k.y][k.z] = WD'(wr_word[i]); end
      @(posedge clk); #1;
      foreach (wr_en[i]) wr_en[i] = 0;
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
