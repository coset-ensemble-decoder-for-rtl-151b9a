// tb_bypass_net: random test of the forwarding network. Readers and writers
// draw (bank, address) pairs from a small space so that matches are common;
// the expected output of each read word is the data of the last enabled
// matching write port if its own 'ok' is set, else the read data itself.
module tb_bypass_net;
  import ced_pkg::*;
  localparam int unsigned N = 7, M = 7, W = 16;
  logic rd_ok [N];
  logic [BW-1:0] rd_bank [N];
  logic [AW-1:0] rd_addr [N];
  logic [W-1:0] rd_data [N];
  logic wr_en [M];
  logic [BW-1:0] wr_bank [M];
  logic [AW-1:0] wr_addr [M];
  logic [W-1:0] wr_data [M];
  logic [W-1:0] out [N];
  logic hit [N];
  bypass_net #(.N(N), .M(M), .WIDTH(W)) u_dut (.*);
  int checks = 0, failures = 0, hits = 0;
  initial begin
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < N; i++) begin
        rd_ok[i] = $urandom_range(0, 3) != 0;
        rd_bank[i] = BW'($urandom_range(0, 3)); rd_addr[i] = AW'($urandom_range(0, 1));
        rd_data[i] = W'($urandom);
      end
      for (int j = 0; j < M; j++) begin
        wr_en[j] = $urandom_range(0, 2) == 0;
        wr_bank[j] = BW'($urandom_range(0, 3)); wr_addr[j] = AW'($urandom_range(0, 1));
        wr_data[j] = W'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        logic [W-1:0] e;
        bit h;
        e = rd_data[i]; h = 0;
        for (int j = 0; j < M; j++)
          if (rd_ok[i] && wr_en[j] && wr_bank[j] == rd_bank[i] && wr_addr[j] == rd_addr[i]) begin
            e = wr_data[j]; h = 1;
          end
        checks++;
        hits += h;
        if (out[i] !== e || hit[i] !== h) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d i=%0d", t, i);
        end
      end
    end
    checks++;
    if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
