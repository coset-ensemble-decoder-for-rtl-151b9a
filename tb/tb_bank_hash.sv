// tb_bank_hash: exhaustive check of the bank hash at the full 15x15x15 size.
// Walks every lattice point in lexicographic order (x outer, z inner) and
// keeps one counter per bank, so the expected in-bank address is the number
// of earlier points seen in the same bank; the expected bank is
// (x + 3y + 5z) mod 22. Also checks that every vertex neighbourhood
// (centre and six axis neighbours, x/y wrapping, z open) uses seven
// distinct banks, and that no address exceeds the bank depth.
module tb_bank_hash;
  import ced_pkg::*;
  localparam int unsigned N = 15;
  coord_t c;
  logic [BW-1:0] bank;
  logic [AW-1:0] addr;
  bank_hash u_dut (.c, .bank, .addr);

  coord_t nc;
  logic [BW-1:0] nbank;
  logic [AW-1:0] naddr;
  bank_hash u_nb (.c(nc), .bank(nbank), .addr(naddr));

  int checks = 0, failures = 0;
  int cnt [22];
  initial begin
    foreach (cnt[b]) cnt[b] = 0;
    for (int x = 0; x < N; x++)
      for (int y = 0; y < N; y++)
        for (int z = 0; z < N; z++) begin
          int eb;
          int seen [22];
          c = '{x: CW'(x), y: CW'(y), z: CW'(z)};
          #1;
          eb = (x + 3*y + 5*z) % 22;
          checks++;
          if (bank != BW'(eb) || addr != AW'(cnt[eb]) || addr >= 154) begin
            failures++;
            if (failures < 10) $display("FAIL (%0d,%0d,%0d): bank %0d/%0d addr %0d/%0d", x, y, z, bank, eb, addr, cnt[eb]);
          end
          cnt[eb]++;
          // neighbourhood distinctness
          foreach (seen[b]) seen[b] = 0;
          seen[bank]++;
          for (int d = 0; d < 6; d++)
            if (nbr_exists(c, d, N)) begin
              nc = nbr(c, d, N);
              #1;
              seen[nbank]++;
            end
          checks++;
          foreach (seen[b]) if (seen[b] > 1) begin
            failures++;
            $display("FAIL neighbourhood of (%0d,%0d,%0d) shares bank %0d", x, y, z, b);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
