// bypass_net: the forwarding network that feeds stage S4's writes back to
// the younger vertices in S2 and S3.
//
// S4 commits its growth decisions (edge words, claimed RID words) at the end
// of its cycle, but the two vertices behind it have already read, or are
// reading in the same cycle, the very same memory words. For each of the N
// words a reader holds, identified by (bank, address), this unit looks for an
// S4 write to the same location among M write ports and, if found,
// substitutes the written value. 'hit' marks each substituted word. Purely
// combinational. The paper names the forwarding network and its purpose;
// the address-compare organisation is this design's.
module bypass_net
  import ced_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned M     = 4,
  parameter int unsigned WIDTH = 6
) (
  input  logic             rd_ok   [N],
  input  logic [BW-1:0]    rd_bank [N],
  input  logic [AW-1:0]    rd_addr [N],
  input  logic [WIDTH-1:0] rd_data [N],
  input  logic             wr_en   [M],
  input  logic [BW-1:0]    wr_bank [M],
  input  logic [AW-1:0]    wr_addr [M],
  input  logic [WIDTH-1:0] wr_data [M],
  output logic [WIDTH-1:0] out     [N],
  output logic             hit     [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      out[i] = rd_data[i];
      hit[i] = 1'b0;
      for (int j = 0; j < M; j++)
        if (rd_ok[i] && wr_en[j] && wr_bank[j] == rd_bank[i] && wr_addr[j] == rd_addr[i]) begin
          out[i] = wr_data[j];
          hit[i] = 1'b1;
        end
    end
  end

endmodule
