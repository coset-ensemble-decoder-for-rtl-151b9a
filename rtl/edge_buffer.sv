// edge_buffer: the multi-bank edge buffer of pipeline stage S2.
//
// Each edge of the lattice is stored under the coordinate of its forward
// (positive) endpoint, as the paper prescribes; one word per vertex holds the
// growth state (0, 1 or 2 half-edges) of the three edges that end there, one
// per axis. The six edges incident to a centre vertex v are therefore in the
// words of v (its three backward edges) and of v+x, v+y, v+z (one forward
// edge each). Given v, the buffer hashes these four keys (bank_hash), reads
// all four words in one cycle from distinct banks and returns them with
// their (bank, address) so that later stages can write them back and the
// bypass network can compare them. Key 3 is absent on the last round.
// Reads are combinational, writes land at the clock edge.
module edge_buffer
  import ced_pkg::*;
#(
  parameter int unsigned LX    = ced_pkg::L,
  parameter int unsigned LZ    = ced_pkg::R,
  parameter int unsigned DEPTH = 154
) (
  input  logic          clk,
  input  logic          clear,
  input  coord_t        rd_c,
  input  logic          rd_en,
  output edge_word_t    rd_word [4],
  output logic [BW-1:0] rd_bank [4],
  output logic [AW-1:0] rd_addr [4],
  output logic          rd_ok   [4],
  input  logic          wr_en   [4],
  input  logic [BW-1:0] wr_bank [4],
  input  logic [AW-1:0] wr_addr [4],
  input  edge_word_t    wr_word [4],
  output logic          conflict
);

  coord_t key [4];
  logic   ren [4];
  logic [5:0] rdat [4];
  logic [5:0] wdat [4];

  always_comb begin
    key[0] = rd_c;
    key[1] = nbr(rd_c, 0, LX);
    key[2] = nbr(rd_c, 2, LX);
    key[3] = nbr(rd_c, 4, LX);
    for (int i = 0; i < 4; i++) rd_ok[i] = 1'b1;
    rd_ok[3] = nbr_exists(rd_c, 4, LZ);
    for (int i = 0; i < 4; i++) begin
      ren[i] = rd_en && rd_ok[i];
    end
  end

  always_comb
    for (int i = 0; i < 4; i++) begin
      rd_word[i] = edge_word_t'(rdat[i]);
      wdat[i]    = 6'(wr_word[i]);
    end

  for (genvar i = 0; i < 4; i++) begin : g_h
    bank_hash #(.LX(LX), .LZ(LZ)) u_h (.c(key[i]), .bank(rd_bank[i]), .addr(rd_addr[i]));
  end

  multibank_mem #(.DEPTH(DEPTH), .WIDTH(6), .NRD(4), .NWR(4)) u_mem (
    .clk, .clear,
    .rd_en(ren), .rd_bank, .rd_addr, .rd_data(rdat),
    .wr_en, .wr_bank, .wr_addr, .wr_data(wdat),
    .conflict
  );

endmodule
