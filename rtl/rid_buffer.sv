// rid_buffer: the multi-bank RID buffer of pipeline stage S2.
//
// Holds, for every lattice vertex (VID), the root ID (RID) of the cluster
// growth that reached it, plus its winding and hop distance relative to that
// root (rid_word_t). This is the lower level of the paper's hierarchical ID
// mapping: VID -> RID is written once per vertex during growth and never
// touched by merges. Given a centre vertex it reads the centre and its six
// axis neighbours in one cycle; the hash puts these seven words in distinct
// banks. Entry 0 is the centre, entry 1+d the neighbour in direction d
// (+x,-x,+y,-y,+z,-z); the z neighbours are absent at the open ends.
// Seven write ports: 0..5 for neighbours claimed by a growth step, 6 for
// loading a defect. Reads are combinational, writes land at the clock edge.
module rid_buffer
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
  output rid_word_t     rd_word [7],
  output logic [BW-1:0] rd_bank [7],
  output logic [AW-1:0] rd_addr [7],
  output logic          rd_ok   [7],
  input  logic          wr_en   [7],
  input  logic [BW-1:0] wr_bank [7],
  input  logic [AW-1:0] wr_addr [7],
  input  rid_word_t     wr_word [7],
  output logic          conflict
);

  localparam int unsigned WD = $bits(rid_word_t);

  coord_t key [7];
  logic   ren [7];
  logic [WD-1:0] rdat [7];
  logic [WD-1:0] wdat [7];

  always_comb begin
    key[0]   = rd_c;
    rd_ok[0] = 1'b1;
    for (int d = 0; d < 6; d++) begin
      key[d+1]   = nbr(rd_c, d, LX);
      rd_ok[d+1] = nbr_exists(rd_c, d, LZ);
    end
    for (int i = 0; i < 7; i++) begin
      ren[i] = rd_en && rd_ok[i];
    end
  end

  always_comb
    for (int i = 0; i < 7; i++) begin
      rd_word[i] = rid_word_t'(rdat[i]);
      wdat[i]    = WD'(wr_word[i]);
    end

  for (genvar i = 0; i < 7; i++) begin : g_h
    bank_hash #(.LX(LX), .LZ(LZ)) u_h (.c(key[i]), .bank(rd_bank[i]), .addr(rd_addr[i]));
  end

  multibank_mem #(.DEPTH(DEPTH), .WIDTH(WD), .NRD(7), .NWR(7)) u_mem (
    .clk, .clear,
    .rd_en(ren), .rd_bank, .rd_addr, .rd_data(rdat),
    .wr_en, .wr_bank, .wr_addr, .wr_data(wdat),
    .conflict
  );

endmodule
