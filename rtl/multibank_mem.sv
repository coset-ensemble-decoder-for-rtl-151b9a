// multibank_mem: NB independent single-port-per-cycle banks behind a
// crossbar, so that NRD reads and NWR writes that fall into distinct banks
// all complete in the same cycle.
//
// Every port names a (bank, address) pair. Each bank selects the one read
// port and the one write port aimed at it; the read data of a port is the
// word of its bank, read combinationally (distributed-RAM style). Writes
// take effect at the clock edge. 'clear' empties every word in one cycle,
// which is how a new decoding task starts. Two enabled ports of the same
// kind on one bank are a conflict: the hash guarantees it never happens for
// the neighbourhoods this design reads, the 'conflict' output reports it and
// an assertion checks it. The crossbar structure is this design's; the
// paper gives the banking and the hash, not the port circuitry.
module multibank_mem
  import ced_pkg::*;
#(
  parameter int unsigned NB    = ced_pkg::NBANKS,
  parameter int unsigned DEPTH = 154,
  parameter int unsigned WIDTH = 6,
  parameter int unsigned NRD   = 4,
  parameter int unsigned NWR   = 4
) (
  input  logic                 clk,
  input  logic                 clear,
  input  logic                 rd_en   [NRD],
  input  logic [BW-1:0]        rd_bank [NRD],
  input  logic [AW-1:0]        rd_addr [NRD],
  output logic [WIDTH-1:0]     rd_data [NRD],
  input  logic                 wr_en   [NWR],
  input  logic [BW-1:0]        wr_bank [NWR],
  input  logic [AW-1:0]        wr_addr [NWR],
  input  logic [WIDTH-1:0]     wr_data [NWR],
  output logic                 conflict
);

  logic [WIDTH-1:0] mem [NB][DEPTH];

  // per-bank port selection
  logic             bw_en   [NB];
  logic [AW-1:0]    bw_addr [NB];
  logic [WIDTH-1:0] bw_data [NB];
  logic [AW-1:0]    br_addr [NB];
  logic [WIDTH-1:0] br_data [NB];

  always_comb begin
    conflict = 1'b0;
    for (int b = 0; b < NB; b++) begin
      int unsigned nr, nw;
      nr = 0; nw = 0;
      bw_en[b]   = 1'b0;
      bw_addr[b] = '0;
      bw_data[b] = '0;
      br_addr[b] = '0;
      for (int p = 0; p < NRD; p++)
        if (rd_en[p] && 32'(rd_bank[p]) == b) begin
          br_addr[b] = rd_addr[p];
          nr++;
        end
      for (int p = 0; p < NWR; p++)
        if (wr_en[p] && 32'(wr_bank[p]) == b) begin
          bw_en[b]   = 1'b1;
          bw_addr[b] = wr_addr[p];
          bw_data[b] = wr_data[p];
          nw++;
        end
      if (nr > 1 || nw > 1) conflict = 1'b1;
      br_data[b] = (32'(br_addr[b]) < DEPTH) ? mem[b][br_addr[b]] : '0;
    end
    for (int p = 0; p < NRD; p++)
      rd_data[p] = (32'(rd_bank[p]) < NB) ? br_data[rd_bank[p]] : '0;
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (clear) begin
        for (int a = 0; a < DEPTH; a++) mem[b][a] <= '0;
      end else if (bw_en[b] && 32'(bw_addr[b]) < DEPTH) begin
        mem[b][bw_addr[b]] <= bw_data[b];
      end
    end
  end

  a_no_conflict: assert property (@(posedge clk) !conflict)
    else $error("multibank_mem: two accesses of one kind hit the same bank");

endmodule
