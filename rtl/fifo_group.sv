// fifo_group: the S5 FIFO group with its FIFO controller.
//
// A growth step in S4 can claim up to six new boundary vertices at once, one
// per direction. Each direction has its own FIFO, so all six are accepted in
// the same cycle; the controller then drains them one per cycle towards S6,
// always taking the lowest-numbered non-empty FIFO first (fixed priority).
// 'stall' is raised while any member is full, which makes the pipeline hold
// S4. Member depth and the priority order are this design's choices; the
// paper shows a FIFO group behind a FIFO controller without detail.
module fifo_group #(
  parameter int unsigned WIDTH = 12,
  parameter int unsigned NF    = 6,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push    [NF],
  input  logic [WIDTH-1:0] wr_data [NF],
  input  logic             out_ready,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  output logic             stall,
  output logic             empty
);

  logic             f_empty [NF];
  logic             f_full  [NF];
  logic             f_pop   [NF];
  logic [WIDTH-1:0] f_data  [NF];

  for (genvar i = 0; i < NF; i++) begin : g_f
    sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_f (
      .clk, .rst_n, .flush,
      .push(push[i]), .wr_data(wr_data[i]),
      .pop(f_pop[i]), .rd_data(f_data[i]),
      .empty(f_empty[i]), .full(f_full[i]), .count()
    );
  end

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    stall     = 1'b0;
    empty     = 1'b1;
    for (int i = 0; i < NF; i++) begin
      f_pop[i] = 1'b0;
      stall    = stall | f_full[i];
      empty    = empty & f_empty[i];
    end
    for (int i = NF-1; i >= 0; i--)
      if (!f_empty[i]) begin
        out_valid = 1'b1;
        out_data  = f_data[i];
      end
    for (int i = 0; i < NF; i++)
      if (!f_empty[i] && out_ready) begin
        f_pop[i] = 1'b1;
        break;
      end
  end

endmodule
