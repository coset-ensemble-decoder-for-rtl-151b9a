// sync_fifo: single-clock first-in first-out queue, one push and one pop
// per cycle. Used as the vertex FIFO that feeds pipeline stage S1 and as the
// members of the S5 FIFO group. Storage is a circular array of DEPTH words
// (DEPTH a power of two) with read and write pointers one bit wider than
// the address, so full and empty are told apart. 'rd_data' shows the head
// word whenever 'empty' is low (first-word fall-through). A push into a
// full queue or a pop from an empty one is ignored and flagged by an
// assertion. Depths are this design's choice; the paper names the FIFOs
// but not their size.
module sync_fifo #(
  parameter int unsigned WIDTH = 12,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned PTRW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTRW:0]    wp, rp;

  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (PTRW+1)'(DEPTH));
  assign rd_data = mem[rp[PTRW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (flush) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full && !flush) mem[wp[PTRW-1:0]] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !flush));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !flush));

endmodule
