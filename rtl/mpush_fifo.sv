// mpush_fifo: a FIFO that accepts up to NPUSH words per cycle and releases
// one. The words whose push bit is set are packed, in port order, into
// consecutive slots. The producer must look at 'free' and hold off when
// fewer than NPUSH slots remain; an overflow is flagged by an assertion.
// It is the boundary buffer of stages S5/S7 (two pushes per cycle: the
// vertex that was just grown and a newly claimed vertex from the FIFO group)
// and the queue of compressed-graph edges between the clustering pipeline
// and the forest-exploration instances (up to six per cycle). The paper
// names the boundary buffer but not its organisation; this one is this
// design's choice. Head word is shown whenever 'empty' is low.
module mpush_fifo #(
  parameter int unsigned WIDTH = 12,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NPUSH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push    [NPUSH],
  input  logic [WIDTH-1:0] wr_data [NPUSH],
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count,
  output logic [$clog2(DEPTH):0] free
);

  localparam int unsigned PTRW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTRW:0]    wp, rp;
  logic [PTRW:0]    npush;

  assign count   = wp - rp;
  assign free    = (PTRW+1)'(DEPTH) - count;
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[PTRW-1:0]];

  always_comb begin
    npush = '0;
    for (int i = 0; i < NPUSH; i++) npush += (PTRW+1)'(push[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (flush) begin
      wp <= '0;
      rp <= '0;
    end else begin
      wp <= wp + npush;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!flush) begin
      logic [PTRW:0] p;
      p = wp;
      for (int i = 0; i < NPUSH; i++)
        if (push[i]) begin
          mem[p[PTRW-1:0]] <= wr_data[i];
          p = p + 1'b1;
        end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) flush || npush <= free);

endmodule
