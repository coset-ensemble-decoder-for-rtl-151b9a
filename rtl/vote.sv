// vote: the Voting module that turns K candidate corrections into one.
//
// Following the paper's MajorVote, the vote is restricted to the candidates
// of smallest correction weight |E_i|; among those, each candidate votes for
// its logical class L_i and the class with most votes wins (the estimate of
// the most likely coset). The winning candidate index is the lowest-numbered
// candidate of minimum weight in the winning class, so its correction is
// returned as the final one (any member of the coset will do). Ties between
// classes go to the lower class number, which is this design's choice.
// Registered: 'out_valid' follows 'in_valid' by one cycle.
module vote
  import ced_pkg::*;
#(
  parameter int unsigned NK = ced_pkg::K
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [WW-1:0]   weight  [NK],
  input  logic [LOGW-1:0] logical [NK],
  output logic            out_valid,
  output logic [LOGW-1:0] win_logical,
  output logic [WW-1:0]   win_weight,
  output logic [4:0]      win_index,
  output logic [5:0]      win_votes
);

  localparam int unsigned NC = 1 << LOGW;

  logic [WW-1:0]   wmin;
  logic [5:0]      cnt [NC];
  logic [LOGW-1:0] cls;
  logic [4:0]      idx;

  always_comb begin
    wmin = weight[0];
    for (int k = 1; k < NK; k++)
      if (weight[k] < wmin) wmin = weight[k];
    for (int c = 0; c < NC; c++) cnt[c] = '0;
    for (int k = 0; k < NK; k++)
      if (weight[k] == wmin) cnt[logical[k]] = cnt[logical[k]] + 1'b1;
    cls = '0;
    for (int c = 1; c < NC; c++)
      if (cnt[c] > cnt[cls]) cls = LOGW'(c);
    idx = '0;
    for (int k = NK-1; k >= 0; k--)
      if (weight[k] == wmin && logical[k] == cls) idx = 5'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      win_logical <= '0;
      win_weight  <= '0;
      win_index   <= '0;
      win_votes   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        win_logical <= cls;
        win_weight  <= wmin;
        win_index   <= idx;
        win_votes   <= cnt[cls];
      end
    end
  end

endmodule
