// lrs_arbiter: least-recently-serviced arbiter.
//
// Breaks ties between requests that the epoch scheme treats as equal. The
// block keeps, for every pair of requesters, which of the two was serviced
// less recently (a matrix arbiter). The winner is the requester that is less
// recently serviced than every other active requester. When update is high
// the current winner becomes the most recently serviced of all.
//
// Interface: req in, one-hot gnt out (combinational), update in.
// Timing: the order changes at the clock edge after update.
// The least-recently-serviced rule is the one named for the tie-breaker; the
// matrix form and the reset order (lower index first) are this design's
// choices.
module lrs_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update,
  output logic [N-1:0] gnt
);

  // older[i][j]: requester i was serviced less recently than j
  logic [N-1:0][N-1:0] older;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      gnt[i] = req[i];
      for (int j = 0; j < N; j++) begin
        if (j != i && req[j] && older[j][i]) gnt[i] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          older[i][j] <= (i < j);
    end else if (update) begin
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) begin
          for (int j = 0; j < N; j++) begin
            if (j != i) begin
              older[i][j] <= 1'b0;
              older[j][i] <= 1'b1;
            end
          end
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             (req != '0) |-> $onehot(gnt));

endmodule
