// credit_counter: bandwidth-usage counter of one priority or bandwidth thread.
//
// The count starts at 0. Each periodic event (inc) adds one credit, each
// request of the thread that the target services (dec) takes one off, so the
// count is a moving record of how far the thread is above or below its
// allocation. It saturates at the user's positive limit (a thread that asks
// rarely cannot hoard more credit than that) and at the negative limit (which
// bounds how long over-use is remembered). A negative count demotes the thread
// to best effort.
//
// Interface: inc, dec, signed pos_limit >= 0 and neg_limit <= 0; count and
// demote out, both from the register, so demote reflects service up to the
// previous cycle. inc and dec in the same cycle cancel.
// The counter and its two limits follow the paper; the width is this
// design's choice.
module credit_counter #(
  parameter int unsigned CW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 inc,
  input  logic                 dec,
  input  logic signed [CW-1:0] pos_limit,
  input  logic signed [CW-1:0] neg_limit,
  output logic signed [CW-1:0] count,
  output logic                 demote
);

  logic signed [CW:0] nxt;

  logic signed [CW:0] cur, step, lim_hi, lim_lo;

  always_comb begin
    cur    = {count[CW-1], count};
    lim_hi = {pos_limit[CW-1], pos_limit};
    lim_lo = {neg_limit[CW-1], neg_limit};
    step   = (inc == dec) ? $signed((CW+1)'(0)) :
             inc          ? $signed((CW+1)'(1)) : $signed({(CW+1){1'b1}});
    nxt    = cur + step;
    if (nxt > lim_hi) nxt = lim_hi;
    if (nxt < lim_lo) nxt = lim_lo;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= nxt[CW-1:0];
  end

  assign demote = count[CW-1];

endmodule
