// mpna_sa: K x L systolic array of MPNA (SA-CONV with DIRECT_W=0, SA-FC with
// DIRECT_W=1).
//
// Activations enter from the left through an input skew (row k delayed by k
// cycles) and move one PE to the right per cycle; partial sums start at zero in
// the top row and move one PE down per cycle; the bottom row delivers one psum
// per column to the accumulation unit. Weights of one filter/neuron sit in one
// column, one weight per row.
//
// CONV use (both arrays): the next K x L weight set is shifted into the columns
// from the top (w_top, one row per cycle while wload is high, bottom row
// first) while the array computes with the current set; a vector with vec_tag
// set makes every PE switch to the shifted set as the vector passes it.
// FC use (SA-FC only, fc_mode=1): every PE takes a new weight from w_dir each
// cycle. Word t of the weight stream must be on w_dir in the same cycle as
// vector t is on vec (the weight buffer holds the weights in that aligned
// order, so PE(k,l) gets the weight meant for vector t-k-l).
//
// A metadata word (valid, accumulation address, first) entering with a vector
// leaves column l together with that vector's psum, K+1+l cycles later.
// Structure follows the published arrays; the metadata pipeline and the swap
// tag are this design's own.
module mpna_sa
  import mpna_pkg::*;
#(
  parameter bit          DIRECT_W = 1'b0,
  parameter int unsigned ROWS     = K,
  parameter int unsigned COLS     = L
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       fc_mode,
  input  act_t  [ROWS-1:0]           vec,
  input  logic                       vec_tag,
  input  meta_t                      meta_in,
  input  logic                       wload,
  input  act_t  [COLS-1:0]           w_top,
  input  act_t  [ROWS-1:0][COLS-1:0] w_dir,
  output psum_t [COLS-1:0]           psum,
  output meta_t [COLS-1:0]           meta_out
);

  act_t  [ROWS-1:0] sk_d;
  logic  [ROWS-1:0] sk_t;

  mpna_skew #(.ROWS(ROWS)) u_skew (
    .clk, .rst_n, .d_in(vec), .tag_in(vec_tag), .d_out(sk_d), .tag_out(sk_t)
  );

  // interconnect: d/tag flow right (index c is the input of column c),
  // w/ps flow down (index r is the input of row r)
  act_t  d_h [ROWS][COLS+1];
  logic  t_h [ROWS][COLS+1];
  act_t  w_v [ROWS+1][COLS];
  psum_t p_v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign d_h[r][0] = sk_d[r];
    assign t_h[r][0] = sk_t[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign w_v[0][c] = w_top[c];
    assign p_v[0][c] = '0;
    assign psum[c]   = p_v[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      mpna_pe #(.DIRECT_W(DIRECT_W)) u_pe (
        .clk, .rst_n, .fc_mode, .wload,
        .d_in  (d_h[r][c]),   .tag_in (t_h[r][c]),
        .w_in  (w_v[r][c]),   .w_dir  (w_dir[r][c]),
        .ps_in (p_v[r][c]),
        .d_out (d_h[r][c+1]), .tag_out(t_h[r][c+1]),
        .w_out (w_v[r+1][c]), .ps_out (p_v[r+1][c])
      );
    end
  end

  // metadata delay line: stage s holds what entered s+1 cycles ago
  localparam int unsigned MD = ROWS + COLS;
  meta_t md_q [MD];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < MD; s++) md_q[s] <= '0;
    end else begin
      md_q[0] <= meta_in;
      for (int s = 1; s < MD; s++) md_q[s] <= md_q[s-1];
    end
  end
  for (genvar c = 0; c < COLS; c++) begin : g_meta
    assign meta_out[c] = md_q[ROWS+c];
  end

endmodule
