// sb_update: the Update component of the TE module, the SB time evolution of
// PC oscillators per cycle.
//
// For each lane it computes, from the position x, the momentum p and the
// interaction sum dp (sum_j J_ij x_j of the previous SB step):
//   p <- p + c0*dp                          (c0 = dt*gamma0)
//   repeat M times:
//     p <- p + dt*( -(alpha0-alpha)*x - beta0*x^3 )
//     x <- x + dt*p
// This is lines 13-17 of the SB algorithm with the external field h = 0.
// Every product is truncated (arithmetic shift) back to its format and x and
// p saturate to 16 bits after each update, as sb_pkg describes.
// Pipeline: one stage for the momentum kick and one stage per sub-step, so
// the latency is LAT = M+1 cycles at a throughput of one word per cycle.
// A tag (the write-back address in the TE module) and the word's
// alpha0-alpha travel with the data, so a change of alpha between SB steps
// does not affect words still in the pipeline.
// The equations follow the paper; the number of sub-steps M (the paper does
// not give it), the fixed-point scaling, truncation and saturation are this
// design's choice.
module sb_update
  import sb_pkg::*;
#(
  parameter int unsigned PC   = 8,
  parameter int unsigned M    = 2,
  parameter int unsigned TAGW = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  coef_t                   c0,
  input  logic signed [CW+1:0]    a_coef,   // alpha0 - alpha, CF fraction bits
  input  coef_t                   beta0,
  input  coef_t                   dt,
  input  logic                    in_valid,
  input  logic [TAGW-1:0]         in_tag,
  input  xval_t [PC-1:0]          in_x,
  input  xval_t [PC-1:0]          in_p,
  input  acc_t  [PC-1:0]          in_dp,
  output logic                    out_valid,
  output logic [TAGW-1:0]         out_tag,
  output xval_t [PC-1:0]          out_x,
  output xval_t [PC-1:0]          out_p
);
  localparam int unsigned LAT = M + 1;

  // One sub-step of the symplectic-Euler update.
  function automatic void substep(input xval_t xi, input xval_t pi,
                                  input logic signed [CW+1:0] a,
                                  input coef_t b, input coef_t d,
                                  output xval_t xo, output xval_t po);
    logic signed [63:0] x2, x3, f, pn;
    x2 = (64'(xi) * 64'(xi)) >>> XF;
    x3 = (x2 * 64'(xi)) >>> XF;
    f  = -((64'(a) * 64'(xi)) >>> CF) - ((64'(b) * x3) >>> CF);
    pn = 64'(pi) + ((64'(d) * f) >>> CF);
    po = sat_x(pn);
    xo = sat_x(64'(xi) + ((64'(d) * 64'(po)) >>> CF));
  endfunction

  logic              v_q   [LAT+1];
  logic [TAGW-1:0]   tag_q [LAT+1];
  xval_t [PC-1:0]    x_q   [LAT+1];
  xval_t [PC-1:0]    p_q   [LAT+1];
  logic signed [CW+1:0] a_q [LAT+1];   // alpha0-alpha of the word, travels along

  // Stage 0 is the input.
  always_comb begin
    v_q[0]   = in_valid;
    tag_q[0] = in_tag;
    x_q[0]   = in_x;
    p_q[0]   = in_p;
    a_q[0]   = a_coef;
  end

  // Stage 1: momentum kick from the interaction sum.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q[1] <= 1'b0;
    else        v_q[1] <= v_q[0];
  end
  always_ff @(posedge clk) begin
    tag_q[1] <= tag_q[0];
    a_q[1]   <= a_q[0];
    x_q[1]   <= x_q[0];
    for (int c = 0; c < PC; c++)
      p_q[1][c] <= sat_x(64'(in_p[c]) + ((64'(c0) * 64'(in_dp[c])) >>> CF));
  end

  // Stages 2..M+1: one sub-step each.
  for (genvar s = 1; s <= M; s++) begin : g_sub
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_q[s+1] <= 1'b0;
      else        v_q[s+1] <= v_q[s];
    end
    always_ff @(posedge clk) begin
      tag_q[s+1] <= tag_q[s];
      a_q[s+1]   <= a_q[s];
      for (int c = 0; c < PC; c++) begin
        xval_t xn, pn;
        substep(x_q[s][c], p_q[s][c], a_q[s], beta0, dt, xn, pn);
        x_q[s+1][c] <= xn;
        p_q[s+1][c] <= pn;
      end
    end
  end

  assign out_valid = v_q[LAT];
  assign out_tag   = tag_q[LAT];
  assign out_x     = x_q[LAT];
  assign out_p     = p_q[LAT];

endmodule
