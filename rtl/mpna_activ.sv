// mpna_activ: activation unit of MPNA (bypass, ReLU, Leaky-ReLU).
//
// For a negative input, ReLU gives 0 and Leaky-ReLU gives alpha*x, alpha
// being a signed Q1.7 slope (value/128); a non-negative input passes
// unchanged, as it does in bypass. The leaky product is computed on
// magnitudes and its sign restored afterwards, as in the published unit (two's
// complement conversions around one multiplier, selector driven by ctrl). The
// product is truncated towards zero and saturated to 8 bits.
// Own choices: the Q1.7 format of alpha, rounding and saturation.
// Purely combinational.
module mpna_activ
  import mpna_pkg::*;
(
  input  act_t act_in,
  input  act_t alpha,
  input  act_e ctrl,
  output act_t act_out
);

  logic                  neg_x, neg_a, neg_p;
  logic [DATA_W-1:0]     mag_x, mag_a;
  logic [2*DATA_W-1:0]   mag_p;
  logic [2*DATA_W-1:0]   mag_s;
  logic signed [2*DATA_W:0] leaky;
  act_t                  leaky_sat;

  always_comb begin
    neg_x = act_in[DATA_W-1];
    neg_a = alpha[DATA_W-1];
    mag_x = neg_x ? DATA_W'(-act_in) : DATA_W'(act_in);
    mag_a = neg_a ? DATA_W'(-alpha)  : DATA_W'(alpha);
    mag_p = (2*DATA_W)'(mag_x) * (2*DATA_W)'(mag_a);
    mag_s = mag_p >> ALPHA_FRAC;
    neg_p = neg_x ^ neg_a;
    leaky = neg_p ? -$signed({1'b0, mag_s}) : $signed({1'b0, mag_s});
    if (leaky > 127)       leaky_sat = 8'sd127;
    else if (leaky < -128) leaky_sat = -8'sd128;
    else                   leaky_sat = act_t'(leaky);

    unique case (ctrl)
      ACT_RELU:  act_out = neg_x ? '0 : act_in;
      ACT_LEAKY: act_out = neg_x ? leaky_sat : act_in;
      default:   act_out = act_in;
    endcase
  end

endmodule
