// mpna_pool: max-pooling datapath of the MPNA pooling and activation module.
//
// Two max stages in series: the first takes the two newest samples of the
// accumulated stream (inputs 1 and 2), the second takes that result and the
// partial pooling result read from the sub-unit's scratch-pad (input 3). This
// is the arrangement of the published pool unit; the enables that let input 1
// or input 3 drop out (a single sample, or the first row of a pooling window)
// are this design's own. Purely combinational.
module mpna_pool
  import mpna_pkg::*;
(
  input  act_t in1,      // older stream sample
  input  act_t in2,      // newer stream sample
  input  act_t in3,      // stored partial pool
  input  logic use1,
  input  logic use3,
  output act_t max_out
);

  act_t m12;

  always_comb begin
    m12 = (use1 && in1 > in2) ? in1 : in2;
    max_out = (use3 && in3 > m12) ? in3 : m12;
  end

endmodule
