// mpna_pe: processing element of both MPNA systolic arrays.
//
// Each cycle the PE registers the activation arriving from its left neighbour
// (data reg), multiplies it with its active weight and adds the partial sum
// arriving from the PE above; the sum is registered (psum reg) and passed
// down, the activation is passed right. Weights for the next iteration shift
// down the column through a separate weight register (wl_q) while the active
// weight register (wa_q) keeps the current value, so loading the next set of
// weights overlaps computation. The active weight is replaced by the shifted
// one when a swap tag arrives with the data; the tag moves right with the data,
// so the switch follows the diagonal wavefront of the array.
//
// With DIRECT_W=1 (SA-FC) the PE also has a dedicated weight input from the
// weight buffer; in fc_mode the active weight register loads it every cycle.
//
// Following the published PE: the two weight registers, data register, psum
// register, multiplier and adder. Own choices: the swap tag that times the
// weight switch, the widths and the synchronous active-low reset.
//
// Timing: d_in/tag_in/w_dir are captured at a rising edge; the product of the
// captured pair is added to ps_in during the next cycle and ps_out shows it
// one cycle after that capture cycle.
module mpna_pe
  import mpna_pkg::*;
#(
  parameter bit DIRECT_W = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  fc_mode,   // DIRECT_W only: take w_dir every cycle
  input  logic  wload,     // shift the weight chain one row down
  input  act_t  d_in,
  input  logic  tag_in,    // swap to the shifted weight with this datum
  input  act_t  w_in,      // weight chain from the PE above
  input  act_t  w_dir,     // dedicated weight from the weight buffer
  input  psum_t ps_in,
  output act_t  d_out,
  output logic  tag_out,
  output act_t  w_out,
  output psum_t ps_out
);

  act_t  d_q, wl_q, wa_q;
  logic  tag_q;
  psum_t ps_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_q   <= '0;
      tag_q <= 1'b0;
      wl_q  <= '0;
      wa_q  <= '0;
      ps_q  <= '0;
    end else begin
      d_q   <= d_in;
      tag_q <= tag_in;
      if (wload) wl_q <= w_in;
      if (DIRECT_W && fc_mode) wa_q <= w_dir;
      else if (tag_in)         wa_q <= wl_q;
      ps_q  <= ps_in + psum_t'(d_q) * psum_t'(wa_q);
    end
  end

  assign d_out   = d_q;
  assign tag_out = tag_q;
  assign w_out   = wl_q;
  assign ps_out  = ps_q;

endmodule
