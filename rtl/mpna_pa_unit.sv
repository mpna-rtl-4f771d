// mpna_pa_unit: one sub-unit of the MPNA pooling and activation unit.
//
// Finished accumulator values arrive one per cycle (accu, in_valid) with a
// command. Each value is first requantised to 8 bits (arithmetic shift right
// by 'shift', then saturation) and enters two registers in series, so the
// newest sample (input 2) and the one before it (input 1) are both available.
// When a sample's command has 'fire' set, the pool datapath takes the max of
// input 2, input 1 (if 'pair') and the partial result stored in the
// scratch-pad at the command's address (input 3, if 'use_spm'); the result is
// registered, passed through the activation unit (selected by the command) and
// written back to the scratch-pad at the same address. Activation applied to a
// pooled value equals pooling of activated values because the activations are
// monotonic, so the control unit selects bypass on the first pass of a window
// and the real activation on its last pass. The finished values are read out
// through rd_addr/pa_out.
//
// Follows the published sub-unit: two input registers, pool unit fed by
// inputs 1,2,3, a register, the activation unit, and an SPM that receives the
// result (4) and feeds back input 3. Own choices: requantisation, the command
// fields, and forwarding of a result still in the register to input 3.
//
// Timing: a sample present at cycle c is in the first register at c+1; if it
// fires, the pooled value is registered at c+2 and written to the SPM at the
// end of c+2, readable through pa_out from c+3.
module mpna_pa_unit
  import mpna_pkg::*;
#(
  parameter int unsigned DEPTH = SPM_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  acc_t                     accu,
  input  logic                     in_valid,
  input  pa_cmd_t                  in_cmd,
  input  logic [4:0]               shift,
  input  act_t                     alpha,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output act_t                     pa_out
);

  localparam int unsigned AW = $clog2(DEPTH);

  // requantisation
  acc_t sh;
  act_t q;
  always_comb begin
    sh = accu >>> shift;
    if (sh > acc_t'(127))       q = 8'sd127;
    else if (sh < acc_t'(-128)) q = -8'sd128;
    else                        q = act_t'(sh);
  end

  // input registers (inputs 2 and 1 of the pool unit)
  logic    a_valid;
  act_t    a_data, b_data;
  pa_cmd_t a_cmd;

  // pooled-value register
  logic          p_valid;
  act_t          p_data;
  act_e          p_act;
  logic [AW-1:0] p_addr;

  act_t spm [DEPTH];
  act_t in3, pooled, activated;

  always_comb begin
    if (p_valid && p_addr == a_cmd.addr[AW-1:0]) in3 = activated;
    else                                         in3 = spm[a_cmd.addr[AW-1:0]];
  end

  mpna_pool u_pool (
    .in1(b_data), .in2(a_data), .in3,
    .use1(a_cmd.pair), .use3(a_cmd.use_spm), .max_out(pooled)
  );

  mpna_activ u_activ (
    .act_in(p_data), .alpha, .ctrl(p_act), .act_out(activated)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_data  <= '0;
      b_data  <= '0;
      a_cmd   <= '0;
      p_valid <= 1'b0;
      p_data  <= '0;
      p_act   <= ACT_NONE;
      p_addr  <= '0;
    end else begin
      a_valid <= in_valid;
      if (in_valid) begin
        a_data <= q;
        b_data <= a_data;
        a_cmd  <= in_cmd;
      end
      p_valid <= a_valid && a_cmd.fire;
      p_data  <= pooled;
      p_act   <= a_cmd.act;
      p_addr  <= a_cmd.addr[AW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (p_valid) spm[p_addr] <= activated;
  end

  assign pa_out = spm[rd_addr];

endmodule
