// mpna_skew: input staggering for a K-row systolic array.
//
// Row k of the input vector (and its swap tag) is delayed by k cycles, so a
// vector presented at cycle t reaches row k at t+k. This produces the
// diagonal input pattern of a systolic array: in the FC dataflow a vector held
// for U cycles gives row k the activation a_k from cycle k to k+U-1. Row 0 is
// not delayed. The delay lines are plain registers with synchronous reset.
module mpna_skew
  import mpna_pkg::*;
#(
  parameter int unsigned ROWS = K
) (
  input  logic            clk,
  input  logic            rst_n,
  input  act_t [ROWS-1:0] d_in,
  input  logic            tag_in,
  output act_t [ROWS-1:0] d_out,
  output logic [ROWS-1:0] tag_out
);

  for (genvar k = 0; k < ROWS; k++) begin : g_row
    if (k == 0) begin : g_direct
      assign d_out[k]   = d_in[k];
      assign tag_out[k] = tag_in;
    end else begin : g_delay
      act_t sr_d [k];
      logic sr_t [k];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int s = 0; s < k; s++) begin
            sr_d[s] <= '0;
            sr_t[s] <= 1'b0;
          end
        end else begin
          sr_d[0] <= d_in[k];
          sr_t[0] <= tag_in;
          for (int s = 1; s < k; s++) begin
            sr_d[s] <= sr_d[s-1];
            sr_t[s] <= sr_t[s-1];
          end
        end
      end
      assign d_out[k]   = sr_d[k-1];
      assign tag_out[k] = sr_t[k-1];
    end
  end

endmodule
