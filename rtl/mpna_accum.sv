// mpna_accum: one sub-unit of the MPNA accumulation unit.
//
// There is one sub-unit per systolic-array column. It owns a scratch-pad
// memory (SPM) of DEPTH partial output activations and an adder. A psum that
// arrives with valid metadata is added to the SPM entry named by the metadata
// address and written back in the same cycle; with the first flag set the psum
// is written as is, which starts a new sum. A second, independent read port
// (rd_addr/rd_data) lets the control unit drain finished outputs towards the
// pooling and activation unit.
//
// The SPM, the adder and the feedback from the SPM to the adder follow the
// published accumulation unit. Own choices: entries are ACC_W bits wide
// (partial sums do not fit in 8 bits), the SPM read is combinational so that
// read-add-write takes one cycle, and the drain port is separate.
//
// Timing: the write happens at the rising edge that ends the cycle in which
// in_meta.valid is high; rd_data follows rd_addr combinationally and shows the
// new value from the next cycle on.
module mpna_accum
  import mpna_pkg::*;
#(
  parameter int unsigned DEPTH = SPM_DEPTH
) (
  input  logic                     clk,
  input  psum_t                    in_psum,
  input  meta_t                    in_meta,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output acc_t                     rd_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  acc_t spm [DEPTH];

  logic [AW-1:0] wa;
  acc_t          sum;

  assign wa  = in_meta.addr[AW-1:0];
  assign sum = in_meta.first ? acc_t'(in_psum) : spm[wa] + acc_t'(in_psum);

  always_ff @(posedge clk) begin
    if (in_meta.valid) spm[wa] <= sum;
  end

  assign rd_data = spm[rd_addr];

endmodule
