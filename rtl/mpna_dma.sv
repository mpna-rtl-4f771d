// mpna_dma: one transfer channel between the DRAM and an on-chip buffer.
//
// A transfer is started with start and a descriptor: direction (0: DRAM to
// buffer, 1: buffer to DRAM), first DRAM word address, first buffer word
// address and length in 64-bit words. busy stays high until the last word has
// arrived (load) or has been accepted by the DRAM port (store); done pulses
// for one cycle at the end.
//
// Load: read requests are issued back to back as the arbiter accepts them;
// each answer is written to the buffer at the next address. Store: a word is
// read from the buffer (one cycle latency), then offered to the arbiter as a
// write request; one word every two cycles at best. Requests use a valid/ready
// handshake.
//
// The published design only shows DRAM connected through an arbiter to the two
// buffers; this engine and its descriptor are this design's own.
module mpna_dma #(
  parameter int unsigned AW  = 32,
  parameter int unsigned BAW = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           dir,
  input  logic [AW-1:0]  dram_addr,
  input  logic [BAW-1:0] buf_addr,
  input  logic [15:0]    len,
  output logic           busy,
  output logic           done,
  // towards the arbiter
  output logic           req_valid,
  input  logic           req_ready,
  output logic           req_we,
  output logic [AW-1:0]  req_addr,
  output logic [63:0]    req_wdata,
  input  logic           rsp_valid,
  input  logic [63:0]    rsp_data,
  // buffer port
  output logic           buf_we,
  output logic           buf_re,
  output logic [BAW-1:0] buf_a,
  output logic [63:0]    buf_wdata,
  input  logic [63:0]    buf_rdata
);

  typedef enum logic [1:0] { D_IDLE, D_LOAD, D_SRD, D_SREQ } dstate_e;

  dstate_e        st;
  logic [AW-1:0]  da_q;
  logic [BAW-1:0] ba_q;
  logic [15:0]    len_q, iss, rcv;

  always_comb begin
    req_valid = 1'b0;
    req_we    = 1'b0;
    req_addr  = da_q + AW'(iss);
    req_wdata = buf_rdata;
    buf_we    = 1'b0;
    buf_re    = 1'b0;
    buf_a     = ba_q + BAW'(iss);
    buf_wdata = rsp_data;
    unique case (st)
      D_LOAD: begin
        req_valid = (iss < len_q);
        if (rsp_valid) begin
          buf_we = 1'b1;
          buf_a  = ba_q + BAW'(rcv);
        end
      end
      D_SRD:  buf_re = 1'b1;
      D_SREQ: begin
        req_valid = 1'b1;
        req_we    = 1'b1;
      end
      default: ;
    endcase
  end

  assign busy = (st != D_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= D_IDLE; da_q <= '0; ba_q <= '0; len_q <= '0;
      iss <= '0; rcv <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          da_q <= dram_addr; ba_q <= buf_addr; len_q <= len;
          iss <= '0; rcv <= '0;
          if (len == 16'd0) done <= 1'b1;
          else st <= dir ? D_SRD : D_LOAD;
        end
        D_LOAD: begin
          if (req_valid && req_ready) iss <= iss + 16'd1;
          if (rsp_valid) begin
            rcv <= rcv + 16'd1;
            if (rcv == len_q - 16'd1) begin
              st <= D_IDLE; done <= 1'b1;
            end
          end
        end
        D_SRD: st <= D_SREQ;
        D_SREQ: if (req_ready) begin
          iss <= iss + 16'd1;
          if (iss == len_q - 16'd1) begin
            st <= D_IDLE; done <= 1'b1;
          end else st <= D_SRD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

endmodule
