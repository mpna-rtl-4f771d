// mpna_ctrl: control unit of MPNA.
//
// Runs one layer pass per descriptor (start/desc, then busy until done).
//
// CONV pass (both arrays, 2L filters at a time): the filters are cut into
// chunks of K weights, one chunk = kernel position (p,q) and a group of K input
// channels. For every chunk the control unit shifts a K x L weight set into
// each array (SA-CONV from weight-buffer port a, SA-FC from port b, one row per
// cycle, bottom row first), then streams the M x N input vectors of that chunk
// (one data-buffer word = K channels of one position) to both arrays at one
// vector per cycle. The first vector of a chunk carries the swap tag. The next
// chunk's weights are shifted in while the current chunk streams, as soon as
// the swap wavefront has left the array (K+L cycles after the stream began).
// A chunk whose weights are ready starts on the cycle after the last vector of
// the previous one, so whenever M*N >= 2K+L+2 loading is hidden and vectors
// enter the arrays on every cycle of the pass. Psums are accumulated in the
// accumulation SPMs at address m*N+n; the first chunk writes instead of adding
// unless desc.accumulate is set. Stride 1, no padding (input pre-padded).
// Weight word of chunk c: w_base+2c for SA-CONV, w_base+2c+1 for SA-FC, byte
// [k][l] = weight k of the chunk for filter l of that array.
//
// FC pass (SA-FC only, fc_mode): the input vector of cg words is applied
// word by word, each word held for U cycles; every cycle one weight word is
// read from port b (address w_base+t, t = 0 .. cg*U+K+L-3) and fed to the
// dedicated per-PE connections. Column l accumulates neuron l*U+j at SPM
// address j. The weight stream must be stored in the aligned order: slot
// [k][l] of word t holds the weight of input k of word (t-k-l)/U for neuron
// l*U + (t-k-l) mod U.
//
// With desc.finish the pass ends by draining the accumulation SPMs through the
// pooling and activation sub-units (optional 2x2/stride-2 max pooling; the
// activation is applied on the last pass over a window) and writing the
// results to the data buffer: CONV output position o goes to words
// out_base + o*out_cg + out_g (SA-CONV filters) and +1 (SA-FC filters); FC
// output word out_base+j holds neurons l*U+j, l = 0..L-1, in byte l.
//
// The phases and the two dataflows follow the published design (Sec. V and
// the SA-FC dataflow figure); the descriptor, addressing and all timing are
// this design's own. Buffers have one cycle read latency, so every issued read
// is paired with a registered copy of its control (stage s1).
module mpna_ctrl
  import mpna_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  layer_desc_t               desc,
  output logic                      busy,
  output logic                      done,
  // data buffer, compute port
  output logic                      db_re,
  output logic                      db_we,
  output logic [DB_AW-1:0]          db_addr,
  output logic [63:0]               db_wdata,
  input  logic [63:0]               db_rdata,
  // weight buffer
  output logic                      wb_re_a,
  output logic [WB_AW-1:0]          wb_addr_a,
  input  act_t [K-1:0][L-1:0]       wb_rd_a,
  output logic                      wb_re_b,
  output logic [WB_AW-1:0]          wb_addr_b,
  input  act_t [K-1:0][L-1:0]       wb_rd_b,
  // arrays
  output logic                      fc_mode,
  output act_t [K-1:0]              vec,
  output logic                      vec_tag,
  output meta_t                     meta,
  output logic                      wload,
  output act_t [L-1:0]              w_top_conv,
  output act_t [L-1:0]              w_top_fc,
  // accumulation drain
  output logic [SPM_AW-1:0]         acc_rd_addr,
  // pooling and activation
  output logic                      pa_valid,
  output pa_cmd_t                   pa_cmd,
  output logic [4:0]                pa_shift,
  output act_t                      pa_alpha,
  output logic [SPM_AW-1:0]         pa_rd_addr,
  input  act_t [NCOL-1:0]           pa_out
);

  typedef enum logic [2:0] {
    S_IDLE, S_CONV, S_FC, S_DRAIN, S_POOL, S_PAWAIT, S_WB
  } state_e;

  state_e      st;
  layer_desc_t d;

  // derived sizes
  logic [7:0]  m_sz, n_sz;       // CONV output rows / columns
  logic [15:0] nchunks;          // CONV chunks
  logic [15:0] fc_len;           // FC stream length cg*U
  logic [7:0]  r_sz;             // pool iteration rows
  logic [8:0]  c_sz;             // pool iteration columns
  logic [7:0]  ro_sz;
  logic [8:0]  co_sz;
  always_comb begin
    m_sz    = d.h - 8'(d.p) + 8'd1;
    n_sz    = d.w - 8'(d.q) + 8'd1;
    nchunks = 16'(d.p) * 16'(d.q) * 16'(d.cg);
    fc_len  = 16'(d.cg) * 16'(d.u);
    r_sz    = (d.kind == LAYER_FC) ? 8'd1 : m_sz;
    c_sz    = (d.kind == LAYER_FC) ? d.u  : 9'(n_sz);
    ro_sz   = (d.pool && d.kind == LAYER_CONV) ? (r_sz >> 1) : r_sz;
    co_sz   = (d.pool && d.kind == LAYER_CONV) ? (c_sz >> 1) : c_sz;
  end

  // ------------------------------------------------------------ CONV loader
  logic        ld_busy;
  logic [3:0]  ld_cnt;
  logic [15:0] loaded;     // chunks whose weights have been shifted in
  logic [15:0] swapped;    // chunks whose stream has started
  logic [7:0]  swap_age;   // cycles since the last stream started
  logic        ld_s1;      // a weight row read is returning
  logic [3:0]  ld_row_s1;

  // ------------------------------------------------------------ CONV stream
  logic        st_run;
  logic [7:0]  sm, sn;
  logic [3:0]  cp, cq;
  logic [7:0]  cgi;
  logic        st_first;   // next issued vector is the first of its chunk

  // ------------------------------------------------------------ FC stream
  logic [15:0] ft;         // weight word index
  logic [8:0]  fj;         // neuron slot
  logic [7:0]  fchunk;

  // ------------------------------------------------------------ stage s1
  logic        s1_new, s1_tag;
  meta_t       s1_meta;
  act_t [K-1:0] vec_hold;

  // ------------------------------------------------------------ drain/pool/wb
  logic [7:0]  dcnt;
  logic [7:0]  pr;
  logic [8:0]  pc;
  logic [15:0] wo;
  logic        whalf;

  logic load_go, stream_go;
  always_comb begin
    load_go   = (st == S_CONV) && !ld_busy && (loaded < nchunks) && (loaded == swapped) &&
                (swapped == 16'd0 || swap_age >= 8'(K + L));
    // a new chunk starts when idle, or on the last vector of the current one
    stream_go = (st == S_CONV) && (swapped < loaded) &&
                (!st_run || (sn == n_sz - 8'd1 && sm == m_sz - 8'd1));
  end

  // issue-side combinational outputs
  logic [DB_AW-1:0] conv_addr;
  always_comb begin
    conv_addr = d.in_base + DB_AW'(((32'(sm) + 32'(cp)) * 32'(d.w) + 32'(sn) + 32'(cq)) * 32'(d.cg) + 32'(cgi));
  end

  logic [15:0] wo_stride;
  assign wo_stride = (d.kind == LAYER_FC) ? 16'd1 : 16'(d.out_cg);

  always_comb begin
    db_re     = 1'b0;
    db_we     = 1'b0;
    db_addr   = '0;
    db_wdata  = '0;
    wb_re_a   = 1'b0;
    wb_re_b   = 1'b0;
    wb_addr_a = d.w_base + WB_AW'(2 * loaded);
    wb_addr_b = d.w_base + WB_AW'(2 * loaded + 1);
    acc_rd_addr = '0;
    pa_valid  = 1'b0;
    pa_cmd    = '0;
    pa_rd_addr = SPM_AW'(wo);
    if (st == S_CONV) begin
      if (ld_busy) begin
        wb_re_a = 1'b1;
        wb_re_b = 1'b1;
      end
      if (st_run) begin
        db_re   = 1'b1;
        db_addr = conv_addr;
      end
    end
    if (st == S_FC) begin
      wb_re_b   = 1'b1;
      wb_addr_b = d.w_base + WB_AW'(ft);
      if (ft < fc_len && fj == 9'd0) begin
        db_re   = 1'b1;
        db_addr = d.in_base + DB_AW'(fchunk);
      end
    end
    if (st == S_POOL) begin
      acc_rd_addr = SPM_AW'(16'(pr) * 16'(c_sz) + 16'(pc));
      pa_valid    = 1'b1;
      if (d.pool && d.kind == LAYER_CONV) begin
        pa_cmd.fire    = pc[0];
        pa_cmd.pair    = 1'b1;
        pa_cmd.use_spm = pr[0];
        pa_cmd.act     = pr[0] ? d.act : ACT_NONE;
        pa_cmd.addr    = SPM_AW'(16'(pr >> 1) * 16'(co_sz) + 16'(pc >> 1));
      end else begin
        pa_cmd.fire    = 1'b1;
        pa_cmd.pair    = 1'b0;
        pa_cmd.use_spm = 1'b0;
        pa_cmd.act     = d.act;
        pa_cmd.addr    = SPM_AW'(16'(pr) * 16'(c_sz) + 16'(pc));
      end
    end
    if (st == S_WB) begin
      db_we   = 1'b1;
      db_addr = d.out_base + DB_AW'(32'(wo) * 32'(wo_stride) + 32'(d.out_g) + 32'(whalf));
      for (int l = 0; l < L; l++)
        db_wdata[8*l +: 8] = (whalf || d.kind == LAYER_FC) ? pa_out[L+l] : pa_out[l];
    end
  end

  // array-side outputs (stage s1)
  always_comb begin
    vec     = s1_new ? db_rdata : vec_hold;
    vec_tag = s1_tag;
    meta    = s1_meta;
    fc_mode = (st == S_FC) || (st == S_DRAIN && d.kind == LAYER_FC);
    wload   = ld_s1;
    for (int l = 0; l < L; l++) begin
      w_top_conv[l] = wb_rd_a[ld_row_s1][l];
      w_top_fc[l]   = wb_rd_b[ld_row_s1][l];
    end
  end

  assign pa_shift = d.shift;
  assign pa_alpha = d.alpha;
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; d <= '0; done <= 1'b0;
      ld_busy <= 1'b0; ld_cnt <= '0; loaded <= '0; swapped <= '0; swap_age <= '0;
      ld_s1 <= 1'b0; ld_row_s1 <= '0;
      st_run <= 1'b0; sm <= '0; sn <= '0; cp <= '0; cq <= '0; cgi <= '0; st_first <= 1'b0;
      ft <= '0; fj <= '0; fchunk <= '0;
      s1_new <= 1'b0; s1_tag <= 1'b0; s1_meta <= '0; vec_hold <= '0;
      dcnt <= '0; pr <= '0; pc <= '0; wo <= '0; whalf <= 1'b0;
    end else begin
      done    <= 1'b0;
      // defaults of stage s1
      s1_new  <= 1'b0;
      s1_tag  <= 1'b0;
      s1_meta <= '0;
      ld_s1   <= 1'b0;
      if (s1_new) vec_hold <= db_rdata;

      unique case (st)
        S_IDLE: if (start) begin
          d <= desc;
          loaded <= '0; swapped <= '0; swap_age <= '0;
          ld_busy <= 1'b0; st_run <= 1'b0;
          cp <= '0; cq <= '0; cgi <= '0;
          ft <= '0; fj <= '0; fchunk <= '0;
          st <= (desc.kind == LAYER_FC) ? S_FC : S_CONV;
        end

        S_CONV: begin
          if (swap_age != 8'hff) swap_age <= swap_age + 8'd1;
          // weight loader: rows K-1 .. 0 of the chunk's word
          if (load_go) begin
            ld_busy <= 1'b1;
            ld_cnt  <= '0;
          end
          if (ld_busy) begin
            ld_s1     <= 1'b1;
            ld_row_s1 <= 4'(K - 1) - ld_cnt;
            ld_cnt    <= ld_cnt + 4'd1;
            if (ld_cnt == 4'(K - 1)) begin
              ld_busy <= 1'b0;
              loaded  <= loaded + 16'd1;
            end
          end
          // streamer
          if (st_run) begin
            s1_new  <= 1'b1;
            s1_tag  <= st_first;
            st_first <= 1'b0;
            s1_meta.valid <= 1'b1;
            s1_meta.first <= (swapped == 16'd1) && !d.accumulate;
            s1_meta.addr  <= SPM_AW'(16'(sm) * 16'(n_sz) + 16'(sn));
            if (sn == n_sz - 8'd1) begin
              sn <= '0;
              if (sm == m_sz - 8'd1) begin
                st_run <= 1'b0;
                // next chunk: channel group fastest, then q, then p
                if (cgi == d.cg - 8'd1) begin
                  cgi <= '0;
                  if (cq == d.q - 4'd1) begin
                    cq <= '0;
                    cp <= cp + 4'd1;
                  end else cq <= cq + 4'd1;
                end else cgi <= cgi + 8'd1;
              end else sm <= sm + 8'd1;
            end else sn <= sn + 8'd1;
          end
          // placed after the issue code so that a chunk following directly
          // overrides its end-of-chunk updates
          if (stream_go) begin
            st_run   <= 1'b1;
            st_first <= 1'b1;
            sm <= '0; sn <= '0;
            swapped  <= swapped + 16'd1;
            swap_age <= '0;
          end
          if (!st_run && !stream_go && !ld_busy && swapped == nchunks) begin
            st <= S_DRAIN; dcnt <= '0;
          end
        end

        S_FC: begin
          if (ft < fc_len) begin
            s1_new        <= (fj == 9'd0);
            s1_meta.valid <= 1'b1;
            s1_meta.first <= (fchunk == 8'd0) && !d.accumulate;
            s1_meta.addr  <= SPM_AW'(fj);
            if (fj == d.u - 9'd1) begin
              fj <= '0;
              fchunk <= fchunk + 8'd1;
            end else fj <= fj + 9'd1;
          end
          ft <= ft + 16'd1;
          if (ft == fc_len + 16'(K + L - 3)) begin
            st <= S_DRAIN; dcnt <= '0;
          end
        end

        S_DRAIN: begin
          dcnt <= dcnt + 8'd1;
          if (dcnt == 8'(K + L + 4)) begin
            pr <= '0; pc <= '0;
            st <= d.finish ? S_POOL : S_IDLE;
            done <= !d.finish;
          end
        end

        S_POOL: begin
          if (pc == ((d.pool && d.kind == LAYER_CONV) ? 9'(co_sz << 1) : c_sz) - 9'd1) begin
            pc <= '0;
            if (pr == ((d.pool && d.kind == LAYER_CONV) ? 8'(ro_sz << 1) : r_sz) - 8'd1) begin
              st <= S_PAWAIT; dcnt <= '0;
            end else pr <= pr + 8'd1;
          end else pc <= pc + 9'd1;
        end

        S_PAWAIT: begin
          dcnt <= dcnt + 8'd1;
          if (dcnt == 8'd3) begin
            st <= S_WB; wo <= '0; whalf <= 1'b0;
          end
        end

        S_WB: begin
          if (d.kind == LAYER_CONV && !whalf) whalf <= 1'b1;
          else begin
            whalf <= 1'b0;
            if (wo == 16'(ro_sz) * 16'(co_sz) - 16'd1) begin
              st <= S_IDLE; done <= 1'b1;
            end else wo <= wo + 16'd1;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
