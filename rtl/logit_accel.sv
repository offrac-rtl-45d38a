// logit_accel: the logit-transform accelerator. It maps every element p of
// a floating-point block to logit(p) = ln(p / (1 - p)).
//
// How it works, per 512-bit beat of sixteen binary32 elements:
//   1. Ratio (16 cycles, one element each): q = p / (1 - p) with one shared
//      subtractor and divider (fp32_pkg). q is split into its exponent and
//      its significand m in [1, 2).
//   2. Logarithm (23 cycles, all sixteen lanes at once): log2(m) is found
//      one fraction bit per cycle by repeated squaring: square m; if the
//      square is 2 or more the next bit is 1 and the square is halved.
//      With the exponent this gives log2(q) in fixed point, 23 fraction bits.
//   3. Scale (16 cycles, one element each): the fixed-point log2(q) is
//      converted to binary32 and multiplied by ln 2.
// The sixteen results then leave as one response beat, and the next payload
// beat is taken.
//
// Following the source: the transform is applied to a floating-point tensor
// block with subtraction, division and a logarithm in sequence; input blocks
// are 1024 to 32768 bytes. Choices of this design: elements are IEEE
// binary32, Size/4 of them (lanes past the last element give 0); arithmetic
// truncates and flushes subnormals; p <= 0 gives -infinity and p >= 1 gives
// +infinity; the response has one beat per payload beat (an empty request
// gets one zero beat), no header, and its size in bytes, 4 per element, is
// given on the metadata stream.
//
// Interface and timing: s_* takes the header beat, then payload beats; each
// payload beat is taken one cycle after the previous response beat left.
// A payload beat's response is valid 55 cycles after the beat is taken
// (16 + 23 + 16 cycles of work).
module logit_accel
  import offrac_pkg::*;
  import fp32_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  beat_t             s_data,
  input  logic              s_last,
  output logic              m_valid,
  input  logic              m_ready,
  output beat_t             m_data,
  output logic              m_last,
  output logic              meta_valid,
  input  logic              meta_ready,
  output logic [META_W-1:0] meta_data
);
  localparam int unsigned LANES = DATA_W / 32;
  localparam int unsigned FRAC  = 23;

  typedef enum logic [2:0] {S_HDR, S_BEAT, S_RATIO, S_LOG, S_SCALE, S_OUT} state_e;
  typedef enum logic [1:0] {K_FINITE, K_NEG_INF, K_POS_INF, K_NONE} kind_e;

  state_e state;
  req_hdr_t hdr;
  beat_t  buf_q, obuf;
  logic   last_q;
  logic [SIZE_W-1:0] n_q;            // elements in the request
  logic [SIZE_W-1:0] base;           // index of lane 0 of the current beat
  logic [3:0]  lane;
  logic [4:0]  it;
  kind_e                kind [LANES];
  logic signed [9:0]    lexp [LANES];  // unbiased exponent of q
  logic [23:0]          sig  [LANES];  // significand being squared, 1.23
  logic [FRAC-1:0]      frac [LANES];  // fraction bits of log2(m)

  fp32_t p, q;
  logic  p_valid;
  logic signed [31:0] l2;

  assign hdr     = req_hdr_t'(s_data);
  assign s_ready = (state == S_HDR) || (state == S_BEAT);

  // Phase 1 datapath: the element in 'lane'.
  assign p       = buf_q[32*lane +: 32];
  assign p_valid = 32'(base) + 32'(lane) < 32'(n_q);
  assign q       = fp_div(p, fp_sub(FP_ONE, p));

  // Phase 3 datapath: log2(q) of 'lane' as a signed fixed-point number.
  assign l2 = (32'(signed'(lexp[lane])) <<< FRAC) + 32'(frac[lane]);

  assign m_valid    = (state == S_OUT);
  assign m_data     = obuf;
  assign m_last     = last_q;
  assign meta_valid = m_valid && m_last;
  assign meta_data  = META_W'(n_q) << 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      buf_q  <= '0;
      obuf   <= '0;
      last_q <= 1'b0;
      n_q    <= '0;
      base   <= '0;
      lane   <= '0;
      it     <= '0;
      for (int l = 0; l < LANES; l++) begin
        kind[l] <= K_NONE;
        lexp[l] <= '0;
        sig[l]  <= '0;
        frac[l] <= '0;
      end
    end else begin
      case (state)
        S_HDR: if (s_valid) begin
          n_q    <= hdr.size >> 2;
          base   <= '0;
          obuf   <= '0;
          last_q <= s_last;
          state  <= s_last ? S_OUT : S_BEAT;
        end
        S_BEAT: if (s_valid) begin
          buf_q  <= s_data;
          last_q <= s_last;
          lane   <= '0;
          state  <= S_RATIO;
        end
        S_RATIO: begin
          if (!p_valid)                                    kind[lane] <= K_NONE;
          else if (p[31] || p[30:23] == 8'd0)              kind[lane] <= K_NEG_INF;
          else if (!fp_lt(p, FP_ONE))                      kind[lane] <= K_POS_INF;
          else if (q[30:23] == 8'd0)                       kind[lane] <= K_NEG_INF;
          else                                             kind[lane] <= K_FINITE;
          lexp[lane] <= 10'(q[30:23]) - 10'sd127;
          sig[lane]  <= {1'b1, q[22:0]};
          frac[lane] <= '0;
          lane <= lane + 1'b1;
          if (lane == 4'(LANES - 1)) begin
            it    <= '0;
            state <= S_LOG;
          end
        end
        S_LOG: begin
          for (int l = 0; l < LANES; l++) begin
            automatic logic [47:0] sq = sig[l] * sig[l];
            if (sq[47]) begin
              sig[l]  <= sq[47:24];
              frac[l] <= {frac[l][FRAC-2:0], 1'b1};
            end else begin
              sig[l]  <= sq[46:23];
              frac[l] <= {frac[l][FRAC-2:0], 1'b0};
            end
          end
          it <= it + 1'b1;
          if (it == 5'(FRAC - 1)) begin
            lane  <= '0;
            state <= S_SCALE;
          end
        end
        S_SCALE: begin
          case (kind[lane])
            K_FINITE:  obuf[32*lane +: 32] <= fp_mul(fp_from_q23(l2), FP_LN2);
            K_NEG_INF: obuf[32*lane +: 32] <= FP_NEG_INF;
            K_POS_INF: obuf[32*lane +: 32] <= FP_POS_INF;
            default:   obuf[32*lane +: 32] <= FP_ZERO;
          endcase
          lane <= lane + 1'b1;
          if (lane == 4'(LANES - 1)) state <= S_OUT;
        end
        S_OUT: if (m_ready) begin
          base  <= base + SIZE_W'(LANES);
          state <= last_q ? S_HDR : S_BEAT;
        end
        default: state <= S_HDR;
      endcase
    end
  end

  a_meta_taken: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && m_last && m_ready |-> meta_ready);

endmodule
