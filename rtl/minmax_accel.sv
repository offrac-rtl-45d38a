// minmax_accel: the min-max normalisation accelerator. It scales every
// element of a floating-point block into [0, 1] by the block's own range:
// y = (x - min) / (max - min).
//
// How it works, in three phases that follow the source's description
// (range determination, subtraction, division):
//   1. Range: the payload beats are stored in an on-chip block of MAX_BEATS
//      beats while the minimum and maximum of all elements are tracked, all
//      sixteen lanes of a beat compared in the cycle the beat arrives.
//   2. One cycle computes the range, max - min.
//   3. Each stored beat is read back; one element per cycle is reduced by the
//      minimum and divided by the range, and the sixteen results leave as one
//      response beat.
// The whole block must be seen before the first result, since every output
// depends on the block's extremes.
//
// Following the source: the input is a floating-point tensor block of
// 1024 to 32768 bytes, so MAX_BEATS = 32768 / 64 = 512. Choices of this
// design: elements are IEEE binary32, sixteen per beat, Size/4 of them
// (bytes past the last whole element are ignored); arithmetic truncates and
// flushes subnormals (fp32_pkg); a block whose elements are all equal maps
// to zeros; the response is the normalised elements only, no header, and
// its size in bytes (4 per element) goes out on the metadata stream. Beats
// beyond MAX_BEATS are accepted but not stored and their elements are not
// returned. A request with no elements answers with one all-zero beat and a
// size of 0.
//
// Interface and timing: s_* takes the header beat, then one payload beat per
// cycle. With P payload beats the first response beat is valid P + 17
// cycles after the header is accepted (P to store, 1 for the range, 16 to
// compute a beat), and each later beat 17 cycles after the previous one was
// taken.
module minmax_accel
  import offrac_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 512
) (
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
  localparam int unsigned AW    = $clog2(MAX_BEATS);
  localparam int unsigned NMAX  = MAX_BEATS * LANES;

  typedef enum logic [2:0] {S_HDR, S_IN, S_RANGE, S_CALC, S_OUT} state_e;

  state_e state;
  req_hdr_t hdr;
  beat_t  mem [MAX_BEATS];
  beat_t  rdata, obuf;
  fp32_t  mn_q, mx_q, mn_d, mx_d, range_q, x, y;
  logic [AW:0] wa, ra;
  logic [SIZE_W-1:0] n_q;              // elements returned
  logic [3:0]  lane;

  assign hdr     = req_hdr_t'(s_data);
  assign s_ready = (state == S_HDR) || (state == S_IN);

  // Phase 1: extremes over the valid lanes of an incoming beat.
  always_comb begin
    mn_d = mn_q;
    mx_d = mx_q;
    for (int l = 0; l < LANES; l++)
      if (32'(wa) * LANES + 32'(l) < 32'(n_q)) begin
        if (fp_lt(s_data[32*l +: 32], mn_d)) mn_d = s_data[32*l +: 32];
        if (fp_lt(mx_d, s_data[32*l +: 32])) mx_d = s_data[32*l +: 32];
      end
  end

  // Phase 3: one element per cycle.
  assign x = rdata[32*lane +: 32];
  assign y = (32'(ra) * LANES + 32'(lane) < 32'(n_q)) ? fp_div(fp_sub(x, mn_q), range_q)
                                                       : FP_ZERO;

  assign m_valid    = (state == S_OUT);
  assign m_data     = obuf;
  assign m_last     = (32'(ra) + 1) * LANES >= 32'(n_q);
  assign meta_valid = m_valid && m_last;
  assign meta_data  = META_W'(n_q) << 2;

  // Storage (block-RAM style: synchronous write and read).
  always_ff @(posedge clk) begin
    if (state == S_IN && s_valid && 32'(wa) < MAX_BEATS) mem[wa[AW-1:0]] <= s_data;
    if (state == S_RANGE)                                 rdata <= mem[0];
    else if (state == S_OUT && m_ready && !m_last)        rdata <= mem[AW'(ra + 1'b1)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_HDR;
      mn_q    <= FP_POS_INF;
      mx_q    <= FP_NEG_INF;
      range_q <= FP_ZERO;
      wa      <= '0;
      ra      <= '0;
      n_q     <= '0;
      lane    <= '0;
      obuf    <= '0;
    end else begin
      case (state)
        S_HDR: if (s_valid) begin
          mn_q  <= FP_POS_INF;
          mx_q  <= FP_NEG_INF;
          wa    <= '0;
          ra    <= '0;
          lane  <= '0;
          obuf  <= '0;
          n_q   <= (32'(hdr.size >> 2) > NMAX) ? SIZE_W'(NMAX) : (hdr.size >> 2);
          state <= s_last ? S_OUT : S_IN;
        end
        S_IN: if (s_valid) begin
          mn_q <= mn_d;
          mx_q <= mx_d;
          if (32'(wa) < MAX_BEATS) wa <= wa + 1'b1;
          if (s_last) state <= S_RANGE;
        end
        S_RANGE: begin
          range_q <= fp_sub(mx_q, mn_q);
          state   <= S_CALC;
        end
        S_CALC: begin
          obuf[32*lane +: 32] <= y;
          lane <= lane + 1'b1;
          if (lane == 4'(LANES - 1)) state <= S_OUT;
        end
        S_OUT: if (m_ready) begin
          if (m_last) state <= S_HDR;
          else begin
            ra    <= ra + 1'b1;
            lane  <= '0;
            state <= S_CALC;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end

  a_meta_taken: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && m_last && m_ready |-> meta_ready);

endmodule
