// topk_accel: the Top-K accelerator. It returns the K largest integers of
// the request payload, largest first, with K chosen per request.
//
// How it works: the payload is read as 32-bit signed integers, sixteen per
// 512-bit beat, Size/4 of them in all (bytes past the last whole integer
// are ignored). A sorted list of the KMAX largest values seen so far is kept
// in registers; each cycle one integer is inserted by comparing it with
// every list entry at once and shifting the smaller entries down one place
// (an insertion sorter, one element per cycle). After the last beat the
// first min(K, count) entries are sent back, sixteen per beat, and their byte
// count goes out on the metadata stream with the last beat.
//
// Following the source: K is a run-time parameter of each request carried
// in the Parameters field of the header, and the accelerator processes an
// arbitrary window of data. Choices of this design: K is the first 4 bytes
// of Parameters (bytes 4-7 of the header beat), clamped to KMAX; integers
// are signed; a request with no integers or K = 0 answers with one all-zero
// beat and a size of 0.
//
// Interface and timing: header beat accepted in one cycle; each payload beat
// is accepted, then its sixteen lanes are inserted in sixteen cycles, so a
// request of P payload beats takes about 1 + 17*P cycles before the first
// output beat; output is ceil(min(K,count)/16) beats (at least one).
module topk_accel
  import offrac_pkg::*;
#(
  parameter int unsigned KMAX = 64
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
  localparam int unsigned CW    = $clog2(KMAX + 1);

  typedef enum logic [1:0] {S_HDR, S_BEAT, S_INS, S_OUT} state_e;

  state_e state;
  req_hdr_t hdr;
  logic signed [31:0] vals [KMAX];
  logic signed [31:0] x;
  logic [CW-1:0]  cnt, kout;
  logic [31:0]    k_q;
  logic [SIZE_W-1:0] left;         // integers still to insert
  beat_t          buf_q;
  logic [3:0]     lane;
  logic           last_q;
  logic [CW-1:0]  obeat;           // output position, in elements
  logic [KMAX-1:0] gt;

  assign hdr = req_hdr_t'(s_data);
  assign x   = buf_q[32*lane +: 32];
  assign s_ready = (state == S_HDR) || (state == S_BEAT);
  assign kout = (k_q < 32'(cnt)) ? CW'(k_q) : cnt;

  // Compare the new element with every list entry (empty entries lose).
  always_comb
    for (int i = 0; i < KMAX; i++)
      gt[i] = (CW'(i) >= cnt) || (x > vals[i]);

  // Output beat: elements obeat .. obeat+15 of the sorted list.
  always_comb begin
    m_data = '0;
    for (int l = 0; l < LANES; l++)
      if (32'(obeat) + 32'(l) < 32'(kout))
        m_data[32*l +: 32] = vals[(32'(obeat) + 32'(l)) % KMAX];
  end
  assign m_valid    = (state == S_OUT);
  assign m_last     = (32'(obeat) + 32'(LANES) >= 32'(kout));
  assign meta_valid = m_valid && m_last;
  assign meta_data  = META_W'(kout) << 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      cnt    <= '0;
      k_q    <= '0;
      left   <= '0;
      buf_q  <= '0;
      lane   <= '0;
      last_q <= 1'b0;
      obeat  <= '0;
      for (int i = 0; i < KMAX; i++) vals[i] <= '0;
    end else begin
      case (state)
        S_HDR: if (s_valid) begin
          k_q   <= (hdr.params[31:0] > 32'(KMAX)) ? 32'(KMAX) : hdr.params[31:0];
          left  <= hdr.size >> 2;
          cnt   <= '0;
          obeat <= '0;
          state <= s_last ? S_OUT : S_BEAT;
        end
        S_BEAT: if (s_valid) begin
          buf_q  <= s_data;
          last_q <= s_last;
          lane   <= '0;
          state  <= S_INS;
        end
        S_INS: begin
          if (left != '0) begin
            for (int i = 0; i < KMAX; i++)
              if (gt[i]) vals[i] <= (i == 0 || !gt[(i == 0) ? 0 : i-1]) ? x
                                                                         : vals[(i == 0) ? 0 : i-1];
            if (cnt != CW'(KMAX)) cnt <= cnt + 1'b1;
            left <= left - 1'b1;
          end
          lane <= lane + 1'b1;
          if (lane == 4'(LANES - 1)) state <= last_q ? S_OUT : S_BEAT;
        end
        S_OUT: if (m_ready) begin
          obeat <= obeat + CW'(LANES);
          if (m_last) state <= S_HDR;
        end
        default: state <= S_HDR;
      endcase
    end
  end

  a_meta_taken: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && m_last && m_ready |-> meta_ready);

endmodule
