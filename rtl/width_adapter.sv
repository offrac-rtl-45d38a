// width_adapter: converts a valid/ready stream of IN_W-bit beats with a last
// flag into a stream of OUT_W-bit beats, so that an accelerator whose own
// stream is narrower than the fabric's 512 bits can sit in a slot.
//
// How it works: one of IN_W and OUT_W must be a whole multiple R of the
// other.
//   - Narrowing (IN_W = R * OUT_W): a wide beat is held in a one-beat buffer
//     and sent as R narrow beats, least significant part first. The last
//     narrow beat of a wide beat that carried last carries last. A new wide
//     beat is taken in the cycle its predecessor's final part leaves, so the
//     output runs at one narrow beat per cycle.
//   - Widening (OUT_W = R * IN_W): narrow beats are gathered into a wide beat,
//     the first into the least significant part. The wide beat is sent when
//     R parts are in or when a part carries last; parts never written in a
//     short final beat are zero. A new part is taken in the cycle the
//     finished wide beat leaves.
//   - Equal widths: a wire-through.
// The least-significant-first order keeps the fabric's little-endian byte
// order, so a 64-byte request header arrives at a 64-bit accelerator as
// eight beats with the Accelerator and Size fields in the first.
//
// Following the source: the slot interface is 512-bit, and an accelerator
// of another width is fitted with a wrapper that converts through FIFOs.
// Choices of this design: the one-beat buffer on each side (a single-entry
// FIFO) and the part order. Accelerators must preserve whole requests:
// a request's last narrow beat must carry last.
//
// Interface and timing: s_* in, m_* out, valid/ready. Narrowing adds one
// cycle of latency; widening emits a wide beat the cycle after its final
// part is taken.
module width_adapter #(
  parameter int unsigned IN_W  = 512,
  parameter int unsigned OUT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [IN_W-1:0]  s_data,
  input  logic             s_last,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [OUT_W-1:0] m_data,
  output logic             m_last
);

  if (IN_W > OUT_W) begin : g_narrow
    localparam int unsigned R  = IN_W / OUT_W;
    localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;
    if (IN_W % OUT_W != 0) begin : g_bad_ratio
      $error("IN_W must be a multiple of OUT_W");
    end

    logic [IN_W-1:0] buf_q;
    logic [CW-1:0]   cnt;
    logic            full, last_q, final_part;

    assign final_part = (cnt == CW'(R - 1));
    assign s_ready    = !full || (m_ready && final_part);
    assign m_valid    = full;
    assign m_data     = buf_q[OUT_W*cnt +: OUT_W];
    assign m_last     = last_q && final_part;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        buf_q  <= '0;
        cnt    <= '0;
        full   <= 1'b0;
        last_q <= 1'b0;
      end else begin
        if (m_valid && m_ready) begin
          cnt <= final_part ? '0 : cnt + 1'b1;
          if (final_part) full <= 1'b0;
        end
        if (s_valid && s_ready) begin
          buf_q  <= s_data;
          last_q <= s_last;
          full   <= 1'b1;
        end
      end
    end

  end else if (IN_W < OUT_W) begin : g_widen
    localparam int unsigned R  = OUT_W / IN_W;
    localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;
    if (OUT_W % IN_W != 0) begin : g_bad_ratio
      $error("OUT_W must be a multiple of IN_W");
    end

    logic [OUT_W-1:0] buf_q;
    logic [CW-1:0]    cnt;
    logic             full, last_q;

    assign s_ready = !full || m_ready;
    assign m_valid = full;
    assign m_data  = buf_q;
    assign m_last  = last_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        buf_q  <= '0;
        cnt    <= '0;
        full   <= 1'b0;
        last_q <= 1'b0;
      end else begin
        if (m_valid && m_ready) full <= 1'b0;
        if (s_valid && s_ready) begin
          if (cnt == '0) buf_q <= OUT_W'(s_data);
          else           buf_q[IN_W*cnt +: IN_W] <= s_data;
          if (s_last || cnt == CW'(R - 1)) begin
            cnt    <= '0;
            full   <= 1'b1;
            last_q <= s_last;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end

  end else begin : g_same
    assign s_ready = m_ready;
    assign m_valid = s_valid;
    assign m_data  = s_data;
    assign m_last  = s_last;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
