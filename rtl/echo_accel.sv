// echo_accel: the echo accelerator, which returns each request unchanged.
// It measures what the reassembly and invocation fabric itself costs.
//
// How it works: beats pass through one output register (a skid-free
// pipeline stage that stalls as a whole when the output is not accepted).
// The accelerator reads the Size field from the header beat and, with the
// last beat, reports the response size, header plus payload (64 + Size
// bytes), on the metadata stream.
//
// Choices of this design: the response includes the header beat; the source
// only says the echo "returns request data". The stream width W is a
// parameter (512 by default, at least 32): at a narrower width the header
// arrives as several beats, and the Size field sits in bits 31:16 of the
// first.
//
// Interface and timing: s_* in, m_* and meta_* out, one beat per cycle,
// one cycle of latency.
module echo_accel
  import offrac_pkg::*;
#(
  parameter int unsigned W = DATA_W    // stream width, at least 32 bits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [W-1:0]      s_data,
  input  logic              s_last,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [W-1:0]      m_data,
  output logic              m_last,
  output logic              meta_valid,
  input  logic              meta_ready,
  output logic [META_W-1:0] meta_data
);
  logic     first;                     // next input beat is a header
  logic [SIZE_W-1:0] size_q;

  assign s_ready = !m_valid || m_ready;

  assign meta_valid = m_valid && m_last;
  assign meta_data  = META_W'(size_q) + META_W'(BEAT_B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
      first   <= 1'b1;
      size_q  <= '0;
    end else begin
      if (s_valid && s_ready) begin
        m_valid <= 1'b1;
        m_data  <= s_data;
        m_last  <= s_last;
        first   <= s_last;
        if (first) size_q <= s_data[ACC_W +: SIZE_W];   // Size field
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end

  // meta_ready is taken together with the last beat by the wrapper.
  a_meta_taken: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && m_last && m_ready |-> meta_ready);

endmodule
