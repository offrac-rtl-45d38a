// accel_wrapper: the fixed shell around an accelerator slot. It turns the
// slot's request queue into one accelerator invocation at a time and turns
// the accelerator's output into a response tagged for the right client.
//
// How it works (following the source): the accelerator sees a 512-bit
// stream carrying the 64-byte request header as its first beat and then the
// payload, and answers on a 512-bit output stream; on the last output beat
// it reports the response size in bytes on a 32-bit metadata stream. The
// wrapper keeps the connection ID of the request it fed in and attaches it
// to every response beat. Accelerators run each request to completion: the
// wrapper feeds no beat of the next request until the last beat of the
// current response has left (in_done blocks the queue meanwhile).
//
// Choices of this design: the response beat that carries last is held until
// the metadata beat is also present, and both are consumed together; the
// response may start while input is still being fed (streaming
// accelerators).
//
// Interface and timing: q_* is the slot queue, s_* the accelerator input,
// m_* and meta_* its outputs, rsp_* the tagged response. All paths are
// combinational pass-throughs of valid and ready; one beat per cycle.
module accel_wrapper
  import offrac_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // slot queue
  input  logic              q_valid,
  output logic              q_ready,
  input  beat_t             q_data,
  input  logic              q_last,
  input  conn_t             q_conn,
  // accelerator input stream
  output logic              s_valid,
  input  logic              s_ready,
  output beat_t             s_data,
  output logic              s_last,
  // accelerator output and metadata streams
  input  logic              m_valid,
  output logic              m_ready,
  input  beat_t             m_data,
  input  logic              m_last,
  input  logic              meta_valid,
  output logic              meta_ready,
  input  logic [META_W-1:0] meta_data,
  // response toward the network
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output beat_t             rsp_data,
  output logic              rsp_last,
  output conn_t             rsp_conn,
  output logic [META_W-1:0] rsp_bytes,
  output logic              busy
);
  logic  in_done;   // all input of the current request delivered
  conn_t conn_q;
  logic  out_ok;

  assign s_valid = q_valid && !in_done;
  assign q_ready = s_ready && !in_done;
  assign s_data  = q_data;
  assign s_last  = q_last;

  assign out_ok     = m_valid && (!m_last || meta_valid);
  assign rsp_valid  = out_ok;
  assign m_ready    = rsp_ready && (!m_last || meta_valid);
  assign meta_ready = rsp_ready && m_valid && m_last;
  assign rsp_data   = m_data;
  assign rsp_last   = m_last;
  assign rsp_bytes  = m_last ? meta_data : '0;
  assign rsp_conn   = busy ? conn_q : q_conn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_done <= 1'b0;
      busy    <= 1'b0;
      conn_q  <= '0;
    end else begin
      if (q_valid && q_ready) begin
        if (!busy) conn_q <= q_conn;
        busy <= 1'b1;
        if (q_last) in_done <= 1'b1;
      end
      if (rsp_valid && rsp_ready && rsp_last) begin
        in_done <= 1'b0;
        busy    <= 1'b0;
      end
    end
  end

  a_meta_with_last: assert property (@(posedge clk) disable iff (!rst_n)
    meta_valid |-> m_valid && m_last);

endmodule
