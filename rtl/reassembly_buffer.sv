// reassembly_buffer: one of the client- and accelerator-agnostic buffers in
// which the fragments of a multi-fragment request are appended until the
// request is complete.
//
// How it works: the buffer is a FIFO of 512-bit beats (commit_fifo) plus a
// small FIFO of descriptors, one per complete request. When the Dispatcher
// writes the first beat of a request (wr_first), the buffer reads the Size
// field of the header in that beat, becomes busy, and remembers the
// connection ID and the number of beats still to come. Later beats are
// appended; the beat that completes the request commits it, pushes its
// descriptor and clears busy. Only committed requests are visible on the read
// side, so the Selector never sees a partial request. If the connection
// closes mid-request (close_valid with a matching ID), the partial request is
// rolled back and the buffer is free again.
//
// Eligibility (following the source): a buffer may accept the first fragment
// of a new request only if it is not reassembling another request and has
// room for the whole new request. Room is tested as new_beats <= free, i.e.
// "sufficient capacity"; the text's "less than the remaining space" is read
// the same way. The descriptor FIFO must also have a free entry (a limit of
// this design; the source does not mention one).
//
// Interface and timing: busy, cur_conn and eligible are combinational from
// registered state and from the broadcast new_beats, so the Dispatcher can
// decide on the first beat of a fragment in the same cycle. Writes are never
// back-pressured (space is reserved by the eligibility test). On the read
// side desc_valid/desc show the oldest complete request and rd_* stream its
// beats; the reader pops the descriptor when it has taken the last beat.
module reassembly_buffer
  import offrac_pkg::*;
#(
  parameter int unsigned DEPTH_BEATS = 4096,  // 0.25 MB of 64-byte beats
  parameter int unsigned DESC_DEPTH  = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // state seen by the Dispatcher
  output logic      busy,
  output conn_t     cur_conn,
  input  beats_t    new_beats,
  output logic      eligible,
  // writes from the Dispatcher
  input  logic      wr_valid,
  input  logic      wr_first,
  input  beat_t     wr_data,
  input  conn_t     wr_conn,
  // connection closed by the transport layer
  input  logic      close_valid,
  input  conn_t     close_conn,
  // complete requests toward the Selector
  output logic      desc_valid,
  output req_desc_t desc,
  input  logic      desc_pop,
  output logic      rd_valid,
  input  logic      rd_ready,
  output beat_t     rd_data,
  output logic [$clog2(DEPTH_BEATS):0] free_beats
);
  req_hdr_t  hdr;
  beats_t    remaining, cur_beats, first_beats;
  acc_t      cur_accel;
  logic      desc_full, do_write, do_commit, do_close, push_desc;
  req_desc_t push_d;
  logic [$clog2(DEPTH_BEATS):0] readable;

  assign hdr         = req_hdr_t'(wr_data);
  assign first_beats = req_beats(hdr.size);
  assign do_close    = close_valid && busy && (close_conn == cur_conn);
  assign do_write    = wr_valid && (wr_first || busy);
  // The beat that completes a request: a header-only request, or the last
  // expected beat of one in progress.
  assign do_commit   = wr_valid && ((wr_first && first_beats == beats_t'(1)) ||
                                    (!wr_first && busy && remaining == beats_t'(1)));
  assign push_desc   = do_commit && !do_close;
  assign push_d      = wr_first ? '{conn: wr_conn, accel: hdr.accel, beats: first_beats}
                                : '{conn: cur_conn, accel: cur_accel, beats: cur_beats};

  assign eligible = !busy && !desc_full && (beats_t'(0) != new_beats) &&
                    (32'(new_beats) <= 32'(free_beats));

  commit_fifo #(.W(DATA_W), .DEPTH(DEPTH_BEATS)) u_data (
    .clk, .rst_n,
    .wr_en    (do_write),
    .wr_data  (wr_data),
    .commit   (do_commit),
    .rollback (do_close),
    .out_valid(rd_valid),
    .out_ready(rd_ready),
    .out_data (rd_data),
    .free     (free_beats),
    .readable (readable)
  );

  small_fifo #(.W($bits(req_desc_t)), .DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst_n,
    .push (push_desc),
    .din  (push_d),
    .pop  (desc_pop),
    .valid(desc_valid),
    .dout (desc),
    .full (desc_full),
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur_conn  <= '0;
      cur_accel <= '0;
      cur_beats <= '0;
      remaining <= '0;
    end else if (do_close) begin
      busy <= 1'b0;
    end else if (wr_valid && wr_first) begin
      cur_conn  <= wr_conn;
      cur_accel <= hdr.accel;
      cur_beats <= first_beats;
      remaining <= first_beats - 1'b1;
      busy      <= (first_beats != beats_t'(1));
    end else if (wr_valid && busy) begin
      remaining <= remaining - 1'b1;
      if (remaining == beats_t'(1)) busy <= 1'b0;
    end
  end

  a_first_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && wr_first |-> !busy);

endmodule
