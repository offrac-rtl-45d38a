// single_frag_buffer: the separate buffer for requests that fit in one
// fragment, so that small requests are queued without waiting behind
// multi-fragment requests that occupy the reassembly buffers.
//
// How it works: like a reassembly buffer it is a commit FIFO of 512-bit
// beats plus a descriptor FIFO, but a request here never spans fragments.
// The Dispatcher writes the whole fragment; the buffer commits it on the
// fragment's last beat (wr_last) and records a descriptor with the number of
// beats actually written. It never has to be "busy" between fragments, so it
// is eligible whenever it has room for the request and a free descriptor
// entry. Beats beyond the length announced by the header are not stored, so
// a malformed fragment cannot overrun the space that was reserved for it.
// A connection that closes while its fragment is being written has the
// partial request rolled back.
//
// Interface and timing: as reassembly_buffer, plus wr_last marking the last
// beat of the fragment. Eligibility is combinational; writes are never
// back-pressured.
module single_frag_buffer
  import offrac_pkg::*;
#(
  parameter int unsigned DEPTH_BEATS = 16384,  // 1 MB of 64-byte beats
  parameter int unsigned DESC_DEPTH  = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  beats_t    new_beats,
  output logic      eligible,
  input  logic      wr_valid,
  input  logic      wr_first,
  input  logic      wr_last,
  input  beat_t     wr_data,
  input  conn_t     wr_conn,
  input  logic      close_valid,
  input  conn_t     close_conn,
  output logic      desc_valid,
  output req_desc_t desc,
  input  logic      desc_pop,
  output logic      rd_valid,
  input  logic      rd_ready,
  output beat_t     rd_data,
  output logic [$clog2(DEPTH_BEATS):0] free_beats
);
  req_hdr_t  hdr;
  logic      active, desc_full, do_write, do_commit, do_close, in_req;
  conn_t     cur_conn;
  acc_t      cur_accel;
  beats_t    cap, written;
  req_desc_t push_d;
  logic [$clog2(DEPTH_BEATS):0] readable;

  assign hdr       = req_hdr_t'(wr_data);
  assign in_req    = wr_first || active;
  // Beats still within the length announced by the header.
  assign do_write  = wr_valid && (wr_first || (active && written < cap));
  assign do_commit = wr_valid && wr_last && in_req;
  assign do_close  = close_valid && active && (close_conn == cur_conn);
  assign push_d    = wr_first
                   ? '{conn: wr_conn, accel: hdr.accel, beats: beats_t'(1)}
                   : '{conn: cur_conn, accel: cur_accel,
                       beats: written + beats_t'(do_write)};

  assign eligible = !desc_full && (beats_t'(0) != new_beats) &&
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
    .push (do_commit && !do_close),
    .din  (push_d),
    .pop  (desc_pop),
    .valid(desc_valid),
    .dout (desc),
    .full (desc_full),
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      cur_conn  <= '0;
      cur_accel <= '0;
      cap       <= '0;
      written   <= '0;
    end else if (do_close) begin
      active <= 1'b0;
    end else if (wr_valid && wr_first) begin
      cur_conn  <= wr_conn;
      cur_accel <= hdr.accel;
      cap       <= req_beats(hdr.size);
      written   <= beats_t'(1);
      active    <= !wr_last;
    end else if (wr_valid && active) begin
      written <= written + beats_t'(do_write);
      if (wr_last) active <= 1'b0;
    end
  end

endmodule
