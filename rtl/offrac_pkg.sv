// offrac_pkg: types and constants shared by the request-reassembly and
// accelerator-invocation fabric.
//
// Data moves through the fabric as 512-bit beats (64 bytes), the width of the
// accelerator data stream. The first beat of every request is its 64-byte
// request header: a 2-byte Accelerator field, a 2-byte Size field and a
// 60-byte opaque Parameters field, in that order. The connection ID (4 bytes)
// is not part of the header on the wire; it travels beside the data as
// sideband from the transport layer and is kept with each request.
//
// Choices of this design (the source is silent on them): header fields are
// little-endian and laid out from byte 0 (Accelerator in bytes 0-1, Size in
// bytes 2-3, Parameters in bytes 4-63); Size counts the payload bytes that
// follow the header; accelerator type codes are the ACC_* constants below.
package offrac_pkg;

  localparam int unsigned DATA_W  = 512;            // stream width in bits
  localparam int unsigned BEAT_B  = DATA_W / 8;     // 64 bytes per beat
  localparam int unsigned CONN_W  = 32;             // connection ID, 4 bytes
  localparam int unsigned ACC_W   = 16;             // Accelerator field, 2 bytes
  localparam int unsigned SIZE_W  = 16;             // Size field, 2 bytes
  localparam int unsigned PARAM_W = 480;            // Parameters field, 60 bytes
  localparam int unsigned META_W  = 32;             // accelerator metadata stream
  // Largest request: header beat + ceil(65535 / 64) payload beats = 1025.
  localparam int unsigned BEATS_W = 11;

  typedef logic [DATA_W-1:0] beat_t;
  typedef logic [CONN_W-1:0] conn_t;
  typedef logic [ACC_W-1:0]  acc_t;
  typedef logic [BEATS_W-1:0] beats_t;

  // Request header as it sits in the first beat (accel in the low bits).
  typedef struct packed {
    logic [PARAM_W-1:0] params;
    logic [SIZE_W-1:0]  size;
    acc_t               accel;
  } req_hdr_t;

  // Descriptor of one complete request held in a buffer.
  typedef struct packed {
    conn_t  conn;
    acc_t   accel;
    beats_t beats;     // header beat included
  } req_desc_t;

  // Accelerator type codes carried in the Accelerator field.
  localparam acc_t ACC_EMPTY  = 16'd0;   // slot hosts nothing
  localparam acc_t ACC_ECHO   = 16'd1;
  localparam acc_t ACC_TOPK   = 16'd2;
  localparam acc_t ACC_LOGIT  = 16'd3;
  localparam acc_t ACC_MINMAX = 16'd4;
  localparam acc_t ACC_CNN    = 16'd5;
  // Reserved value: a request to reconfigure the slots, whose Parameters
  // describe the accelerator to load; it is not forwarded to any slot.
  localparam acc_t ACC_RECONF = 16'hFFFF;

  // Beats a request occupies: one header beat plus ceil(size/64) payload beats.
  function automatic beats_t req_beats(input logic [SIZE_W-1:0] size);
    logic [SIZE_W:0] s;
    s = {1'b0, size} + (SIZE_W+1)'(BEAT_B - 1);
    return beats_t'(s >> $clog2(BEAT_B)) + beats_t'(1);
  endfunction

endpackage
