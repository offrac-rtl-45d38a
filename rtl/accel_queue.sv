// accel_queue: the input queue of one accelerator slot. It holds complete
// requests waiting for the accelerator and tells the Selector which
// accelerator type the slot currently hosts.
//
// How it works: a FIFO of beats, each stored with its last-beat flag and the
// connection ID of its request, in block-RAM-style storage (commit_fifo with
// every write committed at once). Because the Selector only forwards requests
// that are already complete, a request in this queue arrives at full rate
// and is streamed to the accelerator as soon as it is free. The hosted type
// is a register loaded with INIT_TYPE at reset and rewritten through cfg_*
// by whatever (re)configures the slot; ACC_EMPTY takes the slot out of
// service, for instance while a new accelerator is being loaded. level
// reports the number of queued beats so a controller can see a queue that is
// regularly filling.
//
// Choices of this design: the depth (DEPTH beats) is not given by the
// source; the default, 1024 beats (64 KB), holds the largest request a 2-byte
// Size allows (1025 beats) only in part but any request of the accelerators
// evaluated (up to 32 KB plus header) whole. in_ready is low when full.
//
// Interface and timing: in_valid/in_ready write one beat per cycle; out_*
// is a first-word-fall-through stream, a written beat appearing two cycles
// later.
module accel_queue
  import offrac_pkg::*;
#(
  parameter int unsigned DEPTH     = 1024,
  parameter acc_t        INIT_TYPE = ACC_EMPTY
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cfg_valid,
  input  acc_t  cfg_type,
  output acc_t  slot_type,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_data,
  input  logic  in_last,
  input  conn_t in_conn,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_data,
  output logic  out_last,
  output conn_t out_conn,
  output logic [$clog2(DEPTH):0] level
);
  typedef struct packed {
    conn_t conn;
    logic  last;
    beat_t data;
  } entry_t;

  entry_t wr_e, rd_e;
  logic   wr_en;
  logic [$clog2(DEPTH):0] free, readable;

  assign in_ready = (free != '0);
  assign wr_en    = in_valid && in_ready;
  assign wr_e     = '{conn: in_conn, last: in_last, data: in_data};
  assign level    = ($clog2(DEPTH)+1)'(DEPTH) - free;

  commit_fifo #(.W($bits(entry_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en    (wr_en),
    .wr_data  (wr_e),
    .commit   (wr_en),
    .rollback (1'b0),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (rd_e),
    .free     (free),
    .readable (readable)
  );

  assign out_data = rd_e.data;
  assign out_last = rd_e.last;
  assign out_conn = rd_e.conn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         slot_type <= INIT_TYPE;
    else if (cfg_valid) slot_type <= cfg_type;
  end

endmodule
