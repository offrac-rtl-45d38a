// selector: moves complete requests from the buffers into accelerator queues.
//
// What it does (following the source): it watches every reassembly buffer
// and the single-fragment buffer for a complete request, reads the
// Accelerator field of the request, and forwards the whole request (header
// beat, which carries the Parameters, then payload) into the input queue of
// a slot hosting that accelerator. It keeps the map from accelerator types to
// slots: each slot's queue reports the type it hosts (slot_type). Among
// several slots hosting the same type it alternates round robin, one
// pointer per type, independent of request size.
//
// Choices of this design: one request is moved at a time, one beat per cycle,
// with one idle cycle between requests; the buffers with a complete request
// are served round robin; a request for a type no slot hosts is read out and
// discarded, and reported on unroutable_valid. The move is back-pressured by
// the target queue.
//
// Interface and timing: source s offers src_desc (connection, type, beat
// count) and a beat stream src_rd_*; the Selector pops the descriptor with
// the last beat. Queue writes carry the connection ID and mark the request's
// last beat. fwd_valid pulses, with fwd_slot, when a request is assigned.
module selector
  import offrac_pkg::*;
#(
  parameter int unsigned NUM_SRC   = 5,
  parameter int unsigned NUM_SLOTS = 5,
  parameter int unsigned NUM_TYPES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // complete requests in the buffers
  input  logic [NUM_SRC-1:0]   src_desc_valid,
  input  req_desc_t            src_desc [NUM_SRC],
  output logic [NUM_SRC-1:0]   src_desc_pop,
  input  logic [NUM_SRC-1:0]   src_rd_valid,
  output logic [NUM_SRC-1:0]   src_rd_ready,
  input  beat_t                src_rd_data [NUM_SRC],
  // accelerator queues
  input  acc_t                 slot_type [NUM_SLOTS],
  output logic [NUM_SLOTS-1:0] q_valid,
  input  logic [NUM_SLOTS-1:0] q_ready,
  output beat_t                q_data,
  output logic                 q_last,
  output conn_t                q_conn,
  // events
  output logic                 fwd_valid,
  output logic [$clog2(NUM_SLOTS+1)-1:0] fwd_slot,
  output logic                 unroutable_valid,
  output conn_t                unroutable_conn
);
  localparam int unsigned SW = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1;
  localparam int unsigned QW = $clog2(NUM_SLOTS + 1);
  localparam int unsigned TW = (NUM_TYPES > 1) ? $clog2(NUM_TYPES) : 1;

  typedef enum logic {S_IDLE, S_MOVE} state_e;

  state_e          state;
  logic [SW-1:0]   src_ptr, src_q, pick_src;
  logic [QW-1:0]   slot_q, pick_slot;
  logic [QW-1:0]   type_ptr [NUM_TYPES];
  logic            any_src, any_slot, discard_q;
  beats_t          beats_q, cnt;
  conn_t           conn_q;
  req_desc_t       d;
  logic            beat_ok, last_beat;

  // Pick a source with a complete request, round robin.
  always_comb begin
    any_src = 1'b0;  pick_src = '0;
    for (int k = 0; k < NUM_SRC; k++) begin
      automatic int unsigned j = (int'(src_ptr) + k) % NUM_SRC;
      if (!any_src && src_desc_valid[j]) begin
        any_src = 1'b1;  pick_src = SW'(j);
      end
    end
  end

  assign d = src_desc[pick_src];

  // Pick a slot hosting the requested type, round robin per type.
  always_comb begin
    automatic int unsigned start = 0;
    any_slot = 1'b0;  pick_slot = '0;
    if (d.accel < acc_t'(NUM_TYPES)) start = int'(type_ptr[TW'(d.accel)]);
    for (int k = 0; k < NUM_SLOTS; k++) begin
      automatic int unsigned j = (start + k) % NUM_SLOTS;
      if (!any_slot && d.accel != ACC_EMPTY && d.accel < acc_t'(NUM_TYPES) &&
          slot_type[j] == d.accel) begin
        any_slot = 1'b1;  pick_slot = QW'(j);
      end
    end
  end

  assign last_beat = (cnt == beats_q - 1'b1);
  assign beat_ok   = src_rd_valid[src_q] && (discard_q || q_ready[slot_q]);

  always_comb begin
    src_rd_ready = '0;
    src_desc_pop = '0;
    q_valid      = '0;
    if (state == S_MOVE) begin
      src_rd_ready[src_q] = discard_q || q_ready[slot_q];
      if (!discard_q) q_valid[slot_q] = src_rd_valid[src_q];
      src_desc_pop[src_q] = beat_ok && last_beat;
    end
  end
  assign q_data = src_rd_data[src_q];
  assign q_last = last_beat;
  assign q_conn = conn_q;

  assign fwd_valid        = (state == S_IDLE) && any_src && any_slot;
  assign fwd_slot         = pick_slot;
  assign unroutable_valid = (state == S_IDLE) && any_src && !any_slot;
  assign unroutable_conn  = d.conn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      src_ptr   <= '0;
      src_q     <= '0;
      slot_q    <= '0;
      discard_q <= 1'b0;
      beats_q   <= '0;
      cnt       <= '0;
      conn_q    <= '0;
      for (int t = 0; t < NUM_TYPES; t++) type_ptr[t] <= '0;
    end else begin
      case (state)
        S_IDLE: if (any_src) begin
          state     <= S_MOVE;
          src_q     <= pick_src;
          slot_q    <= pick_slot;
          discard_q <= !any_slot;
          beats_q   <= d.beats;
          conn_q    <= d.conn;
          cnt       <= '0;
          src_ptr   <= SW'((int'(pick_src) + 1) % NUM_SRC);
          if (any_slot)
            type_ptr[TW'(d.accel)] <= QW'((int'(pick_slot) + 1) % NUM_SLOTS);
        end
        S_MOVE: if (beat_ok) begin
          cnt <= cnt + 1'b1;
          if (last_beat) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_pop_has_desc: assert property (@(posedge clk) disable iff (!rst_n)
    |src_desc_pop |-> |(src_desc_pop & src_desc_valid));

endmodule
