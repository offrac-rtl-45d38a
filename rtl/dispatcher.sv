// dispatcher: steers every incoming fragment to a buffer, or drops it.
//
// What it does (following the source): fragments are packet payloads handed
// over by the transport layer in order, each with its connection ID. For the
// first beat of each fragment the Dispatcher decides, in the same cycle:
//   1. continuation: if a reassembly buffer is busy reassembling a request of
//      this connection, the fragment goes to that buffer;
//   2. dropped request: if an earlier fragment of this connection's current
//      request was dropped, this fragment is discarded as well;
//   3. new request: the beat is a request header. A request that fits in one
//      fragment goes to the single-fragment buffer; a larger one goes to an
//      eligible reassembly buffer chosen by round robin over eligible buffers
//      only ("Eligible RR"). If no buffer is eligible the request is dropped
//      and drop_valid reports the connection so the client can be told.
//      A request whose Accelerator field holds the reserved value
//      ACC_RECONF is a reconfiguration command: it enters no buffer, its
//      Parameters go out on reconf_* to the reconfiguration controller, and
//      the rest of the request is discarded.
// The remaining beats of the fragment follow the decision of its first beat.
//
// Choices of this design: the transport layer gives the length of each
// fragment in beats (frag_beats, valid with its first beat), as a TCP stack
// knows each segment's payload length. A request is "single-fragment" when
// its header and whole payload fit in the fragment that carries its header.
// Clients start every request on a fragment boundary and send whole beats in
// every fragment but a request's last. The rest of a dropped multi-fragment
// request is recognised with a small table (DROP_ENTRIES) of connections and
// beats still to discard; when the table is full the oldest entry is reused.
// Fragments are never back-pressured (frag_ready is always high): a buffer
// reserves room for the whole request when it is chosen. A closed connection
// clears its drop-table entry.
//
// Interface and timing: buffer state (busy, connection, eligible) comes in
// combinationally and the write strobes leave combinationally, so a beat is
// written into its buffer in the cycle it arrives. The round-robin pointer
// moves past the buffer chosen.
module dispatcher
  import offrac_pkg::*;
#(
  parameter int unsigned NUM_RB       = 4,
  parameter int unsigned DROP_ENTRIES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // fragments from the transport layer
  input  logic              frag_valid,
  output logic              frag_ready,
  input  beat_t             frag_data,
  input  logic              frag_last,
  input  conn_t             frag_conn,
  input  beats_t            frag_beats,
  input  logic              close_valid,
  input  conn_t             close_conn,
  // reassembly buffer state
  input  logic [NUM_RB-1:0] rb_busy,
  input  conn_t             rb_conn [NUM_RB],
  input  logic [NUM_RB-1:0] rb_eligible,
  input  logic              sf_eligible,
  output beats_t            new_beats,
  // writes into the buffers (data, first and last shared)
  output logic [NUM_RB-1:0] rb_wr_valid,
  output logic              sf_wr_valid,
  output logic              wr_first,
  output logic              wr_last,
  output beat_t             wr_data,
  output conn_t             wr_conn,
  // a request that found no eligible buffer
  output logic              drop_valid,
  output conn_t             drop_conn,
  output acc_t              drop_accel,
  // a reconfiguration request, for the reconfiguration controller
  output logic              reconf_valid,
  output conn_t             reconf_conn,
  output logic [PARAM_W-1:0] reconf_params
);
  localparam int unsigned RBW = (NUM_RB > 1) ? $clog2(NUM_RB) : 1;
  localparam int unsigned DW  = (DROP_ENTRIES > 1) ? $clog2(DROP_ENTRIES) : 1;

  typedef enum logic [1:0] {R_RB, R_SF, R_DISCARD} route_e;

  req_hdr_t hdr;
  logic     sof;                  // first beat of a fragment
  logic     in_frag;
  route_e   route_q, route_d, route;
  logic [RBW-1:0] idx_q, idx_d, idx;
  logic [RBW-1:0] rr_ptr;
  logic     hit_rb, hit_drop, any_elig, is_single, is_reconf, new_req, drop_new;
  logic [RBW-1:0] hit_rb_idx, elig_idx;
  logic [DW-1:0]  hit_drop_idx, alloc_idx, alloc_rr, trk_q, trk;
  logic           trk_on_q, trk_on, any_free;

  logic   drop_v   [DROP_ENTRIES];
  conn_t  drop_c   [DROP_ENTRIES];
  beats_t drop_rem [DROP_ENTRIES];

  assign frag_ready = 1'b1;
  assign sof        = frag_valid && !in_frag;
  assign hdr        = req_hdr_t'(frag_data);
  assign new_beats  = req_beats(hdr.size);
  assign is_single  = (new_beats <= frag_beats);
  assign is_reconf  = (hdr.accel == ACC_RECONF);

  // Buffer and drop-table lookups for the first beat.
  always_comb begin
    hit_rb = 1'b0;  hit_rb_idx = '0;
    for (int i = 0; i < NUM_RB; i++)
      if (!hit_rb && rb_busy[i] && rb_conn[i] == frag_conn) begin
        hit_rb = 1'b1;  hit_rb_idx = RBW'(i);
      end
    hit_drop = 1'b0;  hit_drop_idx = '0;
    any_free = 1'b0;  alloc_idx = alloc_rr;
    for (int e = 0; e < DROP_ENTRIES; e++) begin
      if (!hit_drop && drop_v[e] && drop_c[e] == frag_conn) begin
        hit_drop = 1'b1;  hit_drop_idx = DW'(e);
      end
      if (!any_free && !drop_v[e]) begin
        any_free = 1'b1;  alloc_idx = DW'(e);
      end
    end
    // Eligible round robin: first eligible buffer at or after rr_ptr.
    any_elig = 1'b0;  elig_idx = '0;
    for (int k = 0; k < NUM_RB; k++) begin
      automatic int unsigned j = (int'(rr_ptr) + k) % NUM_RB;
      if (!any_elig && rb_eligible[j]) begin
        any_elig = 1'b1;  elig_idx = RBW'(j);
      end
    end
  end

  // Routing decision.
  always_comb begin
    new_req  = 1'b0;
    drop_new = 1'b0;
    route_d  = R_DISCARD;
    idx_d    = '0;
    if (hit_rb) begin
      route_d = R_RB;  idx_d = hit_rb_idx;
    end else if (hit_drop) begin
      route_d = R_DISCARD;
    end else begin
      new_req = 1'b1;
      if (is_reconf)                       route_d = R_DISCARD;
      else if (is_single && sf_eligible)   route_d = R_SF;
      else if (!is_single && any_elig) begin route_d = R_RB; idx_d = elig_idx; end
      else                                 drop_new = 1'b1;
    end
  end

  assign route = sof ? route_d : route_q;
  assign idx   = sof ? idx_d   : idx_q;
  // Drop-table entry that this beat counts against, if any.
  assign trk_on = sof ? hit_drop : trk_on_q;
  assign trk    = sof ? hit_drop_idx : trk_q;

  always_comb begin
    rb_wr_valid = '0;
    if (frag_valid && route == R_RB) rb_wr_valid[idx] = 1'b1;
  end
  assign sf_wr_valid = frag_valid && route == R_SF;
  assign wr_first    = sof && new_req && !drop_new && !is_reconf;
  assign wr_last     = frag_last;
  assign wr_data     = frag_data;
  assign wr_conn     = frag_conn;
  assign drop_valid  = sof && drop_new;
  assign drop_conn   = frag_conn;
  assign drop_accel  = hdr.accel;
  assign reconf_valid  = sof && new_req && is_reconf;
  assign reconf_conn   = frag_conn;
  assign reconf_params = hdr.params;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frag  <= 1'b0;
      route_q  <= R_DISCARD;
      idx_q    <= '0;
      rr_ptr   <= '0;
      trk_q    <= '0;
      trk_on_q <= 1'b0;
      alloc_rr <= '0;
      for (int e = 0; e < DROP_ENTRIES; e++) begin
        drop_v[e]   <= 1'b0;
        drop_c[e]   <= '0;
        drop_rem[e] <= '0;
      end
    end else begin
      if (frag_valid) in_frag <= !frag_last;
      if (sof) begin
        route_q <= route_d;
        idx_q   <= idx_d;
        if (new_req && !drop_new && !is_reconf && !is_single)
          rr_ptr <= RBW'((int'(elig_idx) + 1) % NUM_RB);
      end
      // Count discarded beats of a tracked dropped request.
      if (frag_valid && route == R_DISCARD && trk_on) begin
        if (drop_rem[trk] <= beats_t'(1)) drop_v[trk] <= 1'b0;
        drop_rem[trk] <= drop_rem[trk] - 1'b1;
      end
      if (sof) begin
        trk_on_q <= hit_drop;
        trk_q    <= hit_drop_idx;
      end
      // A dropped (or reconfiguration) multi-fragment request: remember how
      // many beats follow.
      if ((drop_new || reconf_valid) && !is_single) begin
        drop_v[alloc_idx]   <= 1'b1;
        drop_c[alloc_idx]   <= frag_conn;
        drop_rem[alloc_idx] <= new_beats - 1'b1;
        trk_on_q            <= 1'b1;
        trk_q               <= alloc_idx;
        if (!any_free) alloc_rr <= DW'((int'(alloc_rr) + 1) % DROP_ENTRIES);
      end
      if (close_valid)
        for (int e = 0; e < DROP_ENTRIES; e++)
          if (drop_c[e] == close_conn) drop_v[e] <= 1'b0;
    end
  end

  a_one_target: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({rb_wr_valid, sf_wr_valid}));

endmodule
