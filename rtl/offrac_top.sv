// offrac_top: the complete request-reassembly and accelerator-invocation
// layer that sits on top of a transport stack in a network-attached FPGA.
//
// Dataflow: fragments (ordered TCP payloads with their connection ID) enter
// the Dispatcher, which writes each one into the single-fragment buffer or
// into one of NUM_RB reassembly buffers, or drops it. Complete requests are
// picked up by the Selector and copied into the queue of a slot hosting the
// requested accelerator. Each slot wrapper invokes its accelerator on one
// request at a time and tags the response with the connection ID; the
// response mux returns all responses to the transport stack.
//
// Following the source: four 0.25 MB reassembly buffers, one 1 MB
// single-fragment buffer, Eligible round robin into the buffers, round robin
// among slots of one accelerator type, five accelerator slots, 512-bit data
// path with a 64-byte header beat. Choices of this design: SLOT_KIND fixes
// which accelerator each slot holds at build time (the partial
// reconfiguration that would swap them is outside this RTL); slot_cfg_*
// rewrites the type a slot advertises to the Selector (ACC_EMPTY takes a
// slot out of service); the default kinds (Top-K in slots 0 and 4, logit
// transform in slot 1, echo in slot 2, min-max normalisation in slot 3),
// the fragment length given beside each fragment, queue depth, drop-table
// size and Top-K list size are this design's own choices. The echo runs at
// ECHO_W bits behind two width adapters, the wrapper the source describes for
// accelerators that are not 512 bits wide. By default ECHO_W is 512 and the
// adapters are wire-throughs, so the echo keeps the fabric's full rate; a
// narrower ECHO_W (a multiple or divisor of 512, at least 32) puts the
// conversion in use.
//
// Interface and timing: frag_* is never back-pressured; frag_beats gives
// the fragment's length in beats with its first beat; rsp_* is a
// back-pressured stream with the response size on its last beat; drop_* and
// unroutable_* are one-cycle event pulses with the connection to notify;
// reconf_* is a one-cycle pulse carrying the Parameters of a request
// addressed to the reserved ACC_RECONF value, for a reconfiguration
// controller outside this RTL.
module offrac_top
  import offrac_pkg::*;
#(
  parameter int unsigned NUM_RB     = 4,
  parameter int unsigned RB_DEPTH   = 4096,    // 0.25 MB each
  parameter int unsigned SF_DEPTH   = 16384,   // 1 MB
  parameter int unsigned NUM_SLOTS  = 5,
  parameter int unsigned ACCQ_DEPTH = 1024,
  parameter int unsigned KMAX       = 64,
  parameter int unsigned ECHO_W     = 512,     // stream width of the echo accelerator
  parameter acc_t SLOT_KIND [NUM_SLOTS] = '{ACC_TOPK, ACC_LOGIT, ACC_ECHO, ACC_MINMAX, ACC_TOPK}
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
  // responses to the transport layer
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output beat_t             rsp_data,
  output logic              rsp_last,
  output conn_t             rsp_conn,
  output logic [META_W-1:0] rsp_bytes,
  // notifications
  output logic              drop_valid,
  output conn_t             drop_conn,
  output acc_t              drop_accel,
  output logic              unroutable_valid,
  output conn_t             unroutable_conn,
  // reconfiguration requests received over the network
  output logic              reconf_valid,
  output conn_t             reconf_conn,
  output logic [PARAM_W-1:0] reconf_params,
  // slot type map, written by the reconfiguration control
  input  logic [NUM_SLOTS-1:0] slot_cfg_valid,
  input  acc_t              slot_cfg_type,
  output acc_t              slot_type [NUM_SLOTS],
  output logic [NUM_SLOTS-1:0] slot_busy
);
  localparam int unsigned NUM_SRC = NUM_RB + 1;   // last source: single-fragment buffer

  // Dispatcher <-> buffers
  logic [NUM_RB-1:0] rb_busy, rb_eligible, rb_wr_valid;
  conn_t             rb_conn [NUM_RB];
  logic              sf_eligible, sf_wr_valid, wr_first, wr_last;
  beats_t            new_beats;
  beat_t             wr_data;
  conn_t             wr_conn;

  // buffers <-> Selector
  logic [NUM_SRC-1:0] src_desc_valid, src_desc_pop, src_rd_valid, src_rd_ready;
  req_desc_t          src_desc [NUM_SRC];
  beat_t              src_rd_data [NUM_SRC];

  // Selector <-> queues
  logic [NUM_SLOTS-1:0] q_in_valid, q_in_ready;
  beat_t                q_in_data;
  logic                 q_in_last;
  conn_t                q_in_conn;
  logic                 fwd_valid;
  logic [$clog2(NUM_SLOTS+1)-1:0] fwd_slot;

  // slots -> response mux
  logic [NUM_SLOTS-1:0] r_valid, r_ready, r_last;
  beat_t                r_data  [NUM_SLOTS];
  conn_t                r_conn  [NUM_SLOTS];
  logic [META_W-1:0]    r_bytes [NUM_SLOTS];

  dispatcher #(.NUM_RB(NUM_RB)) u_dispatcher (
    .clk, .rst_n,
    .frag_valid, .frag_ready, .frag_data, .frag_last, .frag_conn, .frag_beats,
    .close_valid, .close_conn,
    .rb_busy, .rb_conn, .rb_eligible, .sf_eligible, .new_beats,
    .rb_wr_valid, .sf_wr_valid, .wr_first, .wr_last, .wr_data, .wr_conn,
    .drop_valid, .drop_conn, .drop_accel,
    .reconf_valid, .reconf_conn, .reconf_params
  );

  for (genvar b = 0; b < NUM_RB; b++) begin : g_rb
    reassembly_buffer #(.DEPTH_BEATS(RB_DEPTH)) u_rb (
      .clk, .rst_n,
      .busy       (rb_busy[b]),
      .cur_conn   (rb_conn[b]),
      .new_beats  (new_beats),
      .eligible   (rb_eligible[b]),
      .wr_valid   (rb_wr_valid[b]),
      .wr_first   (wr_first),
      .wr_data    (wr_data),
      .wr_conn    (wr_conn),
      .close_valid(close_valid),
      .close_conn (close_conn),
      .desc_valid (src_desc_valid[b]),
      .desc       (src_desc[b]),
      .desc_pop   (src_desc_pop[b]),
      .rd_valid   (src_rd_valid[b]),
      .rd_ready   (src_rd_ready[b]),
      .rd_data    (src_rd_data[b]),
      .free_beats ()
    );
  end

  single_frag_buffer #(.DEPTH_BEATS(SF_DEPTH)) u_sf (
    .clk, .rst_n,
    .new_beats  (new_beats),
    .eligible   (sf_eligible),
    .wr_valid   (sf_wr_valid),
    .wr_first   (wr_first),
    .wr_last    (wr_last),
    .wr_data    (wr_data),
    .wr_conn    (wr_conn),
    .close_valid(close_valid),
    .close_conn (close_conn),
    .desc_valid (src_desc_valid[NUM_RB]),
    .desc       (src_desc[NUM_RB]),
    .desc_pop   (src_desc_pop[NUM_RB]),
    .rd_valid   (src_rd_valid[NUM_RB]),
    .rd_ready   (src_rd_ready[NUM_RB]),
    .rd_data    (src_rd_data[NUM_RB]),
    .free_beats ()
  );

  selector #(.NUM_SRC(NUM_SRC), .NUM_SLOTS(NUM_SLOTS)) u_selector (
    .clk, .rst_n,
    .src_desc_valid, .src_desc, .src_desc_pop,
    .src_rd_valid, .src_rd_ready, .src_rd_data,
    .slot_type,
    .q_valid (q_in_valid),
    .q_ready (q_in_ready),
    .q_data  (q_in_data),
    .q_last  (q_in_last),
    .q_conn  (q_in_conn),
    .fwd_valid, .fwd_slot,
    .unroutable_valid, .unroutable_conn
  );

  for (genvar s = 0; s < NUM_SLOTS; s++) begin : g_slot
    logic  qo_valid, qo_ready, qo_last;
    beat_t qo_data;
    conn_t qo_conn;

    accel_queue #(.DEPTH(ACCQ_DEPTH), .INIT_TYPE(SLOT_KIND[s])) u_queue (
      .clk, .rst_n,
      .cfg_valid (slot_cfg_valid[s]),
      .cfg_type  (slot_cfg_type),
      .slot_type (slot_type[s]),
      .in_valid  (q_in_valid[s]),
      .in_ready  (q_in_ready[s]),
      .in_data   (q_in_data),
      .in_last   (q_in_last),
      .in_conn   (q_in_conn),
      .out_valid (qo_valid),
      .out_ready (qo_ready),
      .out_data  (qo_data),
      .out_last  (qo_last),
      .out_conn  (qo_conn),
      .level     ()
    );

    if (SLOT_KIND[s] == ACC_EMPTY) begin : g_empty
      // Nothing loaded: the queue is never drained and no response is made.
      assign qo_ready     = 1'b0;
      assign r_valid[s]   = 1'b0;
      assign r_last[s]    = 1'b0;
      assign r_data[s]    = '0;
      assign r_conn[s]    = '0;
      assign r_bytes[s]   = '0;
      assign slot_busy[s] = 1'b0;
    end else begin : g_acc
      logic  a_s_valid, a_s_ready, a_s_last, a_m_valid, a_m_ready, a_m_last;
      logic  a_meta_valid, a_meta_ready;
      beat_t a_s_data, a_m_data;
      logic [META_W-1:0] a_meta_data;

      accel_wrapper u_wrap (
        .clk, .rst_n,
        .q_valid (qo_valid), .q_ready (qo_ready), .q_data (qo_data),
        .q_last  (qo_last),  .q_conn  (qo_conn),
        .s_valid (a_s_valid), .s_ready (a_s_ready), .s_data (a_s_data), .s_last (a_s_last),
        .m_valid (a_m_valid), .m_ready (a_m_ready), .m_data (a_m_data), .m_last (a_m_last),
        .meta_valid (a_meta_valid), .meta_ready (a_meta_ready), .meta_data (a_meta_data),
        .rsp_valid (r_valid[s]), .rsp_ready (r_ready[s]), .rsp_data (r_data[s]),
        .rsp_last  (r_last[s]),  .rsp_conn  (r_conn[s]),  .rsp_bytes (r_bytes[s]),
        .busy      (slot_busy[s])
      );

      if (SLOT_KIND[s] == ACC_TOPK) begin : g_topk
        topk_accel #(.KMAX(KMAX)) u_acc (
          .clk, .rst_n,
          .s_valid (a_s_valid), .s_ready (a_s_ready), .s_data (a_s_data), .s_last (a_s_last),
          .m_valid (a_m_valid), .m_ready (a_m_ready), .m_data (a_m_data), .m_last (a_m_last),
          .meta_valid (a_meta_valid), .meta_ready (a_meta_ready), .meta_data (a_meta_data)
        );
      end else if (SLOT_KIND[s] == ACC_LOGIT) begin : g_logit
        logit_accel u_acc (
          .clk, .rst_n,
          .s_valid (a_s_valid), .s_ready (a_s_ready), .s_data (a_s_data), .s_last (a_s_last),
          .m_valid (a_m_valid), .m_ready (a_m_ready), .m_data (a_m_data), .m_last (a_m_last),
          .meta_valid (a_meta_valid), .meta_ready (a_meta_ready), .meta_data (a_meta_data)
        );
      end else if (SLOT_KIND[s] == ACC_MINMAX) begin : g_minmax
        minmax_accel u_acc (
          .clk, .rst_n,
          .s_valid (a_s_valid), .s_ready (a_s_ready), .s_data (a_s_data), .s_last (a_s_last),
          .m_valid (a_m_valid), .m_ready (a_m_ready), .m_data (a_m_data), .m_last (a_m_last),
          .meta_valid (a_meta_valid), .meta_ready (a_meta_ready), .meta_data (a_meta_data)
        );
      end else if (SLOT_KIND[s] == ACC_ECHO) begin : g_echo
        // The echo runs at ECHO_W bits behind a pair of width adapters. Its
        // size report leaves with its last narrow beat and is held here until
        // the last wide beat reaches the wrapper.
        logic              n_s_valid, n_s_ready, n_s_last, n_m_valid, n_m_ready, n_m_last;
        logic [ECHO_W-1:0] n_s_data, n_m_data;
        logic              e_meta_valid, hold_valid;
        logic [META_W-1:0] e_meta_data, hold_data;

        width_adapter #(.IN_W(DATA_W), .OUT_W(ECHO_W)) u_down (
          .clk, .rst_n,
          .s_valid (a_s_valid), .s_ready (a_s_ready), .s_data (a_s_data), .s_last (a_s_last),
          .m_valid (n_s_valid), .m_ready (n_s_ready), .m_data (n_s_data), .m_last (n_s_last)
        );
        echo_accel #(.W(ECHO_W)) u_acc (
          .clk, .rst_n,
          .s_valid (n_s_valid), .s_ready (n_s_ready), .s_data (n_s_data), .s_last (n_s_last),
          .m_valid (n_m_valid), .m_ready (n_m_ready), .m_data (n_m_data), .m_last (n_m_last),
          .meta_valid (e_meta_valid), .meta_ready (1'b1), .meta_data (e_meta_data)
        );
        width_adapter #(.IN_W(ECHO_W), .OUT_W(DATA_W)) u_up (
          .clk, .rst_n,
          .s_valid (n_m_valid), .s_ready (n_m_ready), .s_data (n_m_data), .s_last (n_m_last),
          .m_valid (a_m_valid), .m_ready (a_m_ready), .m_data (a_m_data), .m_last (a_m_last)
        );

        // With equal widths the report meets the last beat in the same cycle
        // and goes straight through; otherwise it waits in the register.
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            hold_valid <= 1'b0;
            hold_data  <= '0;
          end else if (e_meta_valid && n_m_ready && !(a_meta_valid && a_meta_ready)) begin
            hold_valid <= 1'b1;
            hold_data  <= e_meta_data;
          end else if (a_meta_valid && a_meta_ready) begin
            hold_valid <= 1'b0;
          end
        end
        assign a_meta_valid = (hold_valid || e_meta_valid) && a_m_valid && a_m_last;
        assign a_meta_data  = hold_valid ? hold_data : e_meta_data;
      end else begin : g_unsupported
        $error("SLOT_KIND names an accelerator that is not available");
      end
    end
  end

  response_mux #(.N(NUM_SLOTS)) u_rsp (
    .clk, .rst_n,
    .in_valid (r_valid), .in_ready (r_ready), .in_data (r_data),
    .in_last  (r_last),  .in_conn  (r_conn),  .in_bytes (r_bytes),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp_data),
    .out_last (rsp_last),  .out_conn (rsp_conn),  .out_bytes(rsp_bytes)
  );

endmodule
