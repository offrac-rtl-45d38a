// tb_dispatcher: self-checking test of fragment steering. The buffers are
// modelled by the testbench (their busy, connection and eligible signals are
// driven directly). Checks single-fragment routing, Eligible round robin,
// continuation fragments, dropping with discard of the dropped request's
// later fragments, release of the drop record on connection close, and
// reconfiguration requests (reserved Accelerator value) that enter no buffer
// and hand their Parameters to the reconfiguration port.
module tb_dispatcher;
  import offrac_pkg::*;

  localparam int unsigned NUM_RB = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frag_valid, frag_ready, frag_last, close_valid, sf_eligible;
  beat_t frag_data, wr_data;
  conn_t frag_conn, close_conn, wr_conn, drop_conn;
  beats_t frag_beats;
  logic [NUM_RB-1:0] rb_busy, rb_eligible, rb_wr_valid;
  conn_t rb_conn [NUM_RB];
  beats_t new_beats;
  logic sf_wr_valid, wr_first, wr_last, drop_valid;
  acc_t drop_accel;
  logic reconf_valid;
  conn_t reconf_conn;
  logic [PARAM_W-1:0] reconf_params;
  int n_reconf;
  int checks = 0, failures = 0;

  dispatcher #(.NUM_RB(NUM_RB), .DROP_ENTRIES(2)) dut (.*);

  // What the last fragment did.
  int n_rb [NUM_RB];
  int n_sf, n_first, n_drop, n_disc;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic beat_t mk_hdr(input acc_t a, input logic [15:0] size);
    req_hdr_t h;
    h = '0; h.accel = a; h.size = size;
    return beat_t'(h);
  endfunction

  // Send one fragment of n beats; the first beat is b0, the rest filler.
  task automatic send(input conn_t c, input int n, input beat_t b0);
    foreach (n_rb[i]) n_rb[i] = 0;
    n_sf = 0; n_first = 0; n_drop = 0; n_disc = 0; n_reconf = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      frag_valid = 1; frag_conn = c; frag_last = (i == n - 1);
      frag_beats = beats_t'(n);
      frag_data = (i == 0) ? b0 : {16{32'hFFFF_0000 + 32'(i)}};
      #1;
      check(frag_ready, "never back-pressured");
      for (int b = 0; b < NUM_RB; b++) n_rb[b] += int'(rb_wr_valid[b]);
      n_sf    += int'(sf_wr_valid);
      n_first += int'(wr_first);
      n_drop  += int'(drop_valid);
      n_reconf += int'(reconf_valid);
      if (reconf_valid) check(reconf_conn == c && reconf_params == b0[DATA_W-1:32],
                              "reconfiguration port carries connection and Parameters");
      n_disc  += int'(!(|rb_wr_valid) && !sf_wr_valid);
      if (drop_valid) check(drop_conn == c, "drop names the connection");
    end
    @(negedge clk);
    frag_valid = 0; frag_last = 0;
  endtask

  initial begin
    frag_valid = 0; frag_last = 0; frag_data = '0; frag_conn = '0; frag_beats = '0;
    close_valid = 0; close_conn = '0; sf_eligible = 1;
    rb_busy = '0; rb_eligible = '1;
    foreach (rb_conn[i]) rb_conn[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. Single-fragment request (100 bytes -> 3 beats) to the single buffer.
    send(32'd1, 3, mk_hdr(ACC_TOPK, 16'd100));
    check(n_sf == 3 && n_first == 1 && n_drop == 0, "single-fragment request to single buffer");

    // 2. Eligible RR over multi-fragment requests (8000 bytes -> 126 beats).
    send(32'd2, 64, mk_hdr(ACC_TOPK, 16'd8000));
    check(n_rb[0] == 64 && n_first == 1, "first multi-fragment request to buffer 0");
    send(32'd3, 64, mk_hdr(ACC_TOPK, 16'd8000));
    check(n_rb[1] == 64, "next request to buffer 1");
    rb_eligible = 4'b1001;
    send(32'd4, 64, mk_hdr(ACC_TOPK, 16'd8000));
    check(n_rb[3] == 64 && n_rb[2] == 0, "ineligible buffer 2 skipped, buffer 3 chosen");
    send(32'd5, 64, mk_hdr(ACC_TOPK, 16'd8000));
    check(n_rb[0] == 64, "round robin wraps to buffer 0");

    // 3. Continuation fragment: buffer 2 is reassembling connection 55.
    rb_busy = 4'b0100; rb_conn[2] = 32'd55; rb_eligible = 4'b1011;
    send(32'd55, 10, {16{32'h1234_5678}});
    check(n_rb[2] == 10 && n_first == 0, "continuation steered to its buffer");
    rb_busy = '0;

    // 4. No eligible buffer: request dropped with all its fragments.
    rb_eligible = '0;
    send(32'd66, 64, mk_hdr(ACC_ECHO, 16'd8000));
    check(n_drop == 1 && n_disc == 64, "request dropped and first fragment discarded");
    rb_eligible = '1;
    send(32'd66, 62, {16{32'hAAAA_BBBB}});
    check(n_disc == 62 && n_first == 0, "later fragment of dropped request discarded");
    send(32'd66, 3, mk_hdr(ACC_ECHO, 16'd100));
    check(n_sf == 3 && n_first == 1, "after the dropped request, a new request is accepted");

    // 5. Single-fragment request with the single buffer full: dropped alone.
    sf_eligible = 0;
    send(32'd67, 2, mk_hdr(ACC_ECHO, 16'd64));
    check(n_drop == 1 && n_disc == 2, "single-fragment request dropped");
    sf_eligible = 1;
    send(32'd67, 2, mk_hdr(ACC_ECHO, 16'd64));
    check(n_sf == 2 && n_first == 1, "next single-fragment request of that connection accepted");

    // 6. A closed connection forgets its dropped request.
    rb_eligible = '0;
    send(32'd77, 64, mk_hdr(ACC_ECHO, 16'd8000));
    check(n_drop == 1, "conn 77 request dropped");
    rb_eligible = '1;
    @(negedge clk); close_valid = 1; close_conn = 32'd77; @(negedge clk); close_valid = 0;
    send(32'd77, 64, mk_hdr(ACC_ECHO, 16'd8000));
    check(n_first == 1 && (n_rb[0] + n_rb[1] + n_rb[2] + n_rb[3]) == 64, "after close, new request accepted");

    // 7. Reconfiguration requests: header only, then one spanning two
    //    fragments; neither enters a buffer nor counts as a drop.
    begin
      req_hdr_t h = '0;
      h.accel = ACC_RECONF; h.params[31:0] = 32'h0003_0002; h.params[479:448] = 32'hCAFE_F00D;
      send(32'd88, 1, beat_t'(h));
      check(n_reconf == 1 && n_drop == 0 && n_disc == 1 && n_first == 0, "header-only reconfiguration request");
      h.size = 16'd200;                  // 1 + 4 beats
      send(32'd89, 2, beat_t'(h));
      check(n_reconf == 1 && n_drop == 0 && n_disc == 2 && n_first == 0, "reconfiguration request, first fragment");
      send(32'd89, 3, {16{32'h1234_5678}});
      check(n_reconf == 0 && n_disc == 3, "its second fragment discarded");
      send(32'd89, 2, mk_hdr(ACC_ECHO, 16'd64));
      check(n_sf == 2 && n_first == 1, "next request of that connection accepted");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
