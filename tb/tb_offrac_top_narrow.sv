// tb_offrac_top_narrow: the end-to-end test of tb_offrac_top, run on a
// fabric whose echo slot is 64 bits wide (ECHO_W = 64), all other sizes at
// their defaults. Every echo request and response then crosses the pair of
// width adapters and the slot's size-report register, so this checks the
// path an accelerator narrower than 512 bits takes, under the same
// scenarios, scoreboard and mechanism counts as the full-size test:
// single-fragment and interleaved multi-fragment requests, drops with
// discarded later fragments, a connection closed mid-request, an unhosted
// accelerator, a slot taken out of service, a reconfiguration request,
// logit and min-max requests in one and in four fragments, and random
// back-pressure on responses. Echo responses come back at one 64-bit part
// per cycle, so they take eight times as long as in the full-size build.
module tb_offrac_top_narrow;
  import offrac_pkg::*;

  localparam int unsigned NUM_SLOTS = 5;
  localparam int unsigned SEG_BEATS = 64;     // 4096-byte fragments

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frag_valid, frag_ready, frag_last, close_valid;
  beat_t frag_data, rsp_data;
  conn_t frag_conn, close_conn, rsp_conn, drop_conn, unroutable_conn;
  beats_t frag_beats;
  logic rsp_valid, rsp_ready, rsp_last, drop_valid, unroutable_valid;
  logic [META_W-1:0] rsp_bytes;
  acc_t drop_accel, slot_cfg_type;
  logic [NUM_SLOTS-1:0] slot_cfg_valid, slot_busy;
  logic reconf_valid;
  conn_t reconf_conn;
  logic [PARAM_W-1:0] reconf_params;
  acc_t slot_type [NUM_SLOTS];

  offrac_top #(.ECHO_W(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- request construction and scoreboard ----------------
  typedef beat_t beatq_t [$];
  beatq_t req_beats_of [int];     // request beats by connection
  beatq_t exp_rsp      [int];     // expected response beats by connection
  int     exp_bytes    [int];
  int     outstanding = 0;
  bit     exp_fp       [int];     // compare as binary32 within a tolerance

  // binary32 <-> double, independent of the design's arithmetic.
  function automatic real f2r(input logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic beatq_t make_req(input acc_t a, input int size, input int k);
    beatq_t q;
    req_hdr_t h;
    h = '0; h.accel = a; h.size = 16'(size); h.params[31:0] = 32'(k);
    q.push_back(beat_t'(h));
    for (int i = 0; i < (size + 63) / 64; i++) begin
      beat_t b;
      for (int l = 0; l < 16; l++)
        b[32*l +: 32] = (a == ACC_MINMAX) ? r2f(real'($urandom_range(0, 2000000)) / 1000.0 - 1000.0)
                      : (a == ACC_LOGIT)  ? r2f(real'($urandom_range(1, 999999)) / 1000000.0)
                                          : $urandom;
      q.push_back(b);
    end
    return q;
  endfunction

  // Expected response of a request.
  task automatic expect_rsp(input int c, input beatq_t q);
    req_hdr_t h = req_hdr_t'(q[0]);
    beatq_t r;
    exp_fp[c] = 1'b0;
    if (h.accel == ACC_ECHO) begin
      r = q;
      exp_bytes[c] = 64 + int'(h.size);
    end else if (h.accel == ACC_MINMAX) begin
      int n = int'(h.size) / 4;
      real mn = 1.0e30, mx = -1.0e30, x;
      for (int i = 0; i < n; i++) begin
        x = f2r(q[1 + i / 16][32*(i%16) +: 32]);
        if (x < mn) mn = x;
        if (x > mx) mx = x;
      end
      for (int b = 0; b < ((n == 0) ? 1 : (n + 15) / 16); b++) begin
        beat_t o = '0;
        for (int l = 0; l < 16; l++)
          if (b*16 + l < n && mx > mn)
            o[32*l +: 32] = r2f((f2r(q[1 + b][32*l +: 32]) - mn) / (mx - mn));
        r.push_back(o);
      end
      exp_bytes[c] = 4 * n;
      exp_fp[c] = 1'b1;
    end else if (h.accel == ACC_LOGIT) begin
      int n = int'(h.size) / 4;
      real p;
      for (int b = 0; b < ((n == 0) ? 1 : (n + 15) / 16); b++) begin
        beat_t o = '0;
        for (int l = 0; l < 16; l++)
          if (b*16 + l < n) begin
            p = f2r(q[1 + b][32*l +: 32]);
            o[32*l +: 32] = r2f($ln(p / (1.0 - p)));
          end
        r.push_back(o);
      end
      exp_bytes[c] = 4 * n;
      exp_fp[c] = 1'b1;
    end else begin
      int v [$];
      int n = int'(h.size) / 4;
      int k = int'(h.params[31:0]);
      if (k > 64) k = 64;
      for (int i = 0; i < n; i++) v.push_back(int'(q[1 + i / 16][32*(i%16) +: 32]));
      for (int i = 1; i < v.size(); i++) begin
        automatic int x = v[i];
        automatic int j = i - 1;
        while (j >= 0 && v[j] < x) begin v[j+1] = v[j]; j--; end
        v[j+1] = x;
      end
      if (k > n) k = n;
      exp_bytes[c] = 4 * k;
      for (int b = 0; b < ((k == 0) ? 1 : (k + 15) / 16); b++) begin
        beat_t o = '0;
        for (int l = 0; l < 16; l++) if (b*16 + l < k) o[32*l +: 32] = 32'(v[b*16 + l]);
        r.push_back(o);
      end
    end
    exp_rsp[c] = r;
    outstanding++;
  endtask

  // Send beats [from, from+n) of connection c's request as one fragment.
  task automatic send_frag(input int c, input int from, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      frag_valid = 1; frag_conn = conn_t'(c); frag_last = (i == n - 1);
      frag_beats = beats_t'(n);
      frag_data = req_beats_of[c][from + i];
    end
    @(negedge clk);
    frag_valid = 0; frag_last = 0;
  endtask

  function automatic int nfrags(input int c);
    return (req_beats_of[c].size() + SEG_BEATS - 1) / SEG_BEATS;
  endfunction

  task automatic send_frag_idx(input int c, input int f);
    int from = f * SEG_BEATS;
    int n = req_beats_of[c].size() - from;
    if (n > SEG_BEATS) n = SEG_BEATS;
    send_frag(c, from, n);
  endtask

  // Send several requests with their fragments interleaved round robin.
  task automatic send_interleaved(input int cs [$]);
    int maxf = 0;
    foreach (cs[i]) if (nfrags(cs[i]) > maxf) maxf = nfrags(cs[i]);
    for (int f = 0; f < maxf; f++)
      foreach (cs[i]) if (f < nfrags(cs[i])) send_frag_idx(cs[i], f);
  endtask

  task automatic new_req(input int c, input acc_t a, input int size, input int k, input logic expect_it);
    req_beats_of[c] = make_req(a, size, k);
    if (expect_it) expect_rsp(c, req_beats_of[c]);
  endtask

  // ---------------- response checking ----------------
  function automatic bit beat_matches(input int c, input beat_t got, input beat_t want);
    real e;
    if (!exp_fp[c]) return got == want;
    for (int l = 0; l < 16; l++) begin
      e = f2r(got[32*l +: 32]) - f2r(want[32*l +: 32]);
      if (e < 0.0) e = -e;
      if (e > 2.0e-5 + 1.0e-5 * ((f2r(want[32*l +: 32]) < 0.0) ? -f2r(want[32*l +: 32]) : f2r(want[32*l +: 32])))
        return 1'b0;
    end
    return 1'b1;
  endfunction

  int rsp_pos [int];
  int n_rsp = 0, n_float = 0;     // n_float: floating-point responses
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    automatic int c = int'(rsp_conn);
    if (!exp_rsp.exists(c)) begin
      check(0, $sformatf("unexpected response for connection %0d", c));
    end else begin
      if (!rsp_pos.exists(c)) rsp_pos[c] = 0;
      check(rsp_pos[c] < exp_rsp[c].size() && beat_matches(c, rsp_data, exp_rsp[c][rsp_pos[c]]),
            $sformatf("connection %0d response beat %0d", c, rsp_pos[c]));
      rsp_pos[c]++;
      if (rsp_last) begin
        check(rsp_pos[c] == exp_rsp[c].size(), $sformatf("connection %0d response length", c));
        check(int'(rsp_bytes) == exp_bytes[c], $sformatf("connection %0d response size", c));
        if (exp_fp[c]) n_float++;
        exp_rsp.delete(c);
        outstanding--;
        n_rsp++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_single = 0, n_multi = 0, n_drop = 0, n_discard = 0, n_close = 0, n_unrout = 0;
  int n_reconf = 0;
  int n_rsp_stall = 0, n_queued_behind = 0, n_out_of_service = 0;
  logic [3:0] rb_used = '0;
  logic [NUM_SLOTS-1:0] topk_slots_used = '0;
  logic [NUM_SLOTS-1:0] oos_mask = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.sf_wr_valid && dut.wr_first) n_single++;
    for (int b = 0; b < 4; b++) if (dut.rb_wr_valid[b] && dut.wr_first) rb_used[b] = 1'b1;
    if (frag_valid && !(|dut.rb_wr_valid) && !dut.sf_wr_valid) n_discard++;
    if (drop_valid) n_drop++;
    if (unroutable_valid) n_unrout++;
    if (reconf_valid) begin
      n_reconf++;
      check(reconf_conn == 32'd800 && reconf_params[15:0] == 16'd3, "reconfiguration request passed on");
    end
    if (rsp_valid && !rsp_ready) n_rsp_stall++;
    if (dut.fwd_valid) begin
      if (slot_type[dut.fwd_slot] == ACC_TOPK) topk_slots_used[dut.fwd_slot] = 1'b1;
      if (oos_mask[dut.fwd_slot]) n_out_of_service++;
    end
    for (int s = 0; s < NUM_SLOTS; s++)
      if (slot_busy[s] && dut.g_slot[0].u_queue.out_valid && s == 0) n_queued_behind++;
  end
  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 4; b++)
      if (dut.src_desc_pop[b]) n_multi++;

  task automatic wait_idle(input int max_cycles);
    int t = 0;
    while (outstanding != 0 && t < max_cycles) begin @(negedge clk); t++; end
    check(outstanding == 0, $sformatf("all responses returned (%0d outstanding)", outstanding));
  endtask

  int cs [$];
  int busy_drop_before;

  initial begin
    frag_valid = 0; frag_last = 0; frag_data = '0; frag_conn = '0; frag_beats = '0;
    close_valid = 0; close_conn = '0; slot_cfg_valid = '0; slot_cfg_type = '0;
    rsp_ready = 1;
    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // 1. Single-fragment requests: Top-K of 1024-byte blocks and 4096-byte echoes.
    for (int i = 0; i < 6; i++) begin
      new_req(100 + i, ACC_TOPK, 960, 8 + i, 1);
      send_frag_idx(100 + i, 0);
    end
    for (int i = 0; i < 3; i++) begin
      new_req(110 + i, ACC_ECHO, 4032, 0, 1);
      send_frag_idx(110 + i, 0);
    end
    wait_idle(40000);
    check(topk_slots_used == 5'b10001, "Top-K requests spread over both Top-K slots");

    // 2. Interleaved multi-fragment requests (6 x 4096 B, like the CNN input, and others).
    new_req(200, ACC_ECHO, 6 * 4096 - 64, 0, 1);
    new_req(201, ACC_TOPK, 4 * 4096 - 64, 20, 1);
    new_req(202, ACC_ECHO, 2 * 4096 + 100, 0, 1);
    new_req(203, ACC_TOPK, 3 * 4096 - 64, 64, 1);
    cs = '{200, 201, 202, 203};
    send_interleaved(cs);
    wait_idle(200000);
    check(rb_used == 4'b1111, "all four reassembly buffers used");

    // 3. All buffers busy: a fifth multi-fragment request is dropped.
    for (int i = 0; i < 4; i++) begin
      new_req(300 + i, ACC_ECHO, 2 * 4096 - 64, 0, 1);
      send_frag_idx(300 + i, 0);
    end
    busy_drop_before = n_drop;
    new_req(304, ACC_ECHO, 2 * 4096 - 64, 0, 0);
    send_frag_idx(304, 0);
    check(n_drop == busy_drop_before + 1, "request dropped with all buffers busy");
    send_frag_idx(304, 1);               // its second fragment is discarded
    for (int i = 0; i < 4; i++) send_frag_idx(300 + i, 1);
    wait_idle(100000);

    // 4. Connection closed mid-request: partial request collected, buffer reused.
    new_req(400, ACC_ECHO, 3 * 4096 - 64, 0, 0);
    send_frag_idx(400, 0);
    @(negedge clk); close_valid = 1; close_conn = 32'd400; @(negedge clk); close_valid = 0;
    n_close++;
    check(!(|dut.rb_busy), "no buffer left busy after close");
    new_req(401, ACC_TOPK, 2 * 4096 - 64, 5, 1);
    send_interleaved('{401});
    wait_idle(100000);

    // 5. A request for an accelerator no slot hosts.
    new_req(500, ACC_CNN, 512, 0, 0);
    send_frag_idx(500, 0);
    repeat (200) @(negedge clk);
    check(n_unrout == 1, "unroutable request reported");

    // 6. Slot 4 taken out of service: Top-K goes only to slot 0.
    @(negedge clk); slot_cfg_valid = 5'b10000; slot_cfg_type = ACC_EMPTY;
    @(negedge clk); slot_cfg_valid = '0;
    oos_mask = 5'b10000;
    for (int i = 0; i < 4; i++) begin
      new_req(600 + i, ACC_TOPK, 2048, 3, 1);
      send_frag_idx(600 + i, 0);
    end
    wait_idle(100000);
    check(n_out_of_service == 0, "no request sent to the slot out of service");
    @(negedge clk); slot_cfg_valid = 5'b10000; slot_cfg_type = ACC_TOPK;
    @(negedge clk); slot_cfg_valid = '0;
    oos_mask = '0;

    // 7. Min-max normalisation and logit: one 1024-byte fragment, then a request of
    //    four 1024-byte fragments reassembled while another client's
    //    single-fragment request passes it.
    new_req(700, ACC_MINMAX, 1024 - 64, 0, 1);
    send_frag(700, 0, 16);
    new_req(701, ACC_MINMAX, 4096 - 64, 0, 1);
    new_req(702, ACC_MINMAX, 1024 - 64, 0, 1);
    for (int f = 0; f < 4; f++) begin
      send_frag(701, 16 * f, 16);
      if (f == 1) send_frag(702, 0, 16);
    end
    new_req(710, ACC_LOGIT, 1024 - 64, 0, 1);
    send_frag(710, 0, 16);
    new_req(711, ACC_LOGIT, 4096 - 64, 0, 1);
    for (int f = 0; f < 4; f++) send_frag(711, 16 * f, 16);
    wait_idle(100000);
    check(n_float == 5, "min-max and logit responses returned");

    repeat (20) @(negedge clk);
    $display("mechanisms: single=%0d multi_complete=%0d drop=%0d discarded_beats=%0d close=%0d unroutable=%0d rsp_stall=%0d queued_behind=%0d responses=%0d",
             n_single, n_multi, n_drop, n_discard, n_close, n_unrout, n_rsp_stall, n_queued_behind, n_rsp);
    // 8. A reconfiguration request over the network (Parameters: slot 3),
    //    then ordinary traffic on the same connection.
    new_req(800, ACC_RECONF, 128, 3, 0);
    send_frag_idx(800, 0);
    new_req(800, ACC_ECHO, 256, 0, 1);
    send_frag_idx(800, 0);
    wait_idle(100000);

    check(n_reconf == 1, "reconfiguration request happened once");
    check(n_single > 0, "single-fragment path used");
    check(n_multi > 0, "multi-fragment reassembly used");
    check(n_drop > 0, "drop happened");
    check(n_discard > 0, "fragments of a dropped request discarded");
    check(n_close > 0, "connection close handled");
    check(n_unrout > 0, "unroutable request happened");
    check(n_rsp_stall > 0, "response back-pressure happened");
    check(n_queued_behind > 0, "a request waited in a slot queue behind a running one");
    check(exp_rsp.size() == 0, "no response missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random response back-pressure.
  always @(negedge clk) rsp_ready <= ($urandom_range(0, 7) != 0);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
