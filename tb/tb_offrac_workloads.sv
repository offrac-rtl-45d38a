// tb_offrac_workloads: the evaluation workloads of the source, run on the
// whole fabric at its default sizes, every response checked against an
// independent model (the same request model and scoreboard as tb_offrac_top).
//   A. Echo throughput: 28 clients each send one 4096-byte request as a
//      single 65-beat fragment, back to back, with no back-pressure. The
//      fabric must return all 1820 beats at no less than 0.9 beat per cycle
//      from the first beat in to the last beat out (0.9 * 512 bits at
//      250 MHz is 115 Gbps, above the 85 Gbps the source reports).
//   B. Top-K on 1 KB and 4 KB inputs, eight of each, spread over the two
//      Top-K instances; both must be used.
//   C. Logit and min-max on 1, 4, 16 and 32 KB inputs, sent as 4096-byte
//      fragments.
//   D. Requests of 1, 2 and 4 fragments of 1024 bytes, four clients
//      interleaved fragment by fragment.
// The response stream is randomly back-pressured in B to D. The measured
// echo rate is printed.
module tb_offrac_workloads;
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

  offrac_top dut (.*);

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

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int t_in, t_out;
  int n_echo_beats = 0;
  bit bp = 0;
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready && rsp_conn >= 1000 && rsp_conn < 1100) begin
    n_echo_beats++;
    t_out = cyc;
  end

  initial begin
    real rate;
    frag_valid = 0; frag_last = 0; frag_data = '0; frag_conn = '0; frag_beats = '0;
    close_valid = 0; close_conn = '0; slot_cfg_valid = '0; slot_cfg_type = '0;
    rsp_ready = 1;
    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // A. echo throughput
    for (int c = 0; c < 28; c++) new_req(1000 + c, ACC_ECHO, 4096, 0, 1);
    t_in = cyc;
    for (int c = 0; c < 28; c++) send_frag(1000 + c, 0, 65);
    wait_idle(100000);
    rate = real'(n_echo_beats) / real'(t_out - t_in + 1);
    $display("echo: %0d beats in %0d cycles, %f beats per cycle, %f Gbps at 250 MHz",
             n_echo_beats, t_out - t_in + 1, rate, rate * 512.0 * 0.25);
    check(n_echo_beats == 28 * 65, "all echo beats returned");
    check(rate >= 0.9, "echo throughput at least 0.9 beat per cycle");

    // B. Top-K, 1 KB and 4 KB inputs
    bp = 1;
    topk_slots_used = '0;
    for (int i = 0; i < 8; i++) begin
      new_req(2000 + 2*i, ACC_TOPK, 1024, 10, 1);
      send_frag_idx(2000 + 2*i, 0);
      new_req(2001 + 2*i, ACC_TOPK, 4096, 64, 1);
      send_interleaved('{2001 + 2*i});
    end
    wait_idle(400000);
    check(topk_slots_used == 5'b10001, "both Top-K instances used");

    // C. Logit and min-max, 1 to 32 KB
    for (int i = 0; i < 4; i++) begin
      automatic int kb = (i == 0) ? 1 : (i == 1) ? 4 : (i == 2) ? 16 : 32;
      new_req(3000 + i, ACC_LOGIT, kb * 1024, 0, 1);
      send_interleaved('{3000 + i});
      new_req(3100 + i, ACC_MINMAX, kb * 1024, 0, 1);
      send_interleaved('{3100 + i});
      wait_idle(400000);
    end
    check(n_float == 8, "eight logit and min-max responses");

    // D. 1, 2 and 4 fragments of 1024 bytes, interleaved
    for (int r = 0; r < 3; r++) begin
      automatic int nf = 1 << r;
      for (int c = 0; c < 4; c++) new_req(4000 + 10*r + c, (c % 2) ? ACC_ECHO : ACC_TOPK, 1024 * nf - 64, 16, 1);
      for (int f = 0; f < nf; f++)
        for (int c = 0; c < 4; c++) send_frag(4000 + 10*r + c, 16 * f, 16);
      wait_idle(400000);
    end
    check(n_multi > 0, "multi-fragment reassembly used");
    check(n_single > 0, "single-fragment path used");
    check(exp_rsp.size() == 0, "no response missing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rsp_ready <= !bp || ($urandom_range(0, 7) != 0);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
