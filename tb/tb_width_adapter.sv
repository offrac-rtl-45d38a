// tb_width_adapter: self-checking test of the stream width adapter in both
// directions. A 512-to-64-bit adapter feeds a 64-to-512-bit adapter, with a
// random-stall stage between them, so the chain must return every wide beat
// unchanged. Streams of random length with random last flags are sent. The
// checks:
//   - every narrow beat in the middle equals the matching 64-bit part of the
//     wide beat it came from, least significant part first;
//   - the middle stream's last flag is set exactly on the final part of a
//     wide beat that carried last;
//   - every wide beat leaving the chain, and its last flag, matches what was
//     sent;
//   - a wide beat whose last part comes early (a short final group of
//     narrow beats) leaves with the unwritten parts zero. This is tested on
//     a separate 64-to-512 adapter fed three narrow beats.
// Output back-pressure is random, and a stalled output must hold still.
// The narrowing side must keep one narrow beat per cycle when nothing
// stalls.
module tb_width_adapter;
  localparam int unsigned WW = 512, NW = 64, R = WW / NW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // chain: src -> down -> (stall stage) -> up -> sink
  logic s_valid, s_ready, s_last;
  logic [WW-1:0] s_data;
  logic n_valid, n_ready, n_last, n2_valid, n2_ready;
  logic [NW-1:0] n_data;
  logic o_valid, o_ready, o_last;
  logic [WW-1:0] o_data;
  logic stall_mid;

  width_adapter #(.IN_W(WW), .OUT_W(NW)) u_down (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last,
    .m_valid(n_valid), .m_ready(n_ready), .m_data(n_data), .m_last(n_last));

  assign n2_valid = n_valid && !stall_mid;
  assign n_ready  = n2_ready && !stall_mid;

  width_adapter #(.IN_W(NW), .OUT_W(WW)) u_up (
    .clk, .rst_n, .s_valid(n2_valid), .s_ready(n2_ready), .s_data(n_data), .s_last(n_last),
    .m_valid(o_valid), .m_ready(o_ready), .m_data(o_data), .m_last(o_last));

  // short-group test adapter
  logic t_valid, t_ready, t_last, t_ovalid, t_oready, t_olast;
  logic [NW-1:0] t_data;
  logic [WW-1:0] t_odata;
  width_adapter #(.IN_W(NW), .OUT_W(WW)) u_short (
    .clk, .rst_n, .s_valid(t_valid), .s_ready(t_ready), .s_data(t_data), .s_last(t_last),
    .m_valid(t_ovalid), .m_ready(t_oready), .m_data(t_odata), .m_last(t_olast));

  typedef struct { logic [WW-1:0] d; logic l; } wbeat_t;
  wbeat_t sent [$];
  wbeat_t mid_ref [$];     // wide beats whose parts are still expected in the middle
  int part = 0, n_out = 0, n_mid = 0;
  int stall_rand = 0;      // percent of cycles the middle and the sink stall

  always @(negedge clk) begin
    stall_mid = ($urandom_range(0, 99) < stall_rand);
    o_ready   = ($urandom_range(0, 99) >= stall_rand);
  end

  // middle monitor
  always @(posedge clk) if (rst_n && n_valid && n_ready) begin
    n_mid++;
    if (mid_ref.size() == 0) check(1'b0, "unexpected narrow beat");
    else begin
      check(n_data == mid_ref[0].d[NW*part +: NW], $sformatf("narrow part %0d", part));
      check(n_last == (mid_ref[0].l && part == R - 1), "narrow last flag");
      if (part == R - 1) begin part = 0; void'(mid_ref.pop_front()); end
      else part++;
    end
  end

  // output monitor with hold check
  logic o_held = 0;
  logic [WW-1:0] o_prev;
  always @(posedge clk) if (rst_n) begin
    if (o_held) check(o_valid && o_data == o_prev, "stalled output held");
    o_held = o_valid && !o_ready;
    o_prev = o_data;
    if (o_valid && o_ready) begin
      n_out++;
      if (sent.size() == 0) check(1'b0, "unexpected wide beat");
      else begin
        check(o_data == sent[0].d && o_last == sent[0].l, $sformatf("wide beat %0d", n_out));
        void'(sent.pop_front());
      end
    end
  end

  function automatic logic [WW-1:0] rnd_wide();
    logic [WW-1:0] v;
    for (int i = 0; i < WW / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic send(input int n);
    wbeat_t b;
    for (int i = 0; i < n; i++) begin
      b.d = rnd_wide();
      b.l = (i == n - 1) || ($urandom_range(0, 3) == 0);
      sent.push_back(b);
      mid_ref.push_back(b);
      @(negedge clk);
      s_valid = 1; s_data = b.d; s_last = b.l;
      do @(posedge clk); while (!s_ready);
    end
    @(negedge clk); s_valid = 0; s_last = 0;
  endtask

  initial begin
    int t0, guard;
    s_valid = 0; s_data = '0; s_last = 0; stall_mid = 0; o_ready = 1;
    t_valid = 0; t_data = '0; t_last = 0; t_oready = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // rate with no stalls: 20 wide beats need 20 * R narrow cycles
    stall_rand = 0;
    t0 = n_mid;
    fork send(20); join_none
    repeat (2) @(posedge clk);
    repeat (10 * R) @(posedge clk);
    check(n_mid - t0 >= 10 * R - 1, $sformatf("narrow rate: %0d beats in %0d cycles", n_mid - t0, 10 * R));
    wait fork;
    guard = 0;
    while ((sent.size() != 0) && guard < 10000) begin @(posedge clk); guard++; end

    // random stalls
    for (int k = 0; k < 4; k++) begin
      stall_rand = 15 * (k + 1);
      send($urandom_range(1, 60));
    end
    guard = 0;
    while ((sent.size() != 0 || mid_ref.size() != 0) && guard < 100000) begin @(posedge clk); guard++; end
    check(sent.size() == 0 && mid_ref.size() == 0, "all beats delivered");
    check(n_out > 100, $sformatf("wide beats out: %0d", n_out));

    // short final group: three narrow beats, the third with last
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      t_valid = 1; t_data = NW'(64'h1111_0000_0000_0000 + i + 1); t_last = (i == 2);
      do @(posedge clk); while (!t_ready);
    end
    @(negedge clk); t_valid = 0; t_last = 0;
    check(t_ovalid && t_olast, "short group emitted with last");
    check(t_odata[NW*0 +: NW] == 64'h1111_0000_0000_0001 &&
          t_odata[NW*1 +: NW] == 64'h1111_0000_0000_0002 &&
          t_odata[NW*2 +: NW] == 64'h1111_0000_0000_0003, "short group parts in order");
    check(t_odata[WW-1:3*NW] == '0, "unwritten parts are zero");
    t_oready = 1; @(negedge clk); t_oready = 0;
    check(!t_ovalid, "short group consumed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
