// tb_response_mux: self-checking test of the response merge. Three slot
// models each send responses of random length at random times. Checks that
// every response arrives whole and uninterrupted, with its connection and
// size, that no beat is lost under random output stalls, and that waiting
// slots are served in round-robin order.
module tb_response_mux;
  import offrac_pkg::*;

  localparam int unsigned N = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready, in_last;
  beat_t in_data [N];
  conn_t in_conn [N];
  logic [META_W-1:0] in_bytes [N];
  logic out_valid, out_ready, out_last;
  beat_t out_data;
  conn_t out_conn;
  logic [META_W-1:0] out_bytes;
  int checks = 0, failures = 0;

  response_mux #(.N(N)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Slot model s: response r has (r % 4) + 1 beats, connection s*100+r.
  int rn [N], bn [N];
  logic [N-1:0] gap = '0;     // random bubbles inside responses
  always @(negedge clk) for (int s = 0; s < N; s++) gap[s] <= ($urandom_range(0, 3) == 0);
  localparam int RESP = 12;
  always_comb
    for (int s = 0; s < N; s++) begin
      in_valid[s] = (rn[s] < RESP) && !gap[s];
      in_last[s]  = (bn[s] == rn[s] % 4);
      in_data[s]  = {16{32'(s * 10000 + rn[s] * 10 + bn[s])}};
      in_conn[s]  = conn_t'(s * 100 + rn[s]);
      in_bytes[s] = in_last[s] ? 32'((rn[s] % 4 + 1) * 64) : '0;
    end
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < N; s++)
      if (in_valid[s] && in_ready[s]) begin
        if (in_last[s]) begin rn[s] <= rn[s] + 1; bn[s] <= 0; end
        else bn[s] <= bn[s] + 1;
      end

  int exp_r [N];
  int cur = -1, beat = 0, total = 0, last_slot = -1;
  int rr_ok = 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int s = int'(out_conn) / 100;
    automatic int r = int'(out_conn) % 100;
    if (cur < 0) begin
      cur = s;
      // All three slots always have a response waiting until the end: strict rotation.
      if (last_slot >= 0 && rn[(last_slot + 1) % N] < RESP && !gap[(last_slot + 1) % N] &&
          s != (last_slot + 1) % N) rr_ok = 0;
    end
    check(s == cur, "no interleaving within a response");
    check(r == exp_r[s], $sformatf("slot %0d response order", s));
    check(out_data == {16{32'(s * 10000 + r * 10 + beat)}}, "beat data");
    beat++;
    if (out_last) begin
      check(beat == r % 4 + 1 && out_bytes == 32'(beat * 64), "response length and size");
      exp_r[s]++; total++; last_slot = s; cur = -1; beat = 0;
    end
  end

  initial begin
    foreach (rn[i]) begin rn[i] = 0; bn[i] = 0; exp_r[i] = 0; end
    out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (total < N * RESP) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    check(rr_ok == 1, "round-robin order among waiting slots");
    check(total == N * RESP, "all responses delivered");
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
