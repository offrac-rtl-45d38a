// tb_echo_accel: self-checking test of the echo accelerator. Sends requests
// of several sizes with random input gaps and output stalls; checks that the
// output equals the input beat for beat, that last is in place, and that the
// metadata size is 64 + Size. Also checks the one-cycle latency.
module tb_echo_accel;
  import offrac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last, meta_valid, meta_ready;
  beat_t s_data, m_data;
  logic [META_W-1:0] meta_data;
  int checks = 0, failures = 0;

  echo_accel dut (.*);
  assign meta_ready = m_ready;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  beat_t sent [$];
  logic  sent_last [$];
  int    sizes [$];

  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin sent.push_back(s_data); sent_last.push_back(s_last); end
    if (m_valid && m_ready) begin
      automatic beat_t e = sent.pop_front();
      automatic logic  l = sent_last.pop_front();
      check(m_data == e && m_last == l, "echoed beat");
      if (m_last) begin
        automatic int sz = sizes.pop_front();
        check(meta_valid && meta_data == 32'(64 + sz), $sformatf("size %0d", meta_data));
      end
    end
  end

  task automatic send(input int nbytes, input logic stall);
    int beats = 1 + (nbytes + 63) / 64;
    req_hdr_t h;
    h = '0; h.accel = ACC_ECHO; h.size = 16'(nbytes);
    sizes.push_back(nbytes);
    for (int i = 0; i < beats; i++) begin
      @(negedge clk);
      s_valid = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      while (!s_valid) begin @(negedge clk); s_valid = ($urandom_range(0, 1) == 1); end
      s_data = (i == 0) ? beat_t'(h) : {16{$urandom}};
      s_last = (i == beats - 1);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk); s_valid = 0;
  endtask

  initial begin
    s_valid = 0; s_data = '0; s_last = 0; m_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // latency: a beat offered at one edge is on the output after that edge
    @(negedge clk);
    s_valid = 1; s_data = '0; s_last = 1; sizes.push_back(0);
    @(negedge clk);
    s_valid = 0;
    check(m_valid, "one-cycle latency");
    @(negedge clk);
    send(4096, 0);
    send(100, 0);
    fork
      send(1024, 1);
      repeat (200) begin @(negedge clk); m_ready = ($urandom_range(0, 2) != 0); end
    join
    m_ready = 1;
    repeat (5) @(negedge clk);
    check(sent.size() == 0, "every beat echoed");
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
