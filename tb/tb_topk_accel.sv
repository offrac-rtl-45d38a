// tb_topk_accel: self-checking test of the Top-K accelerator. Sends requests
// of random signed integers with various K and sizes (including K above
// KMAX, K = 0, an empty payload and a payload that ends mid-beat), compares
// the answer with a reference sort done in the testbench, checks the
// metadata size, and checks the cycle count from header to first output
// beat (1 + 17 per payload beat).
module tb_topk_accel;
  import offrac_pkg::*;

  localparam int unsigned KMAX = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last, meta_valid, meta_ready;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign meta_ready = m_ready;
  beat_t s_data, m_data;
  logic [META_W-1:0] meta_data;
  int checks = 0, failures = 0;

  topk_accel #(.KMAX(KMAX)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int nbytes, input int k);
    int n = nbytes / 4;
    int pbeats = (nbytes + 63) / 64;
    int vals [$];
    int ref_q [$];
    int kk, got, t0, lat, guard;
    req_hdr_t h;
    beat_t b;
    for (int i = 0; i < pbeats * 16; i++) vals.push_back(int'($urandom));
    for (int i = 0; i < n; i++) ref_q.push_back(vals[i]);
    // reference: descending insertion sort, signed comparison
    for (int i = 1; i < ref_q.size(); i++) begin
      automatic int v = ref_q[i];
      automatic int j = i - 1;
      while (j >= 0 && ref_q[j] < v) begin ref_q[j+1] = ref_q[j]; j--; end
      ref_q[j+1] = v;
    end
    kk = (k > int'(KMAX)) ? int'(KMAX) : k;
    if (kk > n) kk = n;
    h = '0; h.accel = ACC_TOPK; h.size = 16'(nbytes); h.params[31:0] = 32'(k);
    // header
    @(negedge clk);
    s_valid = 1; s_data = beat_t'(h); s_last = (pbeats == 0);
    @(posedge clk); while (!s_ready) @(posedge clk);
    t0 = cyc;
    for (int p = 0; p < pbeats; p++) begin
      @(negedge clk);
      for (int l = 0; l < 16; l++) b[32*l +: 32] = 32'(vals[p*16 + l]);
      s_valid = 1; s_data = b; s_last = (p == pbeats - 1);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk); s_valid = 0;
    // cycles from the header's clock edge to the first output beat
    guard = 0;
    while (!m_valid && guard < 5000) begin @(negedge clk); guard++; end
    lat = cyc - t0;
    check(lat == 17 * pbeats + 1,
          $sformatf("latency %0d cycles for %0d payload beats", lat, pbeats));
    got = 0;
    m_ready = 1;
    guard = 0;
    while (guard < 100) begin
      @(posedge clk);
      if (m_valid) begin
        for (int l = 0; l < 16; l++) begin
          if (got + l < kk)
            check(int'(m_data[32*l +: 32]) == ref_q[got + l], $sformatf("k=%0d element %0d got %0d exp %0d", k, got + l, int'(m_data[32*l +: 32]), ref_q[got + l]));
          else
            check(m_data[32*l +: 32] == '0, "unused lanes are zero");
        end
        got += 16;
        if (m_last) begin
          check(meta_valid && meta_data == 32'(4 * kk), $sformatf("size %0d for k=%0d n=%0d", meta_data, k, n));
          check(got >= kk && got - kk < 16 || (kk == 0 && got == 16), "output beat count");
          break;
        end
      end
      guard++;
    end
    @(negedge clk); m_ready = 0;
  endtask

  initial begin
    s_valid = 0; s_data = '0; s_last = 0; m_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1024, 10);
    run(1024, 64);
    run(4096, 100);     // K above KMAX is clamped
    run(100, 40);       // 25 integers, last beat partly used
    run(256, 0);        // K = 0
    run(0, 5);          // empty payload
    run(64, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
