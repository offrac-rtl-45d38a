// tb_minmax_accel: self-checking test of the min-max normalisation
// accelerator. Sends blocks of random binary32 values (mixed signs and
// magnitudes, sizes from one element to a full 32 KB block, and blocks that
// end mid-beat), and compares each result with (x - min) / (max - min)
// worked out in double precision in the testbench. Results must be within
// 1e-5 of the reference (the accelerator truncates), the block's minimum must
// map to exactly 0.0 and its maximum to exactly 1.0, lanes past the last
// element must be zero, and the metadata must give 4 bytes per element. A
// block of equal values must give all zeros, an empty request one zero beat
// of size 0. The cycle count from header to first result beat is checked
// against P + 17 for P payload beats (an empty request answers at once).
// Output back-pressure is random.
module tb_minmax_accel;
  import offrac_pkg::*;
  import fp32_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last, meta_valid, meta_ready;
  beat_t s_data, m_data;
  logic [META_W-1:0] meta_data;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign meta_ready = m_ready;
  int checks = 0, failures = 0;

  minmax_accel dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // binary32 <-> double, independent of the design's arithmetic.
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic logic [31:0] rand_f();
    real mag = real'($urandom_range(1, 1000000)) / 1000.0;
    return r2f(($urandom_range(0, 1) != 0) ? -mag : mag);
  endfunction

  task automatic run(input int nbytes, input int mode);
    int n = nbytes / 4;
    int pbeats = (nbytes + 63) / 64;
    int obeats = (n == 0) ? 1 : (n + 15) / 16;
    logic [31:0] v [$];
    real mn, mx, rng, ref_v, got_v, err;
    int t0, lat, idx, guard;
    req_hdr_t h;
    beat_t b;
    for (int i = 0; i < pbeats * 16; i++)
      v.push_back((mode == 1) ? 32'h40490FDB : rand_f());   // mode 1: all equal
    mn = 1.0e30; mx = -1.0e30;
    for (int i = 0; i < n; i++) begin
      if (f2r(v[i]) < mn) mn = f2r(v[i]);
      if (f2r(v[i]) > mx) mx = f2r(v[i]);
    end
    rng = mx - mn;
    h = '0; h.accel = ACC_MINMAX; h.size = 16'(nbytes);
    @(negedge clk);
    s_valid = 1; s_data = beat_t'(h); s_last = (pbeats == 0);
    do @(posedge clk); while (!s_ready);
    #1 t0 = cyc;
    for (int p = 0; p < pbeats; p++) begin
      @(negedge clk);
      for (int l = 0; l < 16; l++) b[32*l +: 32] = v[p*16 + l];
      s_valid = 1; s_data = b; s_last = (p == pbeats - 1);
      do @(posedge clk); while (!s_ready);
    end
    @(negedge clk); s_valid = 0; s_last = 0;
    // collect
    guard = 0;
    while (!m_valid && guard < 100000) begin @(posedge clk); #1; guard++; end
    lat = cyc - t0;
    check(lat == ((pbeats == 0) ? 0 : pbeats + 17), $sformatf("latency %0d for %0d beats", lat, pbeats));
    for (int o = 0; o < obeats; o++) begin
      @(negedge clk);
      while (!m_valid) @(negedge clk);
      while ($urandom_range(0, 2) == 0) begin @(negedge clk); check(m_valid, "output held"); end
      m_ready = 1'b1;
      #1;
      check(m_last == (o == obeats - 1), "last flag");
      if (m_last) begin
        check(meta_valid && meta_data == 32'(4 * n), $sformatf("meta %0d for %0d bytes", meta_data, nbytes));
      end else check(!meta_valid, "no meta before last beat");
      for (int l = 0; l < 16; l++) begin
        idx = o * 16 + l;
        if (idx >= n) check(m_data[32*l +: 32] == 32'd0, "lane past end is zero");
        else begin
          got_v = f2r(m_data[32*l +: 32]);
          ref_v = (rng == 0.0) ? 0.0 : (f2r(v[idx]) - mn) / rng;
          err = got_v - ref_v; if (err < 0) err = -err;
          check(err <= 1.0e-5, $sformatf("element %0d: got %f want %f", idx, got_v, ref_v));
          if (f2r(v[idx]) == mn) check(m_data[32*l +: 32] == FP_ZERO, "minimum maps to 0.0");
          if (f2r(v[idx]) == mx && rng != 0.0) check(m_data[32*l +: 32] == FP_ONE, "maximum maps to 1.0");
        end
      end
      @(posedge clk);
      #1 m_ready = 1'b0;
    end
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; m_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1024, 0);          // single 1 KB fragment
    run(64, 0);
    run(4, 0);             // one element: range 0
    run(100, 0);           // ends mid-beat
    run(4096, 0);
    run(256, 1);           // all equal
    run(0, 0);             // empty
    run(32768, 0);         // largest block
    for (int i = 0; i < 5; i++) run(4 * $urandom_range(2, 600), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
