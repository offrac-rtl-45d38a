// tb_logit_accel: self-checking test of the logit-transform accelerator.
// Sends blocks of binary32 probabilities (uniform in (0, 1), values very
// close to 0 and 1, and the out-of-range values 0, 1, -0.5 and 1.5), of
// sizes from one element to a 32 KB block and ending mid-beat, and compares
// each result with ln(p / (1 - p)) computed in double precision in the
// testbench: finite results within 2e-5 (plus 1e-5 relative) of the
// reference, out-of-range inputs giving the matching infinity, lanes past
// the last element zero, one response beat per payload beat and 4 bytes per
// element on the metadata stream. The time from taking a payload beat to
// its response is checked against 55 cycles. Output back-pressure is random.
module tb_logit_accel;
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

  logit_accel dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

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

  function automatic logic [31:0] rand_p();
    case ($urandom_range(0, 19))
      0:       return r2f(real'($urandom_range(1, 1000)) * 1.0e-9);          // near 0
      1:       return r2f(1.0 - real'($urandom_range(1, 1000)) * 1.0e-6);    // near 1
      2:       return 32'h0000_0000;                                         // 0
      3:       return FP_ONE;                                                // 1
      4:       return r2f(-0.5);
      5:       return r2f(1.5);
      default: return r2f(real'($urandom_range(1, 999999)) / 1000000.0);
    endcase
  endfunction

  task automatic run(input int nbytes);
    int n = nbytes / 4;
    int pbeats = (nbytes + 63) / 64;
    int obeats = (pbeats == 0) ? 1 : pbeats;
    logic [31:0] v [$];
    real p, ref_v, got_v, err, tol;
    int t_in, idx;
    req_hdr_t h;
    beat_t b;
    for (int i = 0; i < pbeats * 16; i++) v.push_back(rand_p());
    h = '0; h.accel = ACC_LOGIT; h.size = 16'(nbytes);
    @(negedge clk);
    s_valid = 1; s_data = beat_t'(h); s_last = (pbeats == 0);
    do @(posedge clk); while (!s_ready);
    for (int o = 0; o < obeats; o++) begin
      if (pbeats != 0) begin
        @(negedge clk);
        for (int l = 0; l < 16; l++) b[32*l +: 32] = v[o*16 + l];
        s_valid = 1; s_data = b; s_last = (o == pbeats - 1);
        do @(posedge clk); while (!s_ready);
        #1 t_in = cyc;
      end
      @(negedge clk); s_valid = 0; s_last = 0;
      while (!m_valid) @(negedge clk);
      if (pbeats != 0) check(cyc - t_in == 55, $sformatf("beat latency %0d", cyc - t_in));
      while ($urandom_range(0, 2) == 0) begin @(negedge clk); check(m_valid, "output held"); end
      m_ready = 1'b1;
      #1;
      check(m_last == (o == obeats - 1), "last flag");
      if (m_last) check(meta_valid && meta_data == 32'(4 * n), $sformatf("meta %0d for %0d bytes", meta_data, nbytes));
      else        check(!meta_valid, "no meta before last beat");
      for (int l = 0; l < 16; l++) begin
        idx = o * 16 + l;
        if (idx >= n) check(m_data[32*l +: 32] == 32'd0, "lane past end is zero");
        else begin
          p = f2r(v[idx]);
          if (p <= 0.0)      check(m_data[32*l +: 32] == FP_NEG_INF, $sformatf("p=%g gives -inf", p));
          else if (p >= 1.0) check(m_data[32*l +: 32] == FP_POS_INF, $sformatf("p=%g gives +inf", p));
          else begin
            ref_v = $ln(p / (1.0 - p));
            got_v = f2r(m_data[32*l +: 32]);
            err = got_v - ref_v; if (err < 0) err = -err;
            tol = 2.0e-5 + 1.0e-5 * ((ref_v < 0) ? -ref_v : ref_v);
            check(err <= tol, $sformatf("p=%g: got %f want %f", p, got_v, ref_v));
          end
        end
      end
      @(posedge clk);
      #1 m_ready = 1'b0;
    end
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; m_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1024);
    run(64);
    run(4);
    run(100);              // ends mid-beat
    run(0);                // empty
    run(4096);
    run(32768);
    for (int i = 0; i < 4; i++) run(4 * $urandom_range(1, 300));
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
