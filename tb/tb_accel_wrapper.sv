// tb_accel_wrapper: self-checking test of the slot wrapper. A testbench
// accelerator model counts the input beats of a request and, ten cycles
// after its last beat, answers with two beats and a size on the metadata
// stream. Checks that every request reaches the accelerator whole, that the
// next request is held back until the current response has left
// (run-to-completion), and that responses carry the right connection ID and
// size.
module tb_accel_wrapper;
  import offrac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic q_valid, q_ready, q_last, s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  logic meta_valid, meta_ready, rsp_valid, rsp_ready, rsp_last, busy;
  beat_t q_data, s_data, m_data, rsp_data;
  conn_t q_conn, rsp_conn;
  logic [META_W-1:0] meta_data, rsp_bytes;
  int checks = 0, failures = 0;

  accel_wrapper dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Accelerator model.
  int in_cnt = 0, wait_cnt = 0, out_idx = 0, reqs_in = 0;
  logic running = 0, replying = 0;
  // Always ready: the wrapper alone must hold the next request back.
  assign s_ready    = 1'b1;
  assign m_valid    = replying;
  assign m_last     = (out_idx == 1);
  assign m_data     = {16{32'(in_cnt * 10 + out_idx)}};
  assign meta_valid = replying && m_last;
  assign meta_data  = 32'(in_cnt * 64);
  always @(posedge clk) begin
    if (rst_n && s_valid && s_ready) begin
      in_cnt <= in_cnt + 1;
      if (s_last) begin running <= 1; wait_cnt <= 10; reqs_in++; end
    end
    if (running && !replying) begin
      if (wait_cnt == 0) replying <= 1; else wait_cnt <= wait_cnt - 1;
    end
    if (replying && m_ready) begin
      if (m_last) begin replying <= 0; running <= 0; out_idx <= 0; in_cnt <= 0; end
      else out_idx <= out_idx + 1;
    end
  end

  // Queue model: request r has r+1 beats, connection 100+r.
  int qr = 0, qb = 0;
  assign q_valid = (qr < 4);
  assign q_last  = (qb == qr);
  assign q_data  = {16{32'(qb)}};
  assign q_conn  = conn_t'(100 + qr);
  always @(posedge clk)
    if (rst_n && q_valid && q_ready) begin
      if (q_last) begin qr <= qr + 1; qb <= 0; end else qb <= qb + 1;
    end

  // Response monitor.
  int rsp_n = 0, rsp_beats = 0;
  logic overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready && (running || replying)) overlap = 1;
    if (rsp_valid && rsp_ready) begin
      check(rsp_conn == conn_t'(100 + rsp_n), $sformatf("response %0d connection", rsp_n));
      check(rsp_data == {16{32'((rsp_n + 1) * 10 + rsp_beats)}}, $sformatf("response %0d data", rsp_n));
      rsp_beats++;
      if (rsp_last) begin
        check(rsp_bytes == 32'((rsp_n + 1) * 64), $sformatf("response %0d size", rsp_n));
        check(rsp_beats == 2, "two response beats");
        rsp_n++; rsp_beats = 0;
      end
    end
  end

  initial begin
    rsp_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // Stall the response path for a while mid-run.
    repeat (30) @(negedge clk);
    rsp_ready = 0;
    repeat (15) @(negedge clk);
    rsp_ready = 1;
    wait (rsp_n == 4);
    repeat (3) @(negedge clk);
    check(!overlap, "no input accepted while a request is running");
    check(reqs_in == 4 && !busy, "four requests executed, wrapper idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
