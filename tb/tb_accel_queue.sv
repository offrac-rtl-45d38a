// tb_accel_queue: self-checking test of a slot's request queue. Checks the
// slot type at reset and after a configuration write, filling to full with
// in_ready falling, the level count, and read-out order with last flags and
// connection IDs under random output stalls. 16-entry queue.
module tb_accel_queue;
  import offrac_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  acc_t cfg_type, slot_type;
  beat_t in_data, out_data;
  conn_t in_conn, out_conn;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;

  accel_queue #(.DEPTH(DEPTH), .INIT_TYPE(ACC_TOPK)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int wr_n = 0, rd_n = 0;

  initial begin
    cfg_valid = 0; cfg_type = '0; in_valid = 0; in_last = 0; in_data = '0; in_conn = '0;
    out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(slot_type == ACC_TOPK, "type after reset");
    cfg_valid = 1; cfg_type = ACC_ECHO; @(negedge clk); cfg_valid = 0;
    check(slot_type == ACC_ECHO, "type after configuration");

    // Fill without reading: DEPTH words in RAM plus one in the output register.
    while (in_ready) begin
      in_valid = 1; in_data = {16{32'(wr_n)}}; in_last = (wr_n % 3 == 2); in_conn = conn_t'(wr_n / 3);
      @(negedge clk);
      if (in_valid) wr_n++;
    end
    in_valid = 0;
    check(wr_n == DEPTH + 1, $sformatf("accepted %0d beats before full", wr_n));
    check(level == 5'(DEPTH), "level at full");

    // Drain with random stalls while writing more.
    fork
      begin
        for (int k = 0; k < 20; k++) begin
          @(negedge clk);
          in_valid = 1; in_data = {16{32'(wr_n)}}; in_last = (wr_n % 3 == 2); in_conn = conn_t'(wr_n / 3);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          wr_n++;
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        while (rd_n < DEPTH + 21) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            check(out_data == {16{32'(rd_n)}} && out_last == (rd_n % 3 == 2) && out_conn == conn_t'(rd_n / 3),
                  $sformatf("beat %0d", rd_n));
            rd_n++;
          end
        end
      end
    join
    @(negedge clk);
    check(!out_valid && level == '0, "empty at the end");

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
