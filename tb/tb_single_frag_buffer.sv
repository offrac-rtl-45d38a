// tb_single_frag_buffer: self-checking test of the single-fragment buffer.
// Checks commit on the fragment's last beat, descriptor contents, the cap on
// beats beyond the header's length, eligibility by space and by descriptor
// room, rollback on connection close, and read-out order. 32-beat buffer.
module tb_single_frag_buffer;
  import offrac_pkg::*;

  localparam int unsigned DEPTH = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic eligible, wr_valid, wr_first, wr_last, close_valid, desc_valid, desc_pop;
  logic rd_valid, rd_ready;
  conn_t wr_conn, close_conn;
  beats_t new_beats;
  beat_t wr_data, rd_data;
  req_desc_t desc;
  logic [$clog2(DEPTH):0] free_beats;
  int checks = 0, failures = 0;

  single_frag_buffer #(.DEPTH_BEATS(DEPTH), .DESC_DEPTH(2)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic beat_t mk_hdr(input acc_t a, input logic [15:0] size);
    req_hdr_t h;
    h = '0; h.accel = a; h.size = size;
    return beat_t'(h);
  endfunction

  function automatic beat_t pat(input int r, input int i);
    return {16{32'(r * 1000 + i)}};
  endfunction

  // Write a fragment of n beats: header then pattern beats.
  task automatic frag(input int r, input int n, input logic [15:0] size, input conn_t c);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_valid = 1; wr_first = (i == 0); wr_last = (i == n - 1); wr_conn = c;
      wr_data = (i == 0) ? mk_hdr(ACC_ECHO, size) : pat(r, i);
    end
    @(negedge clk);
    wr_valid = 0; wr_first = 0; wr_last = 0;
  endtask

  task automatic read_req(input int r, input int n, input logic [15:0] size);
    int got = 0, guard = 0;
    rd_ready = 1;
    while (got < n && guard < 200) begin
      @(posedge clk);
      if (rd_valid) begin
        check(rd_data == ((got == 0) ? mk_hdr(ACC_ECHO, size) : pat(r, got)),
              $sformatf("req %0d beat %0d", r, got));
        got++;
      end
      guard++;
    end
    @(negedge clk); rd_ready = 0;
    desc_pop = 1; @(negedge clk); desc_pop = 0;
    check(got == n, "beat count read");
  endtask

  initial begin
    wr_valid = 0; wr_first = 0; wr_last = 0; wr_data = '0; wr_conn = '0;
    close_valid = 0; close_conn = '0; desc_pop = 0; rd_ready = 0;
    new_beats = beats_t'(3);
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    check(eligible, "empty buffer eligible");
    frag(1, 3, 16'd128, 32'd11);
    check(desc_valid && desc.beats == beats_t'(3) && desc.conn == 32'd11 && desc.accel == ACC_ECHO,
          "descriptor after fragment");
    check(free_beats == 6'(DEPTH - 3), "space used by request 1");

    // Header announces 64 bytes (2 beats) but the fragment brings 4: only 2 kept.
    frag(2, 4, 16'd64, 32'd12);
    // The head beat already sits in the output register and frees its RAM word.
    check(free_beats == 6'(DEPTH - 5 + 1), $sformatf("over-long fragment capped free=%0d", free_beats));
    check(!eligible, "no descriptor room: not eligible");

    read_req(1, 3, 16'd128);
    check(eligible, "eligible after a descriptor is freed");
    read_req(2, 2, 16'd64);
    check(free_beats == 6'(DEPTH), "all space returned");

    // Closed mid-fragment: rolled back.
    @(negedge clk);
    wr_valid = 1; wr_first = 1; wr_last = 0; wr_conn = 32'd13; wr_data = mk_hdr(ACC_ECHO, 16'd192);
    @(negedge clk);
    wr_first = 0; wr_data = pat(3, 1);
    @(negedge clk);
    wr_valid = 0; close_valid = 1; close_conn = 32'd13;
    @(negedge clk);
    close_valid = 0;
    check(free_beats == 6'(DEPTH), "rolled back on close");
    repeat (3) @(negedge clk);
    check(!desc_valid && !rd_valid, "nothing visible after rollback");

    new_beats = beats_t'(32); #1 check(eligible, "eligible for the whole buffer");
    new_beats = beats_t'(33); #1 check(!eligible, "not eligible beyond capacity");

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
