// tb_reassembly_buffer: self-checking test of one reassembly buffer.
// Checks eligibility (busy, space), hiding of partial requests, commit with
// the right descriptor, data order on read-out, rollback when the connection
// closes, and a header-only request. Runs with a 64-beat buffer.
module tb_reassembly_buffer;
  import offrac_pkg::*;

  localparam int unsigned DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic busy, eligible, wr_valid, wr_first, close_valid, desc_valid, desc_pop;
  logic rd_valid, rd_ready;
  conn_t cur_conn, wr_conn, close_conn;
  beats_t new_beats;
  beat_t wr_data, rd_data;
  req_desc_t desc;
  logic [$clog2(DEPTH):0] free_beats;

  int checks = 0, failures = 0;

  reassembly_buffer #(.DEPTH_BEATS(DEPTH), .DESC_DEPTH(4)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic beat_t mk_hdr(input acc_t a, input logic [15:0] size);
    req_hdr_t h;
    h = '0; h.accel = a; h.size = size; h.params = 480'hABCD;
    return beat_t'(h);
  endfunction

  function automatic beat_t pat(input int r, input int i);
    return {16{32'(r * 1000 + i)}};
  endfunction

  task automatic write(input beat_t d, input logic first, input conn_t c);
    @(negedge clk);
    wr_valid = 1; wr_first = first; wr_data = d; wr_conn = c;
    @(negedge clk);
    wr_valid = 0; wr_first = 0;
  endtask

  // Read one whole request and compare against the pattern.
  task automatic read_req(input int r, input int n, input beat_t hdr);
    int got = 0;
    int guard = 0;
    rd_ready = 1;
    while (got < n && guard < 200) begin
      @(posedge clk);
      if (rd_valid) begin
        check(rd_data == ((got == 0) ? hdr : pat(r, got)), $sformatf("req %0d beat %0d data", r, got));
        got++;
      end
      guard++;
    end
    check(got == n, $sformatf("req %0d beats read %0d", r, got));
    @(negedge clk);
    rd_ready = 0;
  endtask

  initial begin
    wr_valid = 0; wr_first = 0; wr_data = '0; wr_conn = '0;
    close_valid = 0; close_conn = '0; desc_pop = 0; rd_ready = 0;
    new_beats = beats_t'(5);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Empty buffer: eligible for what fits, not for what does not.
    check(eligible && !busy, "idle buffer eligible");
    new_beats = beats_t'(64); #1 check(eligible, "eligible for exactly the free space");
    new_beats = beats_t'(65); #1 check(!eligible, "not eligible when request larger than buffer");
    new_beats = beats_t'(5);

    // Request 1: 200 payload bytes -> 1 + 4 beats, conn 7.
    write(mk_hdr(ACC_TOPK, 16'd200), 1, 32'd7);
    check(busy && cur_conn == 32'd7, "busy with conn 7 after first beat");
    check(!eligible, "busy buffer is not eligible");
    for (int i = 1; i < 4; i++) write(pat(1, i), 0, 32'd7);
    repeat (3) @(negedge clk);
    check(!desc_valid && !rd_valid, "partial request hidden from reader");
    write(pat(1, 4), 0, 32'd7);
    check(!busy, "not busy after last beat");
    check(desc_valid && desc.beats == beats_t'(5) && desc.conn == 32'd7 && desc.accel == ACC_TOPK,
          "descriptor of request 1");
    check(eligible, "eligible again with one complete request held");
    check(free_beats == 7'(DEPTH - 5), "free space after request 1");
    read_req(1, 5, mk_hdr(ACC_TOPK, 16'd200));
    @(negedge clk); desc_pop = 1; @(negedge clk); desc_pop = 0;
    check(!desc_valid, "descriptor popped");
    check(free_beats == 7'(DEPTH), "space returned after read");

    // Request 2 is rolled back when its connection closes.
    write(mk_hdr(ACC_ECHO, 16'd128), 1, 32'd9);
    write(pat(2, 1), 0, 32'd9);
    check(free_beats == 7'(DEPTH - 2), "two beats reserved");
    @(negedge clk); close_valid = 1; close_conn = 32'd8; @(negedge clk); close_valid = 0;
    check(busy, "close of another connection ignored");
    @(negedge clk); close_valid = 1; close_conn = 32'd9; @(negedge clk); close_valid = 0;
    check(!busy && free_beats == 7'(DEPTH), "partial request garbage collected");
    repeat (3) @(negedge clk);
    check(!desc_valid && !rd_valid, "nothing visible after rollback");

    // Request 3: header only.
    write(mk_hdr(ACC_ECHO, 16'd0), 1, 32'd3);
    check(!busy && desc_valid && desc.beats == beats_t'(1) && desc.conn == 32'd3, "header-only request");
    read_req(3, 1, mk_hdr(ACC_ECHO, 16'd0));
    @(negedge clk); desc_pop = 1; @(negedge clk); desc_pop = 0;

    // Space: fill 60 beats (request of 59*64 payload bytes), then 5 beats no longer fit.
    write(mk_hdr(ACC_ECHO, 16'(59 * 64)), 1, 32'd4);
    for (int i = 1; i < 60; i++) write(pat(4, i), 0, 32'd4);
    check(desc_valid && desc.beats == beats_t'(60), "large request complete");
    new_beats = beats_t'(5); #1 check(!eligible, "not eligible without room");
    new_beats = beats_t'(4); #1 check(eligible, "eligible when request fits remaining space");
    read_req(4, 60, mk_hdr(ACC_ECHO, 16'(59 * 64)));

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
