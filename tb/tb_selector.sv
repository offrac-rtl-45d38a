// tb_selector: self-checking test of the Selector. Two buffers are modelled
// by the testbench as lists of complete requests. Checks type-to-slot
// mapping, round robin among slots hosting the same type, whole-request
// copying with the connection ID and last flag, back-pressure from a queue,
// and discard of requests for a type that no slot hosts.
module tb_selector;
  import offrac_pkg::*;

  localparam int unsigned NS = 2, NQ = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NS-1:0] src_desc_valid, src_desc_pop, src_rd_valid, src_rd_ready;
  req_desc_t src_desc [NS];
  beat_t src_rd_data [NS];
  acc_t slot_type [NQ];
  logic [NQ-1:0] q_valid, q_ready;
  beat_t q_data;
  logic q_last, fwd_valid, unroutable_valid;
  conn_t q_conn, unroutable_conn;
  logic [$clog2(NQ+1)-1:0] fwd_slot;
  int checks = 0, failures = 0;

  selector #(.NUM_SRC(NS), .NUM_SLOTS(NQ)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Source model: a list of requests per source (type, beats, id).
  acc_t  r_acc  [NS][$];
  int    r_len  [NS][$];
  int    r_id   [NS][$];
  int    pos    [NS];

  always_comb
    for (int s = 0; s < NS; s++) begin
      src_desc_valid[s] = (r_acc[s].size() != 0);
      src_desc[s] = '0;
      src_rd_data[s] = '0;
      src_rd_valid[s] = src_desc_valid[s];
      if (src_desc_valid[s]) begin
        src_desc[s] = '{conn: conn_t'(r_id[s][0]), accel: r_acc[s][0], beats: beats_t'(r_len[s][0])};
        src_rd_data[s] = {16{32'(r_id[s][0] * 100 + pos[s])}};
      end
    end

  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      if (src_rd_valid[s] && src_rd_ready[s]) pos[s] <= pos[s] + 1;
      if (src_desc_pop[s]) begin
        void'(r_acc[s].pop_front()); void'(r_len[s].pop_front()); void'(r_id[s].pop_front());
        pos[s] <= 0;
      end
    end
  end

  // Queue side monitor: record each request's slot, beats and data.
  int got_slot [$];
  int got_id   [$];
  int got_len  [$];
  int cur_len = 0, unrout = 0;
  logic data_ok = 1;
  always @(posedge clk) if (rst_n) begin
    if (|(q_valid & q_ready)) begin
      for (int q = 0; q < NQ; q++)
        if (q_valid[q] && q_ready[q]) begin
          if (q_data != {16{32'(int'(q_conn) * 100 + cur_len)}}) data_ok = 0;
          cur_len++;
          if (q_last) begin
            got_slot.push_back(q); got_id.push_back(int'(q_conn)); got_len.push_back(cur_len);
            cur_len = 0;
          end
        end
    end
    if (unroutable_valid) unrout++;
  end

  task automatic add(input int s, input acc_t a, input int len, input int id);
    r_acc[s].push_back(a); r_len[s].push_back(len); r_id[s].push_back(id);
  endtask

  initial begin
    pos[0] = 0; pos[1] = 0;
    slot_type[0] = ACC_TOPK; slot_type[1] = ACC_TOPK; slot_type[2] = ACC_ECHO;
    slot_type[3] = ACC_EMPTY; slot_type[4] = ACC_TOPK;
    q_ready = '1;
    repeat (3) @(negedge clk); rst_n = 1;

    add(0, ACC_TOPK, 3, 1);
    add(0, ACC_TOPK, 1, 2);
    add(0, ACC_ECHO, 4, 3);
    add(1, ACC_TOPK, 2, 4);
    add(1, 16'd7,    3, 5);   // nobody hosts type 7
    add(1, ACC_TOPK, 5, 6);
    wait (r_acc[0].size() == 0 && r_acc[1].size() == 0);
    repeat (3) @(negedge clk);
    check(data_ok, "request data copied in order with its connection");
    check(got_slot.size() == 5, $sformatf("five requests forwarded (%0d)", got_slot.size()));
    check(unrout == 1, "one unroutable request reported");
    // Sources alternate: ids 1,4,2,5(discarded),3,6
    if (got_slot.size() == 5) begin
      check(got_id[0] == 1 && got_slot[0] == 0 && got_len[0] == 3, "id1 -> slot 0");
      check(got_id[1] == 4 && got_slot[1] == 1 && got_len[1] == 2, "id4 -> slot 1 (round robin)");
      check(got_id[2] == 2 && got_slot[2] == 4 && got_len[2] == 1, "id2 -> slot 4 (round robin)");
      check(got_id[3] == 3 && got_slot[3] == 2 && got_len[3] == 4, "id3 echo -> slot 2");
      check(got_id[4] == 6 && got_slot[4] == 0 && got_len[4] == 5, "id6 wraps to slot 0");
    end

    // Back-pressure: slot 2 not ready for a while.
    q_ready = 5'b11011;
    add(0, ACC_ECHO, 4, 7);
    repeat (20) @(negedge clk);
    check(got_slot.size() == 5, "held by back-pressure");
    q_ready = '1;
    wait (r_acc[0].size() == 0);
    repeat (3) @(negedge clk);
    check(got_slot.size() == 6 && got_slot[5] == 2 && got_len[5] == 4 && data_ok, "delivered after back-pressure");

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
