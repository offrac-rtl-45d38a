// small_fifo: shallow register-based FIFO with first-word fall-through, used
// for request descriptors and drop notifications.
//
// Interface and timing: push writes din this cycle; the head is on dout with
// valid whenever the FIFO is not empty; pop removes the head. push and pop may
// happen together, also when full (the pop frees the slot). full and count
// reflect the state before this cycle's push and pop.
module small_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [W-1:0]           din,
  input  logic                   pop,
  output logic                   valid,
  output logic [W-1:0]           dout,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign valid   = (count != '0);
  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign dout    = mem[rp];
  assign do_pop  = pop && valid;
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  a_no_lost_push: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> do_push);

endmodule
