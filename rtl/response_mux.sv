// response_mux: merges the response streams of all accelerator slots into
// the one response stream handed back to the transport layer.
//
// How it works: a round-robin arbiter grants one slot at a time and keeps
// the grant until that slot's last response beat has been accepted, so the
// beats of one response are never interleaved with another's. The next
// grant goes to the first requesting slot after the one just served.
// The source shows only that responses of all slots return to the network
// stack; the arbitration scheme is this design's choice.
//
// Interface and timing: in_* are per-slot streams (data, last, connection,
// response size on the last beat); out_* is the merged stream. Grant
// selection is combinational when no response is in progress, so a waiting
// response starts in the cycle after the previous one ends, or at once if the
// mux was idle.
module response_mux
  import offrac_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  beat_t             in_data  [N],
  input  logic [N-1:0]      in_last,
  input  conn_t             in_conn  [N],
  input  logic [META_W-1:0] in_bytes [N],
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_data,
  output logic              out_last,
  output conn_t             out_conn,
  output logic [META_W-1:0] out_bytes
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] grant_q, rr_ptr, pick, sel;
  logic          any;

  always_comb begin
    any = 1'b0;  pick = '0;
    for (int k = 0; k < N; k++) begin
      automatic int unsigned j = (int'(rr_ptr) + k) % N;
      if (!any && in_valid[j]) begin
        any = 1'b1;  pick = IW'(j);
      end
    end
  end

  assign sel       = locked ? grant_q : pick;
  assign out_valid = (locked || any) && in_valid[sel];
  assign out_data  = in_data[sel];
  assign out_last  = in_last[sel];
  assign out_conn  = in_conn[sel];
  assign out_bytes = in_bytes[sel];

  always_comb begin
    in_ready = '0;
    if (locked || any) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      grant_q <= '0;
      rr_ptr  <= '0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked <= 1'b0;
        rr_ptr <= IW'((int'(sel) + 1) % N);
      end else begin
        locked  <= 1'b1;
        grant_q <= sel;
      end
    end
  end

  a_stable_grant: assert property (@(posedge clk) disable iff (!rst_n)
    locked |-> sel == grant_q);

endmodule
