// commit_fifo: first-word-fall-through FIFO whose written words become
// readable only when committed. It is the storage of the reassembly buffers,
// the single-fragment buffer and the accelerator queues.
//
// How it works: three pointers walk a RAM of DEPTH words. wr_ptr advances on
// every write; cmt_ptr jumps to wr_ptr on commit; rd_ptr advances as words are
// read. The reader sees only words between rd_ptr and cmt_ptr, so a request
// that is still being reassembled is invisible downstream. rollback moves
// wr_ptr back to cmt_ptr, discarding a partial request (garbage collection
// when its connection closes). The RAM is read synchronously (block-RAM
// style) into an output register that acts as the FWFT head, which sustains
// one word per cycle.
//
// Interface and timing: wr_en writes wr_data this cycle; commit in the same
// cycle as a write includes that word. rollback in the same cycle as wr_en
// drops that word too. A committed word is visible on out_* two cycles after
// the commit. free counts unwritten space (uncommitted words occupy space).
// Writing into a full FIFO is an error, checked by an assertion; callers
// reserve space before writing.
module commit_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [W-1:0]           wr_data,
  input  logic                   commit,
  input  logic                   rollback,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH):0] free,
  output logic [$clog2(DEPTH):0] readable
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  logic [W-1:0] mem [DEPTH];
  ptr_t wr_ptr, cmt_ptr, rd_ptr;
  logic rd_issue;

  // Words committed but not yet moved into the output register.
  assign readable = cmt_ptr - rd_ptr;
  assign free     = ptr_t'(DEPTH) - (wr_ptr - rd_ptr);
  assign rd_issue = (readable != '0) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (wr_en && !rollback) mem[wr_ptr[AW-1:0]] <= wr_data;
    if (rd_issue) out_data <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      cmt_ptr   <= '0;
      rd_ptr    <= '0;
      out_valid <= 1'b0;
    end else begin
      if (rollback) begin
        wr_ptr <= cmt_ptr;
      end else begin
        if (wr_en)          wr_ptr  <= wr_ptr + 1'b1;
        if (commit && wr_en) cmt_ptr <= wr_ptr + 1'b1;
        else if (commit)     cmt_ptr <= wr_ptr;
      end
      if (rd_issue) rd_ptr <= rd_ptr + 1'b1;
      if (rd_issue)       out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en && !rollback |-> free != '0);

endmodule
