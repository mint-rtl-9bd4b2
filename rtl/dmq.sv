// dmq -- Delayed Mitigation Queue.
//
// DDR5 lets the controller postpone up to four REFs, so up to 5 x 73 = 365
// ACTs can fall between two REFs. A tracker sized for one window of 73 ACTs
// would see the rest unguarded. Instead, every time the ACT count since the
// last REF passes the window size, the tracker's selection is pushed into this
// FIFO (a pseudo-mitigation). At REF the bank mitigates the oldest queued
// entry first; only when the queue is empty does the tracker's own selection
// get mitigated. Each entry is a mint_pkg::mit_req_t (row, transitive level,
// valid): 19 bits, 4 entries.
//
// Interface: `push`/`push_data` and `pop` are single-cycle strobes; `head` is
// the oldest entry (valid bit clear when empty) and is the value removed by
// `pop`. Push and pop in the same cycle are allowed. A push into a full queue
// is dropped and reported on `overflow` for one cycle: it can only happen if
// the controller postpones more REFs than DDR5 allows, and the paper does
// not say what to do then (this design keeps the older, more urgent entries).
// A pop of an empty queue does nothing.
//
// Four entries, FIFO order and "oldest first at REF" follow the paper; the
// overflow policy is this design's choice.
module dmq #(
  parameter int unsigned DEPTH = mint_pkg::DMQ_DEPTH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  mint_pkg::mit_req_t     push_data,
  input  logic                   pop,
  output mint_pkg::mit_req_t     head,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                   empty,
  output logic                   full,
  output logic                   overflow
);
  import mint_pkg::*;

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  mit_req_t          mem [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic              do_push, do_pop;

  function automatic logic [PW-1:0] ptr_inc(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    empty    = (count == '0);
    full     = (32'(count) == DEPTH);
    do_pop   = pop && !empty;
    do_push  = push && (!full || do_pop);
    overflow = push && full && !do_pop;
    head     = empty ? '0 : mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= ptr_inc(wr_ptr);
      if (do_pop)  rd_ptr <= ptr_inc(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  a_count_bounded: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH)
    else $error("dmq: occupancy beyond depth");

endmodule
