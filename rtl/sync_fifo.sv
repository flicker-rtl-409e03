// sync_fifo -- single-clock first-in first-out buffer.
//
// Used for the per-mini-tile feature FIFOs of the rendering core (depth 16, the depth
// the paper selects after its FIFO-depth sweep), for the small FIFO built into the CTU
// that catches in-flight results during a stall, and as a prefetch buffer in the sorting
// unit and load unit. Storage is a register array with a read pointer; the head entry
// is visible on dout whenever empty is low (show-ahead), so pop takes effect at the
// next clock edge. Push and pop may happen in the same cycle, also when full if a pop
// frees the slot. Pushing into a full FIFO or popping an empty one is a protocol error
// and is flagged by assertions. The structure is this design's choice; the paper gives
// only the FIFOs' role and depth.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  T                           din,
  input  logic                       pop,
  output T                           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  wire do_push = push && (!full || pop);
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  // Handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
