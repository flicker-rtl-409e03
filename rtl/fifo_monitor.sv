// fifo_monitor -- watches the rendering core's feature FIFOs and raises the stall
// signal to the CTU while any of them is full (Fig. 5, "Any FIFO Full?").
//
// Besides the stall level (combinational, same cycle) it counts the cycles in which a
// stall was signalled and the cycles of the current tile, from which the CTU stall rate
// the paper reports (Fig. 9) is stall_cycles / cycles. Counters clear on clear.
module fifo_monitor #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         count_en,     // count only while the tile is being rendered
  input  logic [N-1:0] fifo_full,
  output logic         stall,
  output logic [31:0]  stall_cycles,
  output logic [31:0]  cycles
);
  assign stall = |fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_cycles <= '0;
      cycles       <= '0;
    end else if (clear) begin
      stall_cycles <= '0;
      cycles       <= '0;
    end else if (count_en) begin
      cycles <= cycles + 1;
      if (stall) stall_cycles <= stall_cycles + 1;
    end
  end
endmodule
