// sorting_unit -- orders the Gaussians of one sub-tile list by depth, near to far, and
// streams their features from the feature buffer to the CTU (Fig. 5, "Sorting Unit").
//
// Sorting happens while the list is being written: every Gaussian written to the
// feature buffer (at address count) is inserted, with its FP16 depth as key, into a
// register array of (key, address) pairs kept in ascending order. Insertion takes one
// cycle: slot i compares its key with the new one, and every slot holding a larger key
// takes its left neighbour's entry, the first of them taking the new one. Equal keys keep
// their arrival order. Positive FP16 numbers order like their bit patterns, so the
// comparison is an unsigned one. A Gaussian arriving when the list is full is dropped
// and overflow is set.
// After start, the unit reads the buffer in sorted order (one read per cycle, one cycle
// read latency) through a small prefetch FIFO and offers the features on out_*. stop_early
// (the sub-tile's pixels are all finished) stops further reads. done rises when the
// stream has ended and stays high until clear. The paper names the unit and its job;
// the insertion-sort structure is this design's choice.
module sorting_unit
  import flicker_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  // insertion side (shared with the feature buffer write)
  input  logic                     ins_valid,
  input  fp16_t                    ins_key,
  output logic                     ins_accept,    // buffer write enable
  output logic [$clog2(DEPTH)-1:0] ins_addr,      // buffer write address
  output logic                     overflow,
  output logic [$clog2(DEPTH+1)-1:0] count,
  // streaming side
  input  logic                     start,
  input  logic                     stop_early,
  output logic                     buf_re,
  output logic [$clog2(DEPTH)-1:0] buf_raddr,
  input  feat_t                    buf_rdata,
  output logic                     out_valid,
  input  logic                     out_ready,
  output feat_t                    out_feat,
  output logic                     done
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef struct packed {
    fp16_t         key;
    logic [AW-1:0] addr;
  } entry_t;

  entry_t        list [DEPTH];
  logic [DEPTH-1:0] gt;   // slot holds a key larger than the new one (empty slots count as larger)

  assign ins_accept = ins_valid && (32'(count) < DEPTH);
  assign ins_addr   = AW'(count);

  always_comb begin
    for (int i = 0; i < DEPTH; i++)
      gt[i] = (CW'(i) >= count) || (list[i].key > ins_key);
  end

  always_ff @(posedge clk) begin
    if (ins_accept) begin
      for (int i = 0; i < DEPTH; i++) begin
        if (gt[i]) begin
          if (i > 0 && gt[i-1]) list[i] <= list[i-1];
          else                  list[i] <= '{key: ins_key, addr: AW'(count)};
        end
      end
    end
  end

  // ---- streaming
  logic          streaming, rd_pending;
  logic [CW-1:0] rd_ptr;
  logic [2:0]    pf_count;
  logic          pf_empty, pf_full;

  assign buf_re    = streaming && !stop_early && (rd_ptr != count) &&
                     (32'(pf_count) + 32'(rd_pending) < 4);
  assign buf_raddr = list[rd_ptr[AW-1:0]].addr;

  sync_fifo #(.T(feat_t), .DEPTH(4)) u_prefetch (
    .clk, .rst_n, .push(rd_pending), .din(buf_rdata), .pop(out_valid && out_ready),
    .dout(out_feat), .full(pf_full), .empty(pf_empty), .count(pf_count)
  );
  assign out_valid = !pf_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count      <= '0;
      overflow   <= 1'b0;
      streaming  <= 1'b0;
      rd_pending <= 1'b0;
      rd_ptr     <= '0;
      done       <= 1'b0;
    end else if (clear) begin
      count      <= '0;
      overflow   <= 1'b0;
      streaming  <= 1'b0;
      rd_pending <= 1'b0;
      rd_ptr     <= '0;
      done       <= 1'b0;
    end else begin
      if (ins_accept)                count    <= count + 1'b1;
      if (ins_valid && !ins_accept)  overflow <= 1'b1;
      if (start) streaming <= 1'b1;
      rd_pending <= buf_re;
      if (buf_re) rd_ptr <= rd_ptr + 1'b1;
      if (streaming && (rd_ptr == count || stop_early) && !buf_re && !rd_pending && pf_empty)
        done <= 1'b1;
    end
  end

  a_no_insert_while_streaming: assert property (@(posedge clk) disable iff (!rst_n)
                                                streaming |-> !ins_valid);
  wire unused_full = pf_full;
endmodule
