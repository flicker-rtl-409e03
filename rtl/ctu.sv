// ctu -- Contribution-aware Test Unit: applies the Mini-Tile CAT to every sorted
// Gaussian of one 8x8 sub-tile and tags it with the mini-tiles it contributes to.
//
// Structure (paper, Fig. 7(a)): a controller that picks the sampling of each Gaussian
// from its spiky flag and the mode, a pixel-coordinate register file that forms the
// pixel rectangles, the ln unit for the shared threshold ln(255*o), two PRTUs, a mask
// merge unit, and a small output FIFO. Two PRs (eight leader pixels) are tested per
// cycle. Sparse sampling (two diagonal leader pixels per mini-tile, top-left and
// bottom-right) needs one cycle per Gaussian; dense sampling (four corners per
// mini-tile) needs two, the first batch's mask being kept in the merge unit.
// Which Gaussians get dense sampling depends on mode (paper, Sec. III-A):
// Smooth-Focused gives smooth ones dense sampling, Spiky-Focused spiky ones, and the
// two uniform modes apply one sampling to all.
//
// Stall handling (paper, Sec. IV-B): when the rendering core reports a full feature
// FIFO (stall), intake stops while the pipeline keeps running; its results are caught
// in the built-in FIFO. This design additionally stops intake while the FIFO's free
// space would not cover everything in flight, so that no result can be lost however
// long a stall lasts (the paper says only that no data is lost). Gaussians whose mask
// is all zero are dropped here; the rest are offered on out_*.
// A leader pixel outside the image (x >= img_w or y >= img_h) is masked off.
//
// Interface: valid/ready in, valid/ready out, stall level input. Latency from intake
// to the FIFO: 4 cycles sparse, 5 dense; throughput 1 or 1/2 Gaussian per cycle.
module ctu
  import flicker_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8   // built-in CTU FIFO (size not given)
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  cat_mode_e   mode,
  input  logic [15:0] sub_x,      // pixel coordinate of the sub-tile's top-left pixel
  input  logic [15:0] sub_y,
  input  logic [15:0] img_w,
  input  logic [15:0] img_h,
  // sorted Gaussians in
  input  logic        in_valid,
  output logic        in_ready,
  input  feat_t       in_feat,
  // from the FIFO monitor
  input  logic        stall,
  // tested Gaussians out
  output logic        out_valid,
  input  logic        out_ready,
  output ctu_out_t    out_data,
  // status
  output logic        busy,
  output logic [31:0] n_tested,   // Gaussians taken in
  output logic [31:0] n_dense,    // of which with dense sampling
  output logic [31:0] n_dropped,  // of which contributing to no mini-tile
  output logic [31:0] n_stall     // cycles intake was refused because of stall
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------------------------------------------------------- controller
  logic        second_pending;
  feat_t       held;
  logic [CW-1:0] fifo_count;
  logic [3:0]  inflight;
  logic        fifo_full, fifo_empty;

  function automatic logic wants_dense(input cat_mode_e m, input logic spiky);
    unique case (m)
      MODE_SMOOTH_FOCUSED: return !spiky;
      MODE_SPIKY_FOCUSED:  return spiky;
      MODE_UNIFORM_DENSE:  return 1'b1;
      default:             return 1'b0;
    endcase
  endfunction

  logic room;
  assign room     = (32'(fifo_count) + 32'(inflight)) < FIFO_DEPTH;
  assign in_ready = !second_pending && !stall && room;

  wire   accept   = in_valid && in_ready;
  logic  issue;
  feat_t issue_feat;
  batch_e issue_kind;
  always_comb begin
    issue      = second_pending || accept;
    issue_feat = second_pending ? held : in_feat;
    if (second_pending)                          issue_kind = BATCH_DENSE_SECOND;
    else if (wants_dense(mode, in_feat.spiky))   issue_kind = BATCH_DENSE_FIRST;
    else                                         issue_kind = BATCH_SPARSE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second_pending <= 1'b0;
      held           <= '0;
    end else begin
      if (second_pending) second_pending <= 1'b0;
      else if (accept && issue_kind == BATCH_DENSE_FIRST) begin
        second_pending <= 1'b1;
        held           <= in_feat;
      end
    end
  end

  // ---------------------------------------------------------------- pixel coordinates
  // Leader pixel rectangles, offsets from the sub-tile origin:
  //   sparse: A = {(0,0),(4,0),(0,4),(4,4)}  B = {(3,3),(7,3),(3,7),(7,7)}
  //   dense batch b: A = corners of mini-tile 2b, B = corners of mini-tile 2b+1
  logic [15:0] a_tx, a_ty, a_bx, a_by, b_tx, b_ty, b_bx, b_by;
  always_comb begin
    unique case (issue_kind)
      BATCH_SPARSE: begin
        a_tx = sub_x;      a_ty = sub_y;      a_bx = sub_x + 16'd4; a_by = sub_y + 16'd4;
        b_tx = sub_x + 16'd3; b_ty = sub_y + 16'd3; b_bx = sub_x + 16'd7; b_by = sub_y + 16'd7;
      end
      BATCH_DENSE_FIRST: begin
        a_tx = sub_x;      a_ty = sub_y;      a_bx = sub_x + 16'd3; a_by = sub_y + 16'd3;
        b_tx = sub_x + 16'd4; b_ty = sub_y;   b_bx = sub_x + 16'd7; b_by = sub_y + 16'd3;
      end
      default: begin
        a_tx = sub_x;      a_ty = sub_y + 16'd4; a_bx = sub_x + 16'd3; a_by = sub_y + 16'd7;
        b_tx = sub_x + 16'd4; b_ty = sub_y + 16'd4; b_bx = sub_x + 16'd7; b_by = sub_y + 16'd7;
      end
    endcase
  end

  function automatic logic [3:0] pr_valid(input logic [15:0] tx, input logic [15:0] ty,
                                          input logic [15:0] bx, input logic [15:0] by,
                                          input logic [15:0] w,  input logic [15:0] h);
    return {(bx < w) && (by < h), (tx < w) && (by < h), (bx < w) && (ty < h), (tx < w) && (ty < h)};
  endfunction

  // ---------------------------------------------------------------- datapath
  logic ln_valid;
  acc_t ln_term;
  ln_unit u_ln (
    .clk, .rst_n, .in_valid(issue), .opacity(issue_feat.opacity),
    .out_valid(ln_valid), .ln_term
  );

  logic       a_valid, b_valid;
  logic [3:0] a_pass, b_pass;
  acc_t       a_e [4];
  acc_t       b_e [4];

  prtu u_prtu_a (
    .clk, .rst_n, .in_valid(issue),
    .mean_x(issue_feat.mean_x), .mean_y(issue_feat.mean_y),
    .conic_xx(issue_feat.conic_xx), .conic_xy(issue_feat.conic_xy), .conic_yy(issue_feat.conic_yy),
    .top_x(int_to_fp16(a_tx)), .top_y(int_to_fp16(a_ty)),
    .bot_x(int_to_fp16(a_bx)), .bot_y(int_to_fp16(a_by)),
    .pix_valid(pr_valid(a_tx, a_ty, a_bx, a_by, img_w, img_h)),
    .ln_term, .out_valid(a_valid), .pass(a_pass), .e(a_e)
  );
  prtu u_prtu_b (
    .clk, .rst_n, .in_valid(issue),
    .mean_x(issue_feat.mean_x), .mean_y(issue_feat.mean_y),
    .conic_xx(issue_feat.conic_xx), .conic_xy(issue_feat.conic_xy), .conic_yy(issue_feat.conic_yy),
    .top_x(int_to_fp16(b_tx)), .top_y(int_to_fp16(b_ty)),
    .bot_x(int_to_fp16(b_bx)), .bot_y(int_to_fp16(b_by)),
    .pix_valid(pr_valid(b_tx, b_ty, b_bx, b_by, img_w, img_h)),
    .ln_term, .out_valid(b_valid), .pass(b_pass), .e(b_e)
  );

  // Kind and payload follow the PRTU pipeline (3 stages) and the MMU (1 stage).
  batch_e kind_pipe [3];
  feat_t  feat_pipe [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) kind_pipe[i] <= BATCH_SPARSE;
      for (int i = 0; i < 4; i++) feat_pipe[i] <= '0;
    end else begin
      kind_pipe[0] <= issue_kind;
      kind_pipe[1] <= kind_pipe[0];
      kind_pipe[2] <= kind_pipe[1];
      feat_pipe[0] <= issue_feat;
      for (int i = 1; i < 4; i++) feat_pipe[i] <= feat_pipe[i-1];
    end
  end

  logic       mmu_valid;
  logic [3:0] mmu_mask;
  mask_merge_unit u_mmu (
    .clk, .rst_n, .in_valid(a_valid && b_valid), .kind(kind_pipe[2]),
    .pr_a(a_pass), .pr_b(b_pass), .out_valid(mmu_valid), .mask(mmu_mask)
  );

  // ---------------------------------------------------------------- built-in FIFO
  ctu_out_t fifo_din;
  assign fifo_din = '{feat: feat_pipe[3], mask: mmu_mask};
  wire push = mmu_valid && (mmu_mask != 4'd0);
  wire pop  = out_valid && out_ready;

  sync_fifo #(.T(ctu_out_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din(fifo_din), .pop, .dout(out_data),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );
  assign out_valid = !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight  <= '0;
      n_tested  <= '0;
      n_dense   <= '0;
      n_dropped <= '0;
      n_stall   <= '0;
    end else begin
      inflight <= inflight + 4'(accept) - 4'(mmu_valid);
      if (accept) n_tested <= n_tested + 1;
      if (accept && issue_kind == BATCH_DENSE_FIRST) n_dense <= n_dense + 1;
      if (mmu_valid && mmu_mask == 4'd0) n_dropped <= n_dropped + 1;
      if (in_valid && stall && !second_pending) n_stall <= n_stall + 1;
    end
  end

  assign busy = second_pending || (inflight != 0) || !fifo_empty;

  // The FIFO never overflows: intake reserved a slot for every result in flight.
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) push |-> (!fifo_full || pop));
  a_ln_aligned: assert property (@(posedge clk) disable iff (!rst_n) a_valid |-> $past(ln_valid));
endmodule
