// flicker_top -- contribution-aware 3D Gaussian Splatting tile renderer.
//
// Renders one 16x16-pixel tile from projected Gaussians held in DRAM. The tile is split
// into four 8x8 sub-tiles, one per lane; each lane has a feature buffer, a sorting
// unit, a CTU and a rendering core, while four preprocessing cores share the loading
// work (paper: 4 preprocessing cores, 4 sorting units, 4 CTUs, 4 rendering cores with
// 4x2 VRUs each). Testing is hierarchical: the preprocessing cores test each Gaussian
// against the sub-tiles (stage 1, AABB) and the feature buffer writer copies it into
// the lists of the sub-tiles it overlaps; each CTU tests the sorted Gaussians of its
// sub-tile against leader pixels of the four mini-tiles (stage 2, Mini-Tile CAT), and
// the rendering core renders a Gaussian only in the mini-tiles it contributes to.
//
// Operation (a sequence of this design's choosing; the paper gives the dataflow, not
// the control): a start pulse clears all state and starts the loads. Core k reads
// num[k] records from base_addr[k]. Once every core has finished and its last Gaussian
// is written, all four lanes stream their sorted lists through CTU and rendering core.
// A lane stops reading its list early when all 64 of its pixels are finished. done
// rises (and busy falls) when every lane is drained; the pixels are then read on
// rd_x/rd_y -> rd_rgb (Q.16 per channel, combinational). The DRAM controller is
// outside: each core's request/response port is a port of this module. The CAT mode is
// an input held for the whole tile; the paper suggests switching to Uniform-Sparse when
// the CTU falls behind the VRUs, but that policy is left to whoever drives mode. The
// CTU statistics count from reset, the others restart with every tile.
module flicker_top
  import flicker_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH     = 16,    // feature FIFO per mini-tile (paper)
  parameter int unsigned CTU_FIFO_DEPTH = 8,     // built-in CTU FIFO (assumed)
  parameter int unsigned BUF_DEPTH      = 1024,  // Gaussians per sub-tile list (assumed)
  parameter int unsigned ADDR_W         = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // control and configuration
  input  logic              start,
  input  logic [15:0]       tile_x,       // top-left pixel of the tile
  input  logic [15:0]       tile_y,
  input  logic [15:0]       img_w,
  input  logic [15:0]       img_h,
  input  fp16_t             znear,
  input  fp16_t             zfar,
  input  cat_mode_e         mode,
  input  logic [ADDR_W-1:0] base_addr [N_SUB],
  input  logic [31:0]       num       [N_SUB],
  output logic              busy,
  output logic              done,
  // DRAM controller ports, one per preprocessing core
  output logic              mem_req_valid [N_SUB],
  input  logic              mem_req_ready [N_SUB],
  output logic [ADDR_W-1:0] mem_req_addr  [N_SUB],
  input  logic              mem_rsp_valid [N_SUB],
  input  dram_gauss_t       mem_rsp_data  [N_SUB],
  // pixel read-out
  input  logic [3:0]        rd_x,
  input  logic [3:0]        rd_y,
  output logic [31:0]       rd_rgb [3],
  // statistics, per lane
  output logic [31:0]       st_loaded    [N_SUB],  // per preprocessing core
  output logic [31:0]       st_culled    [N_SUB],  // per preprocessing core
  output logic [N_SUB-1:0]  st_overflow,           // sub-tile list overflowed
  output logic [N_SUB-1:0]  st_early_term,         // sub-tile finished before its list ended
  output logic [31:0]       st_listed    [N_SUB],  // Gaussians in the sub-tile list
  output logic [31:0]       st_tested    [N_SUB],  // Gaussians tested by the CTU
  output logic [31:0]       st_dense     [N_SUB],
  output logic [31:0]       st_skipped   [N_SUB],  // Gaussians the CTU found contributing nowhere
  output logic [31:0]       st_fifo_push [N_SUB],  // Gaussian copies sent to mini-tile FIFOs
  output logic [31:0]       st_stall     [N_SUB],  // cycles the FIFO monitor stalled the CTU
  output logic [31:0]       st_cycles    [N_SUB],
  output logic [31:0]       st_blend     [N_SUB]
);
  localparam int unsigned AW = $clog2(BUF_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RENDER} state_e;
  state_e state;

  logic clear;
  assign clear = start && (state == S_IDLE);

  // ---------------------------------------------------------------- stage 1
  logic     pre_valid [N_SUB];
  logic     pre_ready [N_SUB];
  pre_out_t pre_data  [N_SUB];
  logic [N_SUB-1:0] pre_done, pre_valid_v, pre_ready_v;

  for (genvar k = 0; k < N_SUB; k++) begin : g_pre
    preprocessing_core #(.ADDR_W(ADDR_W)) u_pre (
      .clk, .rst_n, .start(clear), .base_addr(base_addr[k]), .num(num[k]),
      .tile_x, .tile_y, .img_w, .img_h, .znear, .zfar,
      .mem_req_valid(mem_req_valid[k]), .mem_req_ready(mem_req_ready[k]),
      .mem_req_addr(mem_req_addr[k]), .mem_rsp_valid(mem_rsp_valid[k]),
      .mem_rsp_data(mem_rsp_data[k]),
      .out_valid(pre_valid[k]), .out_ready(pre_ready[k]), .out_data(pre_data[k]),
      .done(pre_done[k]), .n_loaded(st_loaded[k]), .n_culled(st_culled[k])
    );
    assign pre_valid_v[k] = pre_valid[k];
    assign pre_ready[k]   = pre_ready_v[k];
  end

  logic [3:0] wr_en;
  feat_t      wr_feat;
  fp16_t      wr_depth;

  feature_buffer_writer #(.N(N_SUB)) u_writer (
    .clk, .rst_n, .in_valid(pre_valid_v), .in_ready(pre_ready_v), .in_data(pre_data),
    .wr_en, .wr_feat, .wr_depth
  );

  // ---------------------------------------------------------------- lanes
  logic [N_SUB-1:0] sort_done, ctu_busy, rc_idle, rc_all_done;
  logic [31:0] lane_color [N_SUB][SUB_DIM*SUB_DIM][3];
  logic start_stream;

  for (genvar s = 0; s < N_SUB; s++) begin : g_lane
    logic [15:0] sx, sy;
    assign sx = tile_x + 16'(SUB_DIM * (s % 2));
    assign sy = tile_y + 16'(SUB_DIM * (s / 2));

    logic          ins_accept, buf_re;
    logic [AW-1:0] ins_addr, buf_raddr;
    logic [$clog2(BUF_DEPTH+1)-1:0] count;
    feat_t         buf_rdata, sorted_feat;
    logic          sorted_valid, sorted_ready;

    sorting_unit #(.DEPTH(BUF_DEPTH)) u_sort (
      .clk, .rst_n, .clear,
      .ins_valid(wr_en[s]), .ins_key(wr_depth), .ins_accept, .ins_addr,
      .overflow(st_overflow[s]), .count,
      .start(start_stream), .stop_early(rc_all_done[s]),
      .buf_re, .buf_raddr, .buf_rdata,
      .out_valid(sorted_valid), .out_ready(sorted_ready), .out_feat(sorted_feat),
      .done(sort_done[s])
    );
    assign st_listed[s] = 32'(count);

    feature_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk, .we(ins_accept), .waddr(ins_addr), .wdata(wr_feat),
      .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata)
    );

    logic     ctu_valid, ctu_ready, stall;
    ctu_out_t ctu_data;
    logic [31:0] n_stall_in;

    ctu #(.FIFO_DEPTH(CTU_FIFO_DEPTH)) u_ctu (
      .clk, .rst_n, .mode, .sub_x(sx), .sub_y(sy), .img_w, .img_h,
      .in_valid(sorted_valid), .in_ready(sorted_ready), .in_feat(sorted_feat),
      .stall, .out_valid(ctu_valid), .out_ready(ctu_ready), .out_data(ctu_data),
      .busy(ctu_busy[s]), .n_tested(st_tested[s]), .n_dense(st_dense[s]),
      .n_dropped(st_skipped[s]), .n_stall(n_stall_in)
    );

    rendering_core #(.FIFO_DEPTH(FIFO_DEPTH)) u_rc (
      .clk, .rst_n, .clear, .count_en(state == S_RENDER), .sub_x(sx), .sub_y(sy),
      .in_valid(ctu_valid), .in_ready(ctu_ready), .in_data(ctu_data), .stall,
      .color(lane_color[s]), .all_done(rc_all_done[s]), .idle(rc_idle[s]),
      .stall_cycles(st_stall[s]), .cycles(st_cycles[s]), .n_blend(st_blend[s]),
      .n_fifo_push(st_fifo_push[s])
    );

    // Early termination: the sub-tile finished while part of its list was unread.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     st_early_term[s] <= 1'b0;
      else if (clear) st_early_term[s] <= 1'b0;
      else if (state == S_RENDER && rc_all_done[s] && !sort_done[s] && sorted_valid)
        st_early_term[s] <= 1'b1;
    end
    wire unused_stall_in = ^n_stall_in;
  end

  // ---------------------------------------------------------------- control
  logic lanes_drained;
  assign lanes_drained = (&sort_done) && !(|ctu_busy) && (&rc_idle);
  assign start_stream  = (state == S_LOAD) && (&pre_done) && !(|pre_valid_v) &&
                         !clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:   if (start) begin state <= S_LOAD; done <= 1'b0; end
        S_LOAD:   if (start_stream) state <= S_RENDER;
        S_RENDER: if (lanes_drained && !start_stream) begin state <= S_IDLE; done <= 1'b1; end
        default:  state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- read-out
  always_comb begin
    int unsigned lane, pix;
    lane = (int'(rd_y) / SUB_DIM) * 2 + int'(rd_x) / SUB_DIM;
    pix  = (int'(rd_y) % SUB_DIM) * SUB_DIM + int'(rd_x) % SUB_DIM;
    for (int c = 0; c < 3; c++) rd_rgb[c] = lane_color[lane][pix][c];
  end
endmodule
