// rendering_core -- renders one 8x8 sub-tile: mini-tile demux, four feature FIFOs,
// a FIFO monitor and eight VRUs (paper, Sec. IV-B and Fig. 5).
//
// Each of the four channels serves one 4x4 mini-tile: a feature FIFO (depth 16, the
// paper's choice) feeds a pair of VRUs, the first rendering the mini-tile's top two
// rows and the second its bottom two rows; the Gaussian reaches the second VRU through
// the first one's forward register. The demux writes each Gaussian coming from the CTU
// into the FIFOs its mini-tile mask selects. While any FIFO is full the monitor raises
// stall to the CTU. Mini-tiles are numbered row-major (0 top-left ... 3 bottom-right).
//
// Interface: valid/ready input from the CTU; stall output to the CTU; clear (one cycle)
// starts a tile. Pixel results: color[y*8+x][c] in Q.16, and all_done when every
// pixel's transmittance has fallen below the termination threshold (sub-tile early
// termination). idle is high when nothing is stored or being rendered.
module rendering_core
  import flicker_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        count_en,
  input  logic [15:0] sub_x,
  input  logic [15:0] sub_y,
  input  logic        in_valid,
  output logic        in_ready,
  input  ctu_out_t    in_data,
  output logic        stall,
  output logic [31:0] color [SUB_DIM*SUB_DIM][3],
  output logic        all_done,
  output logic        idle,
  output logic [31:0] stall_cycles,
  output logic [31:0] cycles,
  output logic [31:0] n_blend,
  output logic [31:0] n_fifo_push       // Gaussian copies written into the FIFOs
);
  localparam int unsigned NV = 2 * N_MINI;

  logic [3:0] fifo_full, fifo_empty, push;
  feat_t      push_data;
  feat_t      fifo_dout [N_MINI];

  mini_tile_demux u_demux (
    .in_valid, .in_ready, .in_data, .fifo_full, .push, .push_data
  );

  fifo_monitor #(.N(N_MINI)) u_monitor (
    .clk, .rst_n, .clear, .count_en, .fifo_full, .stall, .stall_cycles, .cycles
  );

  logic [31:0] vru_color [NV][VRU_PIX][3];
  logic [16:0] vru_trans [NV][VRU_PIX];
  logic [VRU_PIX-1:0] vru_pix_done [NV];
  logic [NV-1:0] vru_done, vru_busy, vru_fwd_pending;
  logic [31:0] vru_blend [NV];

  for (genvar m = 0; m < N_MINI; m++) begin : g_ch
    logic  a_ready, a_fwd_valid, b_ready, b_fwd_valid;
    feat_t a_fwd_feat, b_fwd_feat;
    logic [15:0] ox, oy;
    assign ox = sub_x + 16'(MINI_DIM * (m % 2));
    assign oy = sub_y + 16'(MINI_DIM * (m / 2));

    sync_fifo #(.T(feat_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(push[m]), .din(push_data),
      .pop(!fifo_empty[m] && a_ready), .dout(fifo_dout[m]),
      .full(fifo_full[m]), .empty(fifo_empty[m]), .count()
    );

    vru u_vru_a (
      .clk, .rst_n, .clear, .base_x(ox), .base_y(oy),
      .in_valid(!fifo_empty[m]), .in_ready(a_ready), .in_feat(fifo_dout[m]),
      .fwd_valid(a_fwd_valid), .fwd_ready(b_ready), .fwd_feat(a_fwd_feat),
      .color(vru_color[2*m]), .trans(vru_trans[2*m]), .pix_done(vru_pix_done[2*m]),
      .all_done(vru_done[2*m]), .busy(vru_busy[2*m]), .n_blend(vru_blend[2*m])
    );
    vru u_vru_b (
      .clk, .rst_n, .clear, .base_x(ox), .base_y(oy + 16'd2),
      .in_valid(a_fwd_valid), .in_ready(b_ready), .in_feat(a_fwd_feat),
      .fwd_valid(b_fwd_valid), .fwd_ready(1'b1), .fwd_feat(b_fwd_feat),
      .color(vru_color[2*m+1]), .trans(vru_trans[2*m+1]), .pix_done(vru_pix_done[2*m+1]),
      .all_done(vru_done[2*m+1]), .busy(vru_busy[2*m+1]), .n_blend(vru_blend[2*m+1])
    );
    assign vru_fwd_pending[2*m]   = a_fwd_valid;
    assign vru_fwd_pending[2*m+1] = 1'b0;
    // the last VRU of a channel has nobody to forward to
    wire unused_b = b_fwd_valid ^ ^b_fwd_feat;
  end

  // Pixel (x, y) of the sub-tile lives in mini-tile m = (y/4)*2 + x/4, VRU 2m + (y%4)/2,
  // pixel j = (y%2)*4 + x%4.
  always_comb begin
    for (int y = 0; y < SUB_DIM; y++)
      for (int x = 0; x < SUB_DIM; x++)
        for (int c = 0; c < 3; c++)
          color[y*SUB_DIM + x][c] = vru_color[2*((y/4)*2 + x/4) + (y%4)/2][(y%2)*4 + x%4][c];
  end

  always_comb begin
    n_blend = '0;
    for (int v = 0; v < NV; v++) n_blend = n_blend + vru_blend[v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       n_fifo_push <= '0;
    else if (clear)                   n_fifo_push <= '0;
    else                              n_fifo_push <= n_fifo_push + 32'($countones(push));
  end

  assign all_done = &vru_done;
  assign idle     = (&fifo_empty) && !(|vru_busy) && !(|vru_fwd_pending);

  wire unused_trans = ^vru_trans[0][0];
endmodule
