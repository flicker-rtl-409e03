// gaussian_load_unit -- streams Gaussian records from DRAM into a preprocessing core
// (Fig. 5, "Gaussian Load Unit").
//
// On start it reads num consecutive records beginning at base_addr, one record per
// address, over a simple request/response port to the DRAM controller (responses in
// request order). A small prefetch FIFO absorbs the responses; a request is only issued
// while the FIFO has a free slot for it, so the memory side never needs back-pressure.
// done rises once every record has been handed on and stays high until the next start.
// The paper names the unit but not its protocol; port, record layout (dram_gauss_t)
// and prefetch depth are this design's choices. Loading only projected 2D features is
// also a simplification: see the preprocessing core.
module gaussian_load_unit
  import flicker_pkg::*;
#(
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned PREFETCH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       num,
  // DRAM controller port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  dram_gauss_t       mem_rsp_data,
  // record stream
  output logic              out_valid,
  input  logic              out_ready,
  output dram_gauss_t       out_data,
  output logic              done
);
  localparam int unsigned CW = $clog2(PREFETCH + 1);

  logic [31:0]   issued, delivered, total;
  logic [CW-1:0] outstanding, fifo_count;
  logic          active, fifo_empty, fifo_full;

  assign mem_req_valid = active && (issued != total) &&
                         (32'(outstanding) + 32'(fifo_count) < PREFETCH);
  assign mem_req_addr  = base_addr + ADDR_W'(issued);

  wire req_fire = mem_req_valid && mem_req_ready;
  wire pop      = out_valid && out_ready;

  sync_fifo #(.T(dram_gauss_t), .DEPTH(PREFETCH)) u_prefetch (
    .clk, .rst_n, .push(mem_rsp_valid), .din(mem_rsp_data), .pop,
    .dout(out_data), .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );
  assign out_valid = !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      issued      <= '0;
      delivered   <= '0;
      total       <= '0;
      outstanding <= '0;
      done        <= 1'b0;
    end else if (start) begin
      active      <= 1'b1;
      issued      <= '0;
      delivered   <= '0;
      total       <= num;
      done        <= 1'b0;
    end else begin
      if (req_fire) issued <= issued + 1;
      if (pop)      delivered <= delivered + 1;
      outstanding <= outstanding + CW'(req_fire) - CW'(mem_rsp_valid);
      if (active && (delivered + 32'(pop) == total)) begin
        active <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   mem_rsp_valid |-> (outstanding != 0) && !fifo_full);
endmodule
