// switch_box: joins the routing-track segments of the four sides of a tile and
// lets the tile's function block drive tracks.
//
// Tracks are unidirectional, W per direction on each side (sides N, E, S, W in
// that order). Each leaving track is a wire crossed by ReRAM cells, one per
// possible source: every arriving track of every side (straight on, turns and
// U-turns) and every output pin of the block. At most one cell of a leaving
// track is set to low resistance, so it is stored as a source index: 0 = open
// (the track is 0), 1 .. 4W = arriving track (side*W + t) + 1, 4W+1 .. =
// block output (index - 4W - 1). A source may feed many leaving tracks
// (fan-out). In the paper the SB is a sparse set of ReRAM switches on metal
// layers M5 to M9; this full-reach version is our simplification of it and can
// realise any of its connections.
//
// Interface: arr / dep are [side][track]; cfg_we with cfg_addr = side*W + t
// writes the select of leaving track t of that side.
// Timing: combinational from arr and blk_out to dep, so a routed path across
// many tiles settles within one clock. The configuration must not close a
// loop of tracks; a loop-free configuration is what placement and routing
// produce, as in an FPGA. Tools that do not look at the configuration see the
// mesh of switch boxes as a possible combinational loop.
module switch_box #(
  parameter int unsigned W    = 96,
  parameter int unsigned N_BO = 256,
  localparam int unsigned NSRC = 4 * W + N_BO,
  localparam int unsigned SW   = $clog2(NSRC + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0][W-1:0]    arr,
  input  logic [N_BO-1:0]      blk_out,
  output logic [3:0][W-1:0]    dep,
  input  logic                 cfg_we,
  input  logic [15:0]          cfg_addr,
  input  logic [15:0]          cfg_data
);

  logic [SW-1:0]   sel_q [4*W];
  logic [NSRC:0]   src;

  assign src = {blk_out, arr, 1'b0};   // src[0] is the open position

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 4 * W; o++) sel_q[o] <= '0;
    end else if (cfg_we) begin
      for (int o = 0; o < 4 * W; o++)
        if (int'(cfg_addr) == o) sel_q[o] <= cfg_data[SW-1:0];
    end
  end

  always_comb begin
    for (int s = 0; s < 4; s++)
      for (int t = 0; t < W; t++)
        dep[s][t] = (int'(sel_q[s*W+t]) <= NSRC) ? src[sel_q[s*W+t]] : 1'b0;
  end

endmodule
