// connection_box: joins the block input pins on one side of a tile to the
// routing tracks that arrive on that side.
//
// In the paper each crossing of a pin wire and a track is a ReRAM cell: low
// resistance connects, high resistance isolates. A pin is driven by at most
// one track, so the column of cells of one pin is stored here as the index of
// its one low-resistance cell (0 = all cells high, the pin reads 0). The
// ReRAM-switch idea is the paper's; this encoding, the reset-to-open state and
// the configuration port are our own choices.
//
// Interface: trk = the W tracks arriving on this side, pin = the N_PIN block
// inputs of this side. cfg_we with cfg_addr = pin index writes its select:
// 0 = open, t+1 = track t.
// Timing: purely combinational from trk to pin; selects change at the clock.
module connection_box #(
  parameter int unsigned W     = 96,
  parameter int unsigned N_PIN = 67,
  localparam int unsigned SW   = $clog2(W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [W-1:0]      trk,
  output logic [N_PIN-1:0]  pin,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [15:0]       cfg_data
);

  logic [SW-1:0] sel_q [N_PIN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PIN; p++) sel_q[p] <= '0;
    end else if (cfg_we) begin
      for (int p = 0; p < N_PIN; p++)
        if (int'(cfg_addr) == p) sel_q[p] <= cfg_data[SW-1:0];
    end
  end

  logic [W:0] src;
  assign src = {trk, 1'b0};   // src[0] is the open position

  always_comb begin
    for (int p = 0; p < N_PIN; p++)
      pin[p] = (int'(sel_q[p]) <= W) ? src[sel_q[p]] : 1'b0;
  end

endmodule
