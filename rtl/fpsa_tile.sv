// fpsa_tile: one island of the FPSA array: a function block with the switch
// box above it and a connection box on each of its four sides.
//
// TTYPE chooses the block: a ReRAM processing element (pe), a spiking memory
// block (smb) or a configurable logic block (clb). All three see the same
// pin frame so that tiles can be placed anywhere: NPI input pins and NPO
// output pins. Input pin k sits on side k % 4 and is pin k / 4 of that side's
// connection box, which picks it off a track arriving on that side. Output
// pins go to the switch box, which can put any of them on any leaving track.
//   PE : inputs 0..ROWS-1 = spike inputs, ROWS = window reset;
//        outputs 0..COLS-1 = spike outputs
//   SMB: inputs 0..ROWS-1 = spike inputs, then clr, commit, load, addr bits;
//        outputs 0..ROWS-1 = replayed spikes (LANES = ROWS)
//   CLB: inputs 0..N_IN-1, outputs 0..N_LUT-1
// The block kinds and the CB/SB arrangement follow the paper's architecture
// figure; the pin frame and the configuration decode are our own.
//
// Configuration: cfg_we writes target cfg_tgt (switch box, one of the four
// connection boxes, or the block) at cfg_addr with cfg_data; see fpsa_pkg.
// Timing: combinational from arriving tracks through CBs into the block and
// from block outputs through the SB to leaving tracks; all state is in the
// blocks and the configuration registers.
module fpsa_tile
  import fpsa_pkg::*;
#(
  parameter tile_t       TTYPE = TILE_PE,
  parameter int unsigned W     = ROUTE_W,
  parameter int unsigned ROWS  = XBAR_ROWS,
  parameter int unsigned COLS  = XBAR_COLS,
  parameter int unsigned CELLS = XBAR_CELLS,
  parameter int unsigned LVL_W = XBAR_LVL_W,
  parameter int unsigned MEM_BITS = SMB_BITS,
  parameter int unsigned N_LUT = CLB_LUTS,
  parameter int unsigned N_IN  = XBAR_ROWS,
  localparam int unsigned NPI  = (ROWS + SMB_CTL_PINS > N_IN) ? ROWS + SMB_CTL_PINS : N_IN,
  localparam int unsigned NPS  = (NPI + 3) / 4,
  localparam int unsigned NPO0 = (COLS > ROWS) ? COLS : ROWS,
  localparam int unsigned NPO  = (NPO0 > N_LUT) ? NPO0 : N_LUT,
  localparam int unsigned PE_CFG_W = 2 * COLS * CELLS * LVL_W,
  localparam int unsigned CLB_CFG_W = (1 << LUT_K) + LUT_K * $clog2(N_IN + N_LUT) + 2,
  localparam int unsigned CFG_W = (PE_CFG_W > CLB_CFG_W) ? PE_CFG_W : CLB_CFG_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [3:0][W-1:0]  arr,
  output logic [3:0][W-1:0]  dep,
  input  logic               cfg_we,
  input  cfg_tgt_t           cfg_tgt,
  input  logic [15:0]        cfg_addr,
  input  logic [CFG_W-1:0]   cfg_data
);

  logic [3:0][NPS-1:0] side_pin;
  logic [NPI-1:0]      pin_in;
  logic [NPO-1:0]      pin_out;
  logic                blk_we;

  assign blk_we = cfg_we && cfg_tgt == CFG_BLK;

  for (genvar s = 0; s < 4; s++) begin : g_cb
    connection_box #(.W(W), .N_PIN(NPS)) u_cb (
      .clk     (clk),
      .rst_n   (rst_n),
      .trk     (arr[s]),
      .pin     (side_pin[s]),
      .cfg_we  (cfg_we && cfg_tgt == cfg_tgt_t'(int'(CFG_CB_N) + s)),
      .cfg_addr(cfg_addr),
      .cfg_data(cfg_data[15:0])
    );
  end

  always_comb begin
    for (int k = 0; k < NPI; k++) pin_in[k] = side_pin[k % 4][k / 4];
  end

  switch_box #(.W(W), .N_BO(NPO)) u_sb (
    .clk     (clk),
    .rst_n   (rst_n),
    .arr     (arr),
    .blk_out (pin_out),
    .dep     (dep),
    .cfg_we  (cfg_we && cfg_tgt == CFG_SB),
    .cfg_addr(cfg_addr),
    .cfg_data(cfg_data[15:0])
  );

  if (TTYPE == TILE_PE) begin : g_pe
    logic [COLS-1:0] spk_out;
    pe #(.ROWS(ROWS), .COLS(COLS), .CELLS(CELLS), .LVL_W(LVL_W)) u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .spk_in  (pin_in[ROWS-1:0]),
      .win_rst (pin_in[ROWS]),
      .spk_out (spk_out),
      .cfg_we  (blk_we),
      .cfg_addr(cfg_addr),
      .cfg_data(cfg_data[PE_CFG_W-1:0])
    );
    assign pin_out = NPO'(spk_out);
  end else if (TTYPE == TILE_SMB) begin : g_smb
    logic [ROWS-1:0] spk_out;
    smb #(.LANES(ROWS), .MEM_BITS(MEM_BITS)) u_smb (
      .clk       (clk),
      .rst_n     (rst_n),
      .spk_in    (pin_in[ROWS-1:0]),
      .ctl_clr   (pin_in[ROWS]),
      .ctl_commit(pin_in[ROWS+1]),
      .ctl_load  (pin_in[ROWS+2]),
      .addr      (pin_in[ROWS+3 +: SMB_ADDR_W]),
      .spk_out   (spk_out),
      .cfg_we    (blk_we),
      .cfg_addr  (cfg_addr),
      .cfg_data  (cfg_data[15:0])
    );
    assign pin_out = NPO'(spk_out);
  end else begin : g_clb
    logic [N_LUT-1:0] lut_out;
    clb #(.N_LUT(N_LUT), .K(LUT_K), .N_IN(N_IN)) u_clb (
      .clk     (clk),
      .rst_n   (rst_n),
      .pin_in  (pin_in[N_IN-1:0]),
      .pin_out (lut_out),
      .cfg_we  (blk_we),
      .cfg_addr(cfg_addr),
      .cfg_data(cfg_data[CLB_CFG_W-1:0])
    );
    assign pin_out = NPO'(lut_out);
  end

endmodule
