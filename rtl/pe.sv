// pe: ReRAM processing element of the FPSA fabric. Behavioural model: it is
// built from the crossbar and neuron models, which stand for analog circuits,
// plus the digital spike subtracters.
//
// A PE computes one "core-op", out = ReLU(W x), entirely in the spike domain.
// The inputs are ROWS digital spike trains; the number of spikes a row gets in
// a sampling window is the input value. Each cycle the spiking rows charge the
// crossbar; each of the 2*COLS physical columns feeds an integrate-and-fire
// neuron; neurons 2j (positive weights) and 2j+1 (negative weights) feed
// spike subtracter j, whose output train is the result for logical column j.
// Over a window, count(out_j) ~ max(0, sum_i (g+_ji - g-_ji) x_i / eta).
// Structure and sizes (256 rows, 256 logical columns, 8 cells of 4 bits) are
// the paper's; the configuration port is our own.
//
// Interface:
//   spk_in / spk_out   spike trains, one bit per row / logical column
//   win_rst            start of a sampling window: clears the neurons and the
//                      subtracters (the paper's reset signal, from a CLB)
//   cfg_we/addr/data   addr < ROWS: write crossbar row addr from cfg_data;
//                      addr == CFG_REG_ETA: eta = cfg_data[V_W-1:0]
// Timing: a spike entering in cycle t can produce an output spike in cycle
// t+1, the one-cycle hand-over between directly connected PEs.
module pe
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 256,
  parameter int unsigned CELLS = 8,
  parameter int unsigned LVL_W = 4,
  parameter logic [V_W-1:0] ETA_RESET = V_W'(256),
  localparam int unsigned CFG_W = 2 * COLS * CELLS * LVL_W,
  localparam int unsigned CHG_W = $clog2(ROWS * CELLS * ((1 << LVL_W) - 1) + 1),
  localparam int unsigned RW    = (ROWS <= 2) ? 1 : $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROWS-1:0]   spk_in,
  input  logic              win_rst,
  output logic [COLS-1:0]   spk_out,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [CFG_W-1:0]  cfg_data
);

  logic [V_W-1:0] eta_q;
  logic [2*COLS-1:0][CHG_W-1:0] col_charge;
  logic [2*COLS-1:0] nspk;
  logic prog_we;

  assign prog_we = cfg_we && (cfg_addr < 16'(ROWS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 eta_q <= ETA_RESET;
    else if (cfg_we && cfg_addr == CFG_REG_ETA) eta_q <= cfg_data[V_W-1:0];
  end

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .CELLS(CELLS), .LVL_W(LVL_W), .CHG_W(CHG_W)) u_xbar (
    .clk       (clk),
    .prog_we   (prog_we),
    .prog_row  (cfg_addr[RW-1:0]),
    .prog_data (cfg_data),
    .row_spk   (spk_in),
    .col_charge(col_charge)
  );

  for (genvar c = 0; c < 2 * COLS; c++) begin : g_neuron
    neuron_unit #(.CHG_W(CHG_W), .V_W(V_W)) u_neuron (
      .clk    (clk),
      .rst_n  (rst_n),
      .win_rst(win_rst),
      .eta    (eta_q),
      .charge (col_charge[c]),
      .spike  (nspk[c])
    );
  end

  for (genvar j = 0; j < COLS; j++) begin : g_sub
    spike_subtracter #(.BLK_W(1)) u_sub (
      .clk  (clk),
      .rst_n(rst_n),
      .clr  (win_rst),
      .pos  (nspk[2*j]),
      .neg  (nspk[2*j+1]),
      .out  (spk_out[j])
    );
  end

endmodule
