// tb_fpsa_top: end-to-end test of the FPSA fabric at a reduced size (3 x 9
// tiles, 16-row crossbars, 16 tracks per channel, 16-cycle windows). The test
// itself is in tb_fpsa_top_body.svh and is shared with the full-size test.
module tb_fpsa_top;
  localparam int GRID_R = 3, GRID_C = 9, W = 16, ROWS = 16, COLS = 16, N_IN = 16, N_LUT = 128;
  localparam int NB = 4, R0 = 1;
  localparam int WATCHDOG = 200000;
  `include "tb_fpsa_top_body.svh"

  fpsa_top #(.GRID_R(GRID_R), .GRID_C(GRID_C), .W(W), .ROWS(ROWS), .COLS(COLS), .N_IN(N_IN), .N_LUT(N_LUT)) dut (
    .clk, .rst_n, .edge_in_n, .edge_in_s, .edge_in_e, .edge_in_w, .edge_out_n, .edge_out_s,
    .edge_out_e, .edge_out_w, .cfg_we, .cfg_row, .cfg_col, .cfg_tgt, .cfg_addr, .cfg_data);
endmodule
