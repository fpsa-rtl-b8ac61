// tb_fpsa_tile: tests one PE tile and one CLB tile at a small size (8 tracks
// per side, 8-row crossbar). In the PE tile the connection boxes feed input
// pin k from track k of the side the pin sits on, the crossbar is programmed
// so that output j copies input j (weight = eta on the positive column), the
// switch box puts output j on leaving track j of the east side, and a second
// set of east tracks passes arriving west tracks straight through. The window
// reset pin is driven from a north track. Every cycle the east side is
// compared with the expected copy (one cycle later) and pass-through values.
// The CLB tile is set up with one LUT computing the AND of two pins, checked
// on its south side.
module tb_fpsa_tile;
  import fpsa_pkg::*;
  import fpsa_tb_pkg::*;
  localparam int W = 8, ROWS = 8, COLS = 8, N_IN = 8, N_LUT = 128;
  localparam int NPI = ROWS + SMB_CTL_PINS;
  localparam int CFG_W = 2 * COLS * 8 * 4;
  localparam int SEL_W = $clog2(N_IN + N_LUT);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0][W-1:0] arr_p = '0, dep_p, arr_c = '0, dep_c;
  logic cfg_we_p = 1'b0, cfg_we_c = 1'b0;
  cfg_tgt_t cfg_tgt = CFG_SB;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  int checks = 0, failures = 0;

  fpsa_tile #(.TTYPE(TILE_PE), .W(W), .ROWS(ROWS), .COLS(COLS), .N_IN(N_IN), .N_LUT(N_LUT)) dut_pe (
    .clk, .rst_n, .arr(arr_p), .dep(dep_p), .cfg_we(cfg_we_p), .cfg_tgt, .cfg_addr, .cfg_data);
  fpsa_tile #(.TTYPE(TILE_CLB), .W(W), .ROWS(ROWS), .COLS(COLS), .N_IN(N_IN), .N_LUT(N_LUT)) dut_clb (
    .clk, .rst_n, .arr(arr_c), .dep(dep_c), .cfg_we(cfg_we_c), .cfg_tgt, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input bit which, input cfg_tgt_t tg, input int a, input logic [CFG_W-1:0] d);
    cfg_tgt = tg; cfg_addr = 16'(a); cfg_data = d;
    if (which) cfg_we_c = 1'b1; else cfg_we_p = 1'b1;
    @(negedge clk);
    cfg_we_p = 1'b0; cfg_we_c = 1'b0;
  endtask

  initial begin
    logic [COLS-1:0] prev_in, exp_out;
    int sel [6];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // PE tile: input pin k from track k/4 of side k%4 (arriving), plus the
    // window-reset pin ROWS from its side.
    for (int k = 0; k <= ROWS; k++) cfg(0, cfg_tgt_t'(int'(CFG_CB_N) + k % 4), k / 4, CFG_W'(k / 4 + 1));
    // Crossbar: row r has weight 40 on positive column 2r, eta = 40.
    for (int r = 0; r < ROWS; r++) begin
      logic [CFG_W-1:0] d;
      d = '0;
      d[(2 * r) * 32 +: 32] = {4'd0, 4'd0, 4'd0, 4'd0, 4'd0, 4'd10, 4'd15, 4'd15};
      cfg(0, CFG_BLK, r, d);
    end
    cfg(0, CFG_BLK, int'(CFG_REG_ETA), CFG_W'(40));
    // Switch box: east tracks 0..3 carry outputs 0..3, 4..7 pass west tracks 4..7;
    // south tracks 0..3 carry outputs 4..7.
    for (int t = 0; t < 4; t++) begin
      cfg(0, CFG_SB, SIDE_E * W + t, CFG_W'(4 * W + 1 + t));
      cfg(0, CFG_SB, SIDE_E * W + 4 + t, CFG_W'(SIDE_W * W + 4 + t + 1));
      cfg(0, CFG_SB, SIDE_S * W + t, CFG_W'(4 * W + 1 + 4 + t));
    end
    prev_in = '0;
    for (int cyc = 0; cyc < 300; cyc++) begin
      logic [COLS-1:0] xin;
      logic [3:0] pass;
      logic wr;
      xin = COLS'($urandom());
      pass = 4'($urandom());
      wr = ($urandom_range(0, 15) == 0);
      for (int k = 0; k < ROWS; k++) arr_p[k % 4][k / 4] = xin[k];
      arr_p[ROWS % 4][ROWS / 4] = wr;
      arr_p[SIDE_W][7:4] = pass;
      if (ROWS % 4 == SIDE_W) arr_p[SIDE_W][ROWS / 4] = wr;
      #1;
      exp_out = prev_in;
      checks++;
      if (dep_p[SIDE_E][3:0] !== exp_out[3:0] || dep_p[SIDE_S][3:0] !== exp_out[7:4]) begin
        failures++;
        if (failures < 10) $display("cycle %0d: outputs %b %b expected %b", cyc, dep_p[SIDE_S][3:0], dep_p[SIDE_E][3:0], exp_out);
      end
      checks++;
      if (dep_p[SIDE_E][7:4] !== arr_p[SIDE_W][7:4]) begin
        failures++;
        $display("cycle %0d: pass-through wrong", cyc);
      end
      @(negedge clk);
      prev_in = wr ? '0 : xin;
    end
    // CLB tile: LUT 5 = pin 0 & pin 1 (pins 0 and 1 on sides N and E, track 2).
    cfg(1, CFG_CB_N, 0, CFG_W'(3));
    cfg(1, CFG_CB_E, 0, CFG_W'(3));
    sel = '{0, 1, 0, 0, 0, 0};
    begin
      logic [255:0] w;
      w = lut_word(tbl_equals(3, 2), sel, SEL_W, 1'b0, 1'b0);
      cfg(1, CFG_BLK, 5, CFG_W'(w[64 + 6 * SEL_W + 1:0]));
    end
    cfg(1, CFG_SB, SIDE_S * W + 1, CFG_W'(4 * W + 1 + 5));
    for (int cyc = 0; cyc < 40; cyc++) begin
      logic a, b;
      a = 1'($urandom()); b = 1'($urandom());
      arr_c[SIDE_N][2] = a; arr_c[SIDE_E][2] = b;
      #1;
      checks++;
      if (dep_c[SIDE_S][1] !== (a & b)) begin
        failures++;
        $display("CLB tile: %b & %b gave %b", a, b, dep_c[SIDE_S][1]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
