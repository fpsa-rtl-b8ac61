// tb_reram_crossbar: programs random cell levels row by row, keeps its own
// copy, applies random row-spike vectors and checks every column charge
// against the sum, over spiking rows, of the eight cell levels of each
// intersection. Runs at a reduced size (32 rows, 2 x 16 columns).
module tb_reram_crossbar;
  localparam int ROWS = 32, COLS = 16, CELLS = 8, LVL_W = 4, CHG_W = 16;
  localparam int PC = 2 * COLS;
  logic clk = 1'b0, prog_we = 1'b0;
  logic [4:0] prog_row = '0;
  logic [PC-1:0][CELLS-1:0][LVL_W-1:0] prog_data = '0;
  logic [ROWS-1:0] row_spk = '0;
  logic [PC-1:0][CHG_W-1:0] col_charge;
  int lvl [ROWS][PC][CELLS];
  int checks = 0, failures = 0;

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .CELLS(CELLS), .LVL_W(LVL_W), .CHG_W(CHG_W)) dut (
    .clk, .prog_we, .prog_row, .prog_data, .row_spk, .col_charge);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_all();
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < PC; c++)
        for (int k = 0; k < CELLS; k++) begin
          lvl[r][c][k] = $urandom_range(0, 15);
          prog_data[c][k] = LVL_W'(lvl[r][c][k]);
        end
      prog_row = 5'(r); prog_we = 1'b1;
      @(posedge clk); #1;
    end
    prog_we = 1'b0;
  endtask

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      program_all();
      for (int v = 0; v < 200; v++) begin
        row_spk = (v == 0) ? '1 : ROWS'($urandom());
        #1;
        for (int c = 0; c < PC; c++) begin
          int e;
          e = 0;
          for (int r = 0; r < ROWS; r++)
            if (row_spk[r]) for (int k = 0; k < CELLS; k++) e += lvl[r][c][k];
          checks++;
          if (int'(col_charge[c]) != e) begin
            failures++;
            if (failures < 10) $display("col %0d charge %0d expected %0d", c, col_charge[c], e);
          end
        end
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
