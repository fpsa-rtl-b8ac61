// reram_crossbar: behavioural model of the ReRAM crossbar of one processing
// element. The real part is an analog array; this model is written so that
// tools can compile it, but it stands for analog circuitry.
//
// The crossbar has ROWS rows and 2*COLS physical columns. Physical column 2j
// carries the positive part of logical column j and column 2j+1 its negative
// part. Every intersection holds CELLS parallel cells of 2^LVL_W levels each;
// their conductances add ("add method"), so an intersection is worth 0 to
// CELLS*(2^LVL_W-1) level units. These numbers (256 x 512, 8 cells of 16
// levels) are the paper's.
//
// In each cycle the rows whose input spike is 1 are charged (the charging unit
// of a row is a single transistor, folded in here as the row enable). The
// charge delivered into a column's neuron is proportional to the summed
// conductance of the charged rows, so col_charge[c] = sum over spiking rows r
// of the level sum of intersection (r, c). This is the eta-domain form of the
// paper's charging equation (sum_i s_i(t) g_ji). Device variation is not
// modelled.
//
// Programming (our own choice, the paper does not describe it): prog_we writes
// all cells of row prog_row in one clock, from prog_data laid out as
// [physical column][cell][level bit]. The cells keep their values without
// reset, as non-volatile cells do.
//
// Timing: col_charge is combinational from row_spk and the stored cells.
module reram_crossbar #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 256,
  parameter int unsigned CELLS = 8,
  parameter int unsigned LVL_W = 4,
  parameter int unsigned CHG_W = 16,
  localparam int unsigned PCOLS = 2 * COLS,
  localparam int unsigned RW    = (ROWS <= 2) ? 1 : $clog2(ROWS)
) (
  input  logic                                      clk,
  input  logic                                      prog_we,
  input  logic [RW-1:0]                             prog_row,
  input  logic [PCOLS-1:0][CELLS-1:0][LVL_W-1:0]    prog_data,
  input  logic [ROWS-1:0]                           row_spk,
  output logic [PCOLS-1:0][CHG_W-1:0]               col_charge
);

  logic [CELLS-1:0][LVL_W-1:0] rcell [ROWS][PCOLS];

  always_ff @(posedge clk) begin
    if (prog_we && int'(prog_row) < ROWS) begin
      for (int c = 0; c < PCOLS; c++) rcell[prog_row][c] <= prog_data[c];
    end
  end

  always_comb begin
    for (int c = 0; c < PCOLS; c++) col_charge[c] = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (row_spk[r]) begin
        for (int c = 0; c < PCOLS; c++) begin
          for (int k = 0; k < CELLS; k++)
            col_charge[c] = col_charge[c] + CHG_W'(rcell[r][c][k]);
        end
      end
    end
  end

  initial begin
    assert (CHG_W >= $clog2(ROWS * CELLS * ((1 << LVL_W) - 1) + 1))
      else $error("CHG_W too small for the largest column charge");
  end

endmodule
