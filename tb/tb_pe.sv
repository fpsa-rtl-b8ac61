// tb_pe: runs the processing element (reduced to 32 rows x 16 logical
// columns) through sampling windows of 64 cycles. Signed weights are spread
// over the 8 cells of the positive or the negative column, inputs are spike
// trains with random counts, and every output spike is compared with an
// independent cycle model of the PE (charge sums, integrate-and-fire with
// discharge to reset, one-flip-flop subtraction). Also checks the one-cycle
// latency from input spike to output spike, and that a weight matrix scaled
// so that no charge is lost yields exactly ReLU(W x) / eta spikes.
module tb_pe;
  import fpsa_pkg::*;
  localparam int ROWS = 32, COLS = 16, CELLS = 8, LVL_W = 4, WIN = 64;
  localparam int CFG_W = 2 * COLS * CELLS * LVL_W;
  logic clk = 1'b0, rst_n = 1'b0, win_rst = 1'b0, cfg_we = 1'b0;
  logic [ROWS-1:0] spk_in = '0;
  logic [COLS-1:0] spk_out;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  int g [ROWS][2*COLS];          // summed conductance per intersection
  longint v [2*COLS];
  bit nspk [2*COLS];
  int pend [COLS];
  int eta;
  int checks = 0, failures = 0;

  pe #(.ROWS(ROWS), .COLS(COLS), .CELLS(CELLS), .LVL_W(LVL_W)) dut (
    .clk, .rst_n, .spk_in, .win_rst, .spk_out, .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Spread a level sum over 8 cells of at most 15 each.
  function automatic logic [CELLS-1:0][LVL_W-1:0] spread(input int s);
    logic [CELLS-1:0][LVL_W-1:0] r;
    for (int k = 0; k < CELLS; k++) begin
      int x;
      x = (s > 15) ? 15 : s;
      r[k] = LVL_W'(x);
      s -= x;
    end
    return r;
  endfunction

  task automatic program_weights(input int wmax, input bit nonneg);
    for (int r = 0; r < ROWS; r++) begin
      for (int j = 0; j < COLS; j++) begin
        int w;
        w = $urandom_range(0, 2 * wmax) - wmax;
        if (nonneg && w < 0) w = -w;
        g[r][2*j]   = (w > 0) ? w : 0;
        g[r][2*j+1] = (w < 0) ? -w : 0;
        cfg_data[(2*j) * CELLS * LVL_W +: CELLS * LVL_W]   = spread(g[r][2*j]);
        cfg_data[(2*j+1) * CELLS * LVL_W +: CELLS * LVL_W] = spread(g[r][2*j+1]);
      end
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = 16'(r);
      @(negedge clk);
      cfg_we = 1'b0;
    end
  endtask

  task automatic set_eta(input int e);
    eta = e;
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_REG_ETA; cfg_data = '0; cfg_data[V_W-1:0] = V_W'(e);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic int brev6(input int t);
    int r = 0;
    for (int i = 0; i < 6; i++) r |= ((t >> i) & 1) << (5 - i);
    return r;
  endfunction

  // One cycle: apply inputs, check outputs against the model, then advance
  // the model to the next clock. Returns the number of output spikes.
  task automatic cycle(input logic [ROWS-1:0] s, input bit wr, output int nout);
    nout = 0;
    spk_in = s; win_rst = wr;
    #1;
    for (int j = 0; j < COLS; j++) begin
      bit p, n, e;
      p = nspk[2*j]; n = nspk[2*j+1];
      e = p && !n && pend[j] == 0;
      checks++;
      if (spk_out[j] !== e) begin
        failures++;
        if (failures < 10) $display("col %0d out %b expected %b", j, spk_out[j], e);
      end
      nout += int'(spk_out[j]);
      if (wr) pend[j] = 0;
      else if (p && !n) pend[j] = 0;
      else if (n && !p) pend[j] = 1;
    end
    for (int c = 0; c < 2 * COLS; c++) begin
      longint q;
      q = 0;
      for (int r = 0; r < ROWS; r++) if (s[r]) q += g[r][c];
      if (wr) begin v[c] = 0; nspk[c] = 0; end
      else if (v[c] + q >= eta) begin v[c] = 0; nspk[c] = 1; end
      else begin v[c] = v[c] + q; nspk[c] = 0; end
    end
    @(negedge clk);
  endtask

  initial begin
    int x [ROWS];
    int cnt [COLS];
    int nout;
    for (int c = 0; c < 2 * COLS; c++) begin v[c] = 0; nspk[c] = 0; end
    for (int j = 0; j < COLS; j++) pend[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    eta = 256;
    // Random signed windows.
    for (int pass = 0; pass < 3; pass++) begin
      program_weights(120, 1'b0);
      set_eta($urandom_range(200, 3000));
      for (int w = 0; w < 8; w++) begin
        for (int r = 0; r < ROWS; r++) x[r] = $urandom_range(0, WIN - 1);
        cycle('0, 1'b1, nout);
        for (int t = 0; t < WIN; t++) begin
          logic [ROWS-1:0] s;
          for (int r = 0; r < ROWS; r++) s[r] = brev6(t) < x[r];
          cycle(s, 1'b0, nout);
        end
      end
    end
    // Latency: one row with a weight that reaches eta at once.
    program_weights(0, 1'b1);
    g[0][0] = 100;
    cfg_data = '0; cfg_data[CELLS * LVL_W - 1:0] = spread(100);
    @(negedge clk); cfg_we = 1'b1; cfg_addr = 16'd0; @(negedge clk); cfg_we = 1'b0;
    set_eta(100);
    cycle('0, 1'b1, nout);
    cycle('0, 1'b0, nout);
    cycle(ROWS'(1), 1'b0, nout);
    cycle('0, 1'b0, nout);
    checks++;
    if (nout != 1 || spk_out[0] !== 1'b0) begin
      failures++;
      $display("latency: expected the output spike exactly one cycle after the input");
    end
    // Exact relation: weights 0 or eta on the positive columns, one row
    // active per cycle, so each spike carries exactly eta and nothing is lost:
    // count_j = sum_r x_r [w_rj > 0] = (W x)_j / eta.
    for (int r = 0; r < ROWS; r++) begin
      for (int j = 0; j < COLS; j++) begin
        g[r][2*j] = ($urandom_range(0, 1) == 1) ? 60 : 0;
        g[r][2*j+1] = 0;
        cfg_data[(2*j) * CELLS * LVL_W +: CELLS * LVL_W]   = spread(g[r][2*j]);
        cfg_data[(2*j+1) * CELLS * LVL_W +: CELLS * LVL_W] = spread(0);
      end
      @(negedge clk); cfg_we = 1'b1; cfg_addr = 16'(r); @(negedge clk); cfg_we = 1'b0;
    end
    set_eta(60);
    for (int j = 0; j < COLS; j++) cnt[j] = 0;
    cycle('0, 1'b1, nout);
    for (int r = 0; r < ROWS; r++) begin
      x[r] = $urandom_range(0, 3);
      for (int t = 0; t < x[r]; t++) begin
        cycle(ROWS'(1) << r, 1'b0, nout);
        for (int j = 0; j < COLS; j++) cnt[j] += int'(spk_out[j]);
      end
    end
    cycle('0, 1'b0, nout);
    for (int j = 0; j < COLS; j++) cnt[j] += int'(spk_out[j]);
    for (int j = 0; j < COLS; j++) begin
      int e;
      e = 0;
      for (int r = 0; r < ROWS; r++) if (g[r][2*j] > 0) e += x[r];
      checks++;
      if (cnt[j] != e) begin
        failures++;
        $display("column %0d: %0d spikes, (W x)/eta = %0d", j, cnt[j], e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
