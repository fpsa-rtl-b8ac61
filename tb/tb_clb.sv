// tb_clb: configures the CLB (128 six-input LUTs) as a 6-bit counter built
// from registered LUTs with feedback, decoders of that counter that pulse at
// chosen counts (the kind of window-reset and buffer-command pulses the
// fabric needs), and LUTs with random tables on the input pins. Checks every
// output every cycle against a model, including the start of the counter
// exactly when its lowest bit is written.
module tb_clb;
  import fpsa_tb_pkg::*;
  localparam int N_LUT = 128, K = 6, N_IN = 256;
  localparam int SEL_W = $clog2(N_IN + N_LUT);
  localparam int CFG_W = 64 + K * SEL_W + 2;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [N_IN-1:0] pin_in = '0;
  logic [N_LUT-1:0] pin_out;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  logic [63:0] rtbl [8];
  int rsel [8][6];
  int checks = 0, failures = 0;

  clb #(.N_LUT(N_LUT), .K(K), .N_IN(N_IN)) dut (.clk, .rst_n, .pin_in, .pin_out, .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_lut(input int n, input logic [63:0] tbl, input int sel [6], input bit r, input bit init);
    logic [255:0] w;
    w = lut_word(tbl, sel, SEL_W, r, init);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 16'(n); cfg_data = w[CFG_W-1:0];
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    int sel [6];
    int q;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Random-table LUTs 100..107 on pins.
    for (int n = 0; n < 8; n++) begin
      rtbl[n] = {$urandom(), $urandom()};
      for (int i = 0; i < 6; i++) rsel[n][i] = $urandom_range(0, N_IN - 1);
      write_lut(100 + n, rtbl[n], rsel[n], 1'b0, 1'b0);
    end
    // Decoders on LUTs 10..12: counter == 0, 1, 63 (combinational).
    for (int i = 0; i < 6; i++) sel[i] = N_IN + i;
    write_lut(10, tbl_equals(0, 6), sel, 1'b0, 1'b0);
    write_lut(11, tbl_equals(1, 6), sel, 1'b0, 1'b0);
    write_lut(12, tbl_equals(63, 6), sel, 1'b0, 1'b0);
    // Counter bits 5..0, lowest last: the counter starts when bit 0 is written.
    for (int k = 5; k >= 0; k--) begin
      for (int i = 0; i < 6; i++) sel[i] = (i <= k) ? N_IN + i : 0;
      write_lut(k, tbl_count_bit(k), sel, 1'b1, 1'b0);
    end
    q = 0;   // bit 0 was loaded with 0 by its write; counting starts at the next edge
    for (int t = 0; t < 300; t++) begin
      pin_in = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      #1;
      checks++;
      if (int'(pin_out[5:0]) != q) begin
        failures++;
        if (failures < 10) $display("counter %0d expected %0d", pin_out[5:0], q);
      end
      checks++;
      if (pin_out[10] !== (q == 0) || pin_out[11] !== (q == 1) || pin_out[12] !== (q == 63)) begin
        failures++;
        if (failures < 10) $display("decoders wrong at count %0d", q);
      end
      for (int n = 0; n < 8; n++) begin
        logic [5:0] a;
        for (int i = 0; i < 6; i++) a[i] = pin_in[rsel[n][i]];
        checks++;
        if (pin_out[100 + n] !== rtbl[n][a]) begin
          failures++;
          if (failures < 10) $display("LUT %0d out %b expected %b", 100 + n, pin_out[100 + n], rtbl[n][a]);
        end
      end
      @(negedge clk);
      q = (q + 1) % 64;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
