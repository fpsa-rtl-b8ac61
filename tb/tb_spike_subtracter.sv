// tb_spike_subtracter: checks the spike subtracter cycle by cycle against a
// reference of the blocking rule (a negative spike blocks the next positive
// spike; with the default single flip-flop one pending block is remembered),
// and checks window counts against max(Y+ - Y-, 0) on trains in which each
// negative spike comes just before a positive one, the case in which the
// ReLU equation holds exactly.
module tb_spike_subtracter;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, pos = 1'b0, neg = 1'b0, out;
  int checks = 0, failures = 0;
  int ref_pend = 0;
  int dut_count = 0;

  spike_subtracter dut (.clk, .rst_n, .clr, .pos, .neg, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic p, input logic n, input logic c);
    logic exp_out;
    pos = p; neg = n; clr = c;
    #1;
    exp_out = p && !n && ref_pend == 0;
    dut_count += int'(out);
    checks++;
    if (out !== exp_out) begin
      failures++;
      $display("cycle mismatch pos=%b neg=%b pend=%0d out=%b exp=%b", p, n, ref_pend, out, exp_out);
    end
    @(posedge clk);
    if (c) ref_pend = 0;
    else if (p && !n && ref_pend > 0) ref_pend = 0;
    else if (n && !p) ref_pend = 1;
    #1;
  endtask

  initial begin
    int yp, yn, yo;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // Random trains, including piled-up negative spikes.
    for (int i = 0; i < 2000; i++)
      step(1'($urandom_range(0, 1)), 1'($urandom_range(0, 2) == 0), 1'($urandom_range(0, 63) == 0));
    // Windows of ReLU checks.
    for (int w = 0; w < 60; w++) begin
      int np, nn;
      step(1'b0, 1'b0, 1'b1);
      np = $urandom_range(0, 31); nn = $urandom_range(0, 31);
      yp = 0; yn = 0;
      dut_count = 0;
      for (int t = 0; t < 32; t++) begin
        step(1'b0, 1'(t < nn), 1'b0);
        step(1'(t < np), 1'b0, 1'b0);
        yp += int'(t < np); yn += int'(t < nn);
      end
      yo = (yp > yn) ? yp - yn : 0;
      checks++;
      if (dut_count != yo) begin
        failures++;
        $display("window %0d: count %0d, expected max(%0d-%0d,0)=%0d", w, dut_count, yp, yn, yo);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
