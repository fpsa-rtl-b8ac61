// tb_neuron_unit: drives the integrate-and-fire neuron with random charges,
// thresholds and window resets and compares every output spike with an
// independent model of the integrate / fire / discharge-to-reset rule. It
// also checks the rate relation of the paper: over a window with constant
// charge q per cycle, the spike count is floor(G / ceil(eta / q)) for G
// charged cycles.
module tb_neuron_unit;
  localparam int CHG_W = 16, V_W = 20;
  logic clk = 1'b0, rst_n = 1'b0, win_rst = 1'b0, spike;
  logic [V_W-1:0] eta;
  logic [CHG_W-1:0] charge;
  int checks = 0, failures = 0;
  longint v_ref = 0;
  bit spike_ref = 0;

  neuron_unit #(.CHG_W(CHG_W), .V_W(V_W)) dut (.clk, .rst_n, .win_rst, .eta, .charge, .spike);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input int q, input bit wr);
    charge = CHG_W'(q); win_rst = wr;
    @(posedge clk);
    if (wr) begin v_ref = 0; spike_ref = 0; end
    else if (v_ref + q >= longint'(eta)) begin v_ref = 0; spike_ref = 1; end
    else begin v_ref = v_ref + q; spike_ref = 0; end
    #1;
    checks++;
    if (spike !== spike_ref) begin
      failures++;
      $display("spike %b expected %b (v=%0d eta=%0d)", spike, spike_ref, v_ref, eta);
    end
  endtask

  initial begin
    eta = 20'd1000; charge = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int i = 0; i < 5000; i++) begin
      if (i % 500 == 0) eta = V_W'($urandom_range(1, 40000));
      step($urandom_range(0, 30720), $urandom_range(0, 40) == 0);
    end
    // Rate check: 64-cycle windows with a constant charge.
    for (int w = 0; w < 50; w++) begin
      int q, n, per, expn;
      q = $urandom_range(1, 3000);
      eta = V_W'($urandom_range(q, 20 * q));
      step(0, 1);
      n = 0;
      for (int t = 0; t < 64; t++) begin
        step(q, 0);
        n += int'(spike);
      end
      per = (int'(eta) + q - 1) / q;
      expn = 64 / per;
      checks++;
      if (n != expn) begin
        failures++;
        $display("rate: q=%0d eta=%0d count %0d expected %0d", q, eta, n, expn);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
