// tb_connection_box: writes random pin-to-track selects (including open pins),
// then drives random track values and checks each pin against the track its
// select names, or 0 when open. Also checks that reset opens every pin.
module tb_connection_box;
  localparam int W = 96, NP = 67;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  logic [W-1:0] trk = '0;
  logic [NP-1:0] pin;
  int sel [NP];
  int checks = 0, failures = 0;

  connection_box #(.W(W), .N_PIN(NP)) dut (.clk, .rst_n, .trk, .pin, .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_pins();
    for (int v = 0; v < 50; v++) begin
      trk = {$urandom(), $urandom(), $urandom()};
      #1;
      for (int p = 0; p < NP; p++) begin
        logic e;
        e = (sel[p] == 0) ? 1'b0 : trk[sel[p] - 1];
        checks++;
        if (pin[p] !== e) begin
          failures++;
          if (failures < 10) $display("pin %0d = %b expected %b (sel %0d)", p, pin[p], e, sel[p]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NP; p++) sel[p] = 0;
    check_pins();
    for (int pass = 0; pass < 4; pass++) begin
      for (int p = 0; p < NP; p++) begin
        sel[p] = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, W);
        @(negedge clk);
        cfg_we = 1'b1; cfg_addr = 16'(p); cfg_data = 16'(sel[p]);
        @(negedge clk);
        cfg_we = 1'b0;
      end
      check_pins();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
