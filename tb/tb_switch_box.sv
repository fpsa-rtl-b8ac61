// tb_switch_box: gives every leaving track a random source (an arriving track
// of any side, a block output, or open) and checks all leaving tracks against
// those sources for random input values; also checks fan-out (one source on
// several tracks) and that reset opens every track.
module tb_switch_box;
  localparam int W = 96, NBO = 256;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  logic [3:0][W-1:0] arr = '0, dep;
  logic [NBO-1:0] blk_out = '0;
  int sel [4*W];
  int checks = 0, failures = 0;

  switch_box #(.W(W), .N_BO(NBO)) dut (.clk, .rst_n, .arr, .blk_out, .dep, .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_tracks();
    for (int v = 0; v < 40; v++) begin
      for (int s = 0; s < 4; s++) arr[s] = {$urandom(), $urandom(), $urandom()};
      for (int b = 0; b < NBO; b += 32) blk_out[b +: 32] = $urandom();
      #1;
      for (int o = 0; o < 4 * W; o++) begin
        logic e;
        if (sel[o] == 0) e = 1'b0;
        else if (sel[o] <= 4 * W) e = arr[(sel[o] - 1) / W][(sel[o] - 1) % W];
        else e = blk_out[sel[o] - 1 - 4 * W];
        checks++;
        if (dep[o / W][o % W] !== e) begin
          failures++;
          if (failures < 10) $display("track %0d = %b expected %b (sel %0d)", o, dep[o / W][o % W], e, sel[o]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int o = 0; o < 4 * W; o++) sel[o] = 0;
    check_tracks();
    for (int pass = 0; pass < 4; pass++) begin
      for (int o = 0; o < 4 * W; o++) begin
        case ($urandom_range(0, 3))
          0: sel[o] = 0;
          1: sel[o] = 4 * W + 1 + (o % 7);        // fan-out of a few block outputs
          default: sel[o] = $urandom_range(1, 4 * W + NBO);
        endcase
        @(negedge clk);
        cfg_we = 1'b1; cfg_addr = 16'(o); cfg_data = 16'(sel[o]);
        @(negedge clk);
        cfg_we = 1'b0;
      end
      check_tracks();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
