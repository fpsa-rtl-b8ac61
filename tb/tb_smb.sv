// tb_smb: records spike trains with chosen counts into the spiking memory
// block, commits them to slots, loads slots back and checks that every lane
// replays exactly min(count, 2^nbits - 1) spikes, in the cycles where
// bitrev(t) < count, within 2^nbits cycles after the load. Runs with window
// exponents 6 and 3 to exercise the bit-indexed packing, checks that slots
// keep their data while other slots are written, and that a slot beyond the
// end of memory is dropped. Reduced to 16 lanes and 1024 bits.
module tb_smb;
  import fpsa_pkg::*;
  localparam int LANES = 16, MEM_BITS = 1024, NB_MAX = 8, ADDR_W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [LANES-1:0] spk_in = '0, spk_out;
  logic ctl_clr = 1'b0, ctl_commit = 1'b0, ctl_load = 1'b0, cfg_we = 1'b0;
  logic [ADDR_W-1:0] addr = '0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  int stored [64][LANES];
  int checks = 0, failures = 0;
  int nb;

  smb #(.LANES(LANES), .MEM_BITS(MEM_BITS), .NB_MAX(NB_MAX), .ADDR_W(ADDR_W)) dut (
    .clk, .rst_n, .spk_in, .ctl_clr, .ctl_commit, .ctl_load, .addr, .spk_out,
    .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int brev(input int t, input int n);
    int r = 0;
    for (int i = 0; i < n; i++) r |= ((t >> i) & 1) << (n - 1 - i);
    return r;
  endfunction

  // Record a window: clr, then the given counts as trains, then commit.
  task automatic record(input int slot, input int cnt [LANES]);
    int span;
    span = 1 << nb;
    @(negedge clk);
    ctl_clr = 1'b1; spk_in = '0;
    @(negedge clk);
    ctl_clr = 1'b0;
    for (int t = 0; t < span + 4; t++) begin      // a few extra spikes to saturate
      for (int l = 0; l < LANES; l++) spk_in[l] = t < cnt[l];
      @(negedge clk);
    end
    spk_in = '0;
    ctl_commit = 1'b1; addr = ADDR_W'(slot);
    @(negedge clk);
    ctl_commit = 1'b0;
    if ((slot + 1) * LANES * nb <= MEM_BITS)
      for (int l = 0; l < LANES; l++) stored[slot][l] = (cnt[l] > span - 1) ? span - 1 : cnt[l];
  endtask

  task automatic replay(input int slot, input bit dropped);
    int n [LANES];
    int span;
    span = 1 << nb;
    for (int l = 0; l < LANES; l++) n[l] = 0;
    @(negedge clk);
    ctl_load = 1'b1; addr = ADDR_W'(slot);
    @(negedge clk);
    ctl_load = 1'b0;
    for (int t = 0; t < span + 3; t++) begin
      for (int l = 0; l < LANES; l++) begin
        bit e;
        e = !dropped && t < span && brev(t, nb) < stored[slot][l];
        checks++;
        if (spk_out[l] !== e) begin
          failures++;
          if (failures < 10) $display("slot %0d lane %0d t=%0d out %b expected %b", slot, l, t, spk_out[l], e);
        end
        n[l] += int'(spk_out[l]);
      end
      @(negedge clk);
    end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (n[l] != (dropped ? 0 : stored[slot][l])) begin
        failures++;
        $display("slot %0d lane %0d replayed %0d spikes, stored %0d", slot, l, n[l], stored[slot][l]);
      end
    end
  endtask

  task automatic set_nbits(input int n);
    nb = n;
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_REG_NBITS; cfg_data = 16'(n);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    int cnt [LANES];
    int nslots;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    nb = 6;                                   // reset value
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) set_nbits(3);
      nslots = MEM_BITS / (LANES * nb);
      for (int s = 0; s < nslots; s++) begin
        for (int l = 0; l < LANES; l++) cnt[l] = $urandom_range(0, (1 << nb) + 2);
        record(s, cnt);
      end
      for (int s = nslots - 1; s >= 0; s--) replay(s, 1'b0);
      // A slot past the end of memory is dropped and reads as zero.
      for (int l = 0; l < LANES; l++) cnt[l] = 5;
      record(nslots, cnt);
      replay(nslots, 1'b1);
      replay(0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
