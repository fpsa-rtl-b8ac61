// smb: spiking memory block, the on-chip buffer of the FPSA fabric.
//
// Spike trains are expensive to store, spike counts are not, so the block
// stores counts and converts at both ends. Each of LANES inputs has a counter
// that counts spikes over a sampling window of 2^nbits cycles. On commit the
// LANES counts are written, nbits bits each and packed back to back, into a
// bit-addressed SRAM of MEM_BITS bits (16 Kb in the paper). On load the counts
// of a slot are read into LANES spike generators, which replay them as spike
// trains over the next 2^nbits cycles. Because the memory is addressed by bit,
// the same 16 Kb holds more slots when the window is shorter. Converting at
// both ends, the 16 Kb size and the bit indexing are the paper's; the control
// pins, the slot layout, counter saturation and the generator's spike order
// are our own choices.
//
// Interface (the control pins come from a CLB through the routing):
//   spk_in      spikes to record; the counters count every cycle
//   ctl_clr     start a new window: counter = this cycle's spike
//   ctl_commit  write the counters (as they stood before this cycle) to slot
//               addr; slot s starts at bit s*LANES*nbits, a slot that would
//               pass the end of memory is dropped
//   ctl_load    read slot addr into the generators and restart their window
//   spk_out     replayed spikes: lane l spikes in window cycle t (t counted
//               from the cycle after the load) when bitrev(t) < count, which
//               gives exactly count spikes spread evenly over the window
//   cfg_we/addr/data  CFG_REG_NBITS sets nbits (1..NB_MAX, reset 6)
// Counters saturate at 2^nbits-1.
module smb
  import fpsa_pkg::*;
#(
  parameter int unsigned LANES    = 256,
  parameter int unsigned MEM_BITS = 16384,
  parameter int unsigned NB_MAX   = SMB_NB_MAX,
  parameter int unsigned ADDR_W   = SMB_ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LANES-1:0]  spk_in,
  input  logic              ctl_clr,
  input  logic              ctl_commit,
  input  logic              ctl_load,
  input  logic [ADDR_W-1:0] addr,
  output logic [LANES-1:0]  spk_out,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [15:0]       cfg_data
);

  logic [3:0]        nbits_q;
  logic [NB_MAX-1:0] cnt_q  [LANES];
  logic [NB_MAX-1:0] gen_q  [LANES];
  logic [NB_MAX-1:0] phase_q;
  logic              active_q;
  logic              mem    [MEM_BITS];

  logic [NB_MAX-1:0] cnt_max;
  logic [NB_MAX-1:0] last_phase;
  int unsigned       base;
  logic              slot_ok;

  always_comb begin
    cnt_max    = NB_MAX'((1 << nbits_q) - 1);
    last_phase = cnt_max;
    base       = int'(addr) * LANES * int'(nbits_q);
    slot_ok    = (base + LANES * int'(nbits_q)) <= MEM_BITS;
  end

  // Window-size register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nbits_q <= 4'd6;
    else if (cfg_we && cfg_addr == CFG_REG_NBITS && cfg_data[3:0] != 4'd0
             && int'(cfg_data[3:0]) <= NB_MAX)
      nbits_q <= cfg_data[3:0];
  end

  // Spike counters (encoder side).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) cnt_q[l] <= '0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (ctl_clr)                           cnt_q[l] <= NB_MAX'(spk_in[l]);
        else if (spk_in[l] && cnt_q[l] != cnt_max) cnt_q[l] <= cnt_q[l] + 1'b1;
      end
    end
  end

  // Bit-addressed SRAM, written one slot at a time.
  always_ff @(posedge clk) begin
    if (ctl_commit && slot_ok) begin
      for (int l = 0; l < LANES; l++)
        for (int b = 0; b < NB_MAX; b++)
          if (b < int'(nbits_q)) mem[base + l * int'(nbits_q) + b] <= cnt_q[l][b];
    end
  end

  // Spike generators (decoder side).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q  <= '0;
      active_q <= 1'b0;
      for (int l = 0; l < LANES; l++) gen_q[l] <= '0;
    end else if (ctl_load) begin
      phase_q  <= '0;
      active_q <= 1'b1;
      for (int l = 0; l < LANES; l++) begin
        gen_q[l] <= '0;
        if (slot_ok)
          for (int b = 0; b < NB_MAX; b++)
            if (b < int'(nbits_q)) gen_q[l][b] <= mem[base + l * int'(nbits_q) + b];
      end
    end else if (active_q) begin
      phase_q <= phase_q + 1'b1;
      if (phase_q == last_phase) active_q <= 1'b0;
    end
  end

  logic [NB_MAX-1:0] phase_rev;
  assign phase_rev = bitrev(phase_q, nbits_q);

  always_comb begin
    for (int l = 0; l < LANES; l++) spk_out[l] = active_q && (phase_rev < gen_q[l]);
  end

endmodule
