// clb: configurable logic block of the FPSA fabric, the source of the control
// signals (window resets, buffer commands) for the PEs and SMBs.
//
// The block holds N_LUT look-up tables of K inputs (128 six-input LUTs in the
// paper, each a 64-bit SRAM). Every LUT input has a multiplexer that picks one
// of the N_IN block input pins or the flip-flop output of any LUT in the
// block; the feedback lets a handful of LUTs form counters and state machines
// without leaving the block. Each LUT has a flip-flop that samples its value
// every clock, and an output multiplexer that sends either the LUT value or
// the flip-flop to the block output pin of that LUT. The LUT count and size
// are the paper's; the input multiplexer reach and the configuration word are
// our own choices.
//
// Configuration: cfg_we with cfg_addr = LUT index writes
//   cfg_data[63:0]                    truth table, bit {in[K-1]..in[0]}
//   cfg_data[64 + i*SEL_W +: SEL_W]   source of input i: < N_IN is pin, else
//                                     flip-flop (source - N_IN)
//   cfg_data[64 + K*SEL_W]            output mode: 1 = registered
//   cfg_data[64 + K*SEL_W + 1]        flip-flop value loaded when written
// Reset clears all tables and flip-flops; writing a LUT loads its flip-flop
// with the init bit, which sets the start state of a counter or FSM.
// Timing: pin_out of a combinational LUT follows pin_in in the same cycle;
// that of a registered LUT changes at the clock. A configuration must not
// close a loop through combinational LUTs and the routing.
module clb #(
  parameter int unsigned N_LUT = 128,
  parameter int unsigned K     = 6,
  parameter int unsigned N_IN  = 256,
  localparam int unsigned SEL_W = $clog2(N_IN + N_LUT),
  localparam int unsigned TBL   = 1 << K,
  localparam int unsigned CFG_W = TBL + K * SEL_W + 2,
  localparam int unsigned LW    = (N_LUT <= 2) ? 1 : $clog2(N_LUT)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_IN-1:0]   pin_in,
  output logic [N_LUT-1:0]  pin_out,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [CFG_W-1:0]  cfg_data
);

  typedef struct packed {
    logic                     init;
    logic                     reg_out;
    logic [K-1:0][SEL_W-1:0]  sel;
    logic [TBL-1:0]           table_bits;
  } lut_cfg_t;

  lut_cfg_t          cfg_q [N_LUT];
  logic [N_LUT-1:0]  ff_q;
  logic [N_LUT-1:0]  lut_val;
  logic [N_IN+N_LUT-1:0] src;

  assign src = {ff_q, pin_in};

  always_comb begin
    for (int n = 0; n < N_LUT; n++) begin
      logic [K-1:0] idx;
      for (int i = 0; i < K; i++) begin
        idx[i] = (int'(cfg_q[n].sel[i]) < N_IN + N_LUT) ? src[cfg_q[n].sel[i]] : 1'b0;
      end
      lut_val[n] = cfg_q[n].table_bits[idx];
      pin_out[n] = cfg_q[n].reg_out ? ff_q[n] : lut_val[n];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_LUT; n++) cfg_q[n] <= '0;
    end else if (cfg_we && int'(cfg_addr) < N_LUT) begin
      cfg_q[cfg_addr[LW-1:0]] <= lut_cfg_t'(cfg_data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff_q <= '0;
    end else begin
      for (int n = 0; n < N_LUT; n++) begin
        if (cfg_we && int'(cfg_addr) == n) ff_q[n] <= cfg_data[CFG_W-1];
        else                               ff_q[n] <= lut_val[n];
      end
    end
  end

endmodule
