// Shared body of the end-to-end testbenches of fpsa_top. The including module
// defines the localparams GRID_R, GRID_C, W, ROWS, COLS, N_IN, N_LUT, NB
// (window exponent), R0 (row of the data path) and DUT_PARAMS_DEFAULT, and
// instantiates the top as `dut`.
//
// What it builds on the fabric, all through the configuration port:
//   edge inputs --> PE A (R0,0) --> PE B (R0,1) --> SMB S (R0,3) --> PE C (R0,6) --> east edge
//   CLB L (R0,4): a free-running NB-bit window counter and decoders that send
//   the window resets of A, B and C and the clear/commit/load/address
//   commands of S through the routing network.
// A and B are chained without a buffer (B's window starts one cycle after
// A's); S records B's output counts at the end of each window, stores them in
// a slot chosen by a 2-bit window number, and replays them to C in the next
// window. A small maze router in the testbench finds free tracks for every
// net and writes the switch-box and connection-box selects.
//
// Checks: every cycle, every output of C at the chip edge is compared with an
// independent cycle model of the whole pipeline. Mechanisms that must occur
// at least once are counted: neuron firing, spikes blocked by the
// subtracters, columns clamped to zero by the ReLU, direct PE-to-PE hand-over
// in the same window, SMB commit and replay, several SMB slots in use, CLB
// control pulses, and routes that pass through the switch boxes of SMB and
// CLB tiles.

  import fpsa_pkg::*;
  import fpsa_tb_pkg::*;

  localparam int NPI   = (ROWS + SMB_CTL_PINS > N_IN) ? ROWS + SMB_CTL_PINS : N_IN;
  localparam int NPS   = (NPI + 3) / 4;
  localparam int SEL_W = $clog2(N_IN + N_LUT);
  localparam int PE_CFG_W  = 2 * COLS * 8 * 4;
  localparam int CLB_CFG_W = 64 + 6 * SEL_W + 2;
  localparam int CFG_W = (PE_CFG_W > CLB_CFG_W) ? PE_CFG_W : CLB_CFG_W;
  localparam int GAM   = 1 << NB;
  localparam int NWIN  = 6;
  localparam int CA = 0, CB = 1, CS = 3, CL = 4, CC = 6;   // columns of A, B, S, L, C

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRID_C-1:0][W-1:0] edge_in_n = '0, edge_in_s = '0;
  logic [GRID_R-1:0][W-1:0] edge_in_e = '0, edge_in_w = '0;
  logic [GRID_C-1:0][W-1:0] edge_out_n, edge_out_s;
  logic [GRID_R-1:0][W-1:0] edge_out_e, edge_out_w;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_row = '0, cfg_col = '0;
  cfg_tgt_t cfg_tgt = CFG_SB;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;

  int checks = 0, failures = 0;
  longint ncycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) ncycles++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // Configuration writes, one per clock.
  int n_cfg_writes = 0;
  task automatic cfg(input int r, input int c, input cfg_tgt_t tg, input int a, input logic [CFG_W-1:0] d);
    cfg_we = 1'b1; cfg_row = 8'(r); cfg_col = 8'(c); cfg_tgt = tg; cfg_addr = 16'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
    n_cfg_writes++;
  endtask

  // ------------------------------------------------------------------
  // Maze router over the tile grid.
  bit trk_used [GRID_R][GRID_C][4][W];
  int dr [4] = '{-1, 0, 1, 0};
  int dc [4] = '{0, 1, 0, -1};
  int n_passthrough = 0;     // hops through SMB/CLB switch boxes not their own
  int edge_in_next [GRID_R + GRID_C];

  function automatic int opp(input int s); return (s + 2) % 4; endfunction

  function automatic tile_t kind_of(input int c);
    case (c % 9)
      3, 5: return TILE_SMB;
      4:    return TILE_CLB;
      default: return TILE_PE;
    endcase
  endfunction

  function automatic int free_track(input int r, input int c, input int s);
    for (int t = 0; t < W; t++) if (!trk_used[r][c][s][t]) return t;
    return -1;
  endfunction

  // Route a signal available at tile (r0,c0) as switch-box source sel0 to
  // the input pin k of tile (rd,cd) (to_edge = 0), or out of the east edge
  // (to_edge = 1, returns the edge row and track). Returns 0 when no route.
  task automatic route(input int r0, input int c0, input int sel0, input int rd, input int cd,
                       input int k, input bit to_edge, output int out_r, output int out_t, output bit ok);
    int side, tr, tc;
    int prev [GRID_R][GRID_C];
    bit seen [GRID_R][GRID_C];
    int qr [$], qc [$];
    int pr [$], pc [$], pd [$];
    int cr, cc, sel, found_r, found_c;
    ok = 0; out_r = -1; out_t = -1;
    side = k % 4;
    if (!to_edge) begin
      tr = rd + dr[side]; tc = cd + dc[side];   // neighbour on the pin's side
      if (tr < 0 || tr >= GRID_R || tc < 0 || tc >= GRID_C) return;
    end
    foreach (seen[i, j]) begin seen[i][j] = 0; prev[i][j] = -1; end
    qr.push_back(r0); qc.push_back(c0); seen[r0][c0] = 1;
    found_r = -1; found_c = -1;
    while (qr.size() > 0) begin
      cr = qr.pop_front(); cc = qc.pop_front();
      if (!to_edge && cr == tr && cc == tc && free_track(cr, cc, opp(side)) >= 0) begin
        found_r = cr; found_c = cc; break;
      end
      if (to_edge && cc == GRID_C - 1 && free_track(cr, cc, SIDE_E) >= 0) begin
        found_r = cr; found_c = cc; break;
      end
      for (int d = 0; d < 4; d++) begin
        int nr, nc;
        nr = cr + dr[d]; nc = cc + dc[d];
        if (nr < 0 || nr >= GRID_R || nc < 0 || nc >= GRID_C) continue;
        if (seen[nr][nc] || free_track(cr, cc, d) < 0) continue;
        seen[nr][nc] = 1; prev[nr][nc] = d;
        qr.push_back(nr); qc.push_back(nc);
      end
    end
    if (found_r < 0) return;
    // Walk back to list the hops, then configure them from the source.
    cr = found_r; cc = found_c;
    while (!(cr == r0 && cc == c0)) begin
      int d;
      d = prev[cr][cc];
      cr = cr - dr[d]; cc = cc - dc[d];
      pr.push_front(cr); pc.push_front(cc); pd.push_front(d);
    end
    // Final hop into the destination (or out of the chip).
    pr.push_back(found_r); pc.push_back(found_c); pd.push_back(to_edge ? int'(SIDE_E) : opp(side));
    sel = sel0;
    for (int h = 0; h < pr.size(); h++) begin
      int t;
      t = free_track(pr[h], pc[h], pd[h]);
      trk_used[pr[h]][pc[h]][pd[h]][t] = 1;
      cfg(pr[h], pc[h], CFG_SB, pd[h] * W + t, CFG_W'(sel));
      if (h > 0 && kind_of(pc[h]) != TILE_PE) n_passthrough++;
      sel = opp(pd[h]) * W + t + 1;
      if (h == pr.size() - 1) begin
        if (to_edge) begin out_r = pr[h]; out_t = t; end
        else cfg(rd, cd, cfg_tgt_t'(int'(CFG_CB_N) + side), k / 4, CFG_W'(t + 1));
      end
    end
    ok = 1;
  endtask

  task automatic must_route(input int r0, input int c0, input int sel0, input int rd, input int cd, input int k);
    int orr, ot;
    bit ok;
    route(r0, c0, sel0, rd, cd, k, 1'b0, orr, ot, ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("no route to tile (%0d,%0d) pin %0d", rd, cd, k);
    end
  endtask

  // Edge input i of the data path: returns the (row, track) on the west edge
  // or (-1 - column, track) on the north edge.
  int xin_r [ROWS], xin_t [ROWS];

  task automatic route_input(input int i);
    int e, r0, c0, s0, t;
    bit direct;
    // Each input enters from the edge nearest to the side of A its pin sits on:
    // west pins from the west edge of row R0, south pins from the west edge of
    // row R0+1, north pins from the north edge of column 0, east pins from the
    // north edge of column 1.
    case (i % 4)
      int'(SIDE_W): e = R0;
      int'(SIDE_S): e = R0 + 1;
      int'(SIDE_N): e = GRID_R;
      default:      e = GRID_R + 1;
    endcase
    if (e < GRID_R) begin r0 = e; c0 = 0; s0 = SIDE_W; end
    else begin r0 = 0; c0 = e - GRID_R; s0 = SIDE_N; end
    t = edge_in_next[e]++;
    xin_r[i] = (s0 == SIDE_W) ? r0 : -1 - c0;
    xin_t[i] = t;
    direct = (r0 == R0 && c0 == CA && (i % 4) == s0);
    if (direct) cfg(R0, CA, cfg_tgt_t'(int'(CFG_CB_N) + s0), i / 4, CFG_W'(t + 1));
    else must_route(r0, c0, s0 * W + t + 1, R0, CA, i);
  endtask

  // ------------------------------------------------------------------
  // Reference model of the pipeline.
  int ga [ROWS][2*COLS], gb [ROWS][2*COLS], gc [ROWS][2*COLS];
  int eta_a, eta_b, eta_c;
  typedef struct { longint v [2*COLS]; bit spk [2*COLS]; bit pend [COLS]; } pe_state_t;
  pe_state_t sa, sb, sc;
  int smb_cnt [ROWS];
  int smb_mem [4][ROWS];
  int smb_gen [ROWS];
  int smb_phase;
  bit smb_active;
  int q_ref, wr_ref, w0_ref, w1_ref;

  // mechanism counters
  int n_fire = 0, n_block = 0, n_relu0 = 0, n_handover = 0, n_commit = 0, n_replay_spk = 0;
  int n_ctl_pulse = 0, n_out_spk = 0;
  bit slot_seen [4];

  function automatic int brev(input int t, input int n);
    int r = 0;
    for (int i = 0; i < n; i++) r |= ((t >> i) & 1) << (n - 1 - i);
    return r;
  endfunction

  // Outputs of a PE model in the current cycle (combinational subtracter).
  function automatic logic [COLS-1:0] pe_out(input pe_state_t s);
    logic [COLS-1:0] o;
    for (int j = 0; j < COLS; j++) o[j] = s.spk[2*j] && !s.spk[2*j+1] && !s.pend[j];
    return o;
  endfunction

  task automatic pe_step(inout pe_state_t s, input int g [ROWS][2*COLS], input int eta,
                         input logic [ROWS-1:0] in, input bit wr);
    for (int j = 0; j < COLS; j++) begin
      bit p, n;
      p = s.spk[2*j]; n = s.spk[2*j+1];
      if (p && !n && s.pend[j]) n_block++;
      if (n && !p && s.pend[j] && !wr) n_relu0++;
      if (wr) s.pend[j] = 0;
      else if (p && !n) s.pend[j] = 0;
      else if (n && !p) s.pend[j] = 1;
    end
    for (int c = 0; c < 2 * COLS; c++) begin
      longint q;
      q = 0;
      for (int r = 0; r < ROWS; r++) if (in[r]) q += g[r][c];
      if (wr) begin s.v[c] = 0; s.spk[c] = 0; end
      else if (s.v[c] + q >= eta) begin s.v[c] = 0; s.spk[c] = 1; n_fire++; end
      else begin s.v[c] = s.v[c] + q; s.spk[c] = 0; end
    end
  endtask

  // ------------------------------------------------------------------
  function automatic logic [7:0][3:0] spread(input int s);
    logic [7:0][3:0] r;
    for (int k = 0; k < 8; k++) begin
      int x;
      x = (s > 15) ? 15 : s;
      r[k] = 4'(x);
      s -= x;
    end
    return r;
  endfunction

  task automatic program_pe(input int c, output int g [ROWS][2*COLS], input int gmax, input int eta);
    logic [CFG_W-1:0] d;
    for (int r = 0; r < ROWS; r++) begin
      d = '0;
      for (int j = 0; j < COLS; j++) begin
        int w;
        // Mostly positive weights; every fourth column mostly negative so
        // that its negative neuron outruns the positive one.
        if (j % 4 == 3) w = gmax / 2 - int'($urandom_range(0, gmax + gmax / 2));
        else w = $urandom_range(0, gmax + gmax / 2) - gmax / 2;
        g[r][2*j]   = (w > 0) ? w : 0;
        g[r][2*j+1] = (w < 0) ? -w : 0;
        d[(2*j) * 32 +: 32]   = spread(g[r][2*j]);
        d[(2*j+1) * 32 +: 32] = spread(g[r][2*j+1]);
      end
      cfg(R0, c, CFG_BLK, r, d);
    end
    cfg(R0, c, CFG_BLK, int'(CFG_REG_ETA), CFG_W'(eta));
  endtask

  task automatic clb_lut(input int n, input logic [63:0] tbl, input int sel [6], input bit r);
    logic [255:0] w;
    w = lut_word(tbl, sel, SEL_W, r, 1'b0);
    cfg(R0, CL, CFG_BLK, n, CFG_W'(w[CLB_CFG_W-1:0]));
  endtask

  // ------------------------------------------------------------------
  int xw [NWIN + 2][ROWS];
  int cnt_c_dut [COLS], cnt_c_ref [COLS];
  int c_out_r [COLS], c_out_t [COLS];

  initial begin
    int sel [6];
    int orr, ot;
    bit ok;
    int gmax;
    longint t_cfg0, t_run0;
    foreach (trk_used[a, b, c2, d]) trk_used[a][b][c2][d] = 0;
    foreach (edge_in_next[i]) edge_in_next[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    t_cfg0 = ncycles;

    // Window size of the SMB.
    cfg(R0, CS, CFG_BLK, int'(CFG_REG_NBITS), CFG_W'(NB));

    // Weights and thresholds. eta is set so that a column is charged about
    // half of eta per cycle when half of its inputs spike.
    gmax = 24;
    eta_a = ROWS * gmax / 6;
    eta_b = ROWS * gmax / 12;
    eta_c = ROWS * gmax / 12;
    program_pe(CA, ga, gmax, eta_a);
    program_pe(CB, gb, gmax, eta_b);
    program_pe(CC, gc, gmax, eta_c);

    // Data nets.
    for (int i = 0; i < ROWS; i++) route_input(i);
    // Pins facing the source (west side) first, while the direct channel is free.
    for (int pass = 0; pass < 2; pass++)
      for (int j = 0; j < ROWS; j++)
        if ((j % 4 == int'(SIDE_W)) == (pass == 0)) begin
          must_route(R0, CA, 4 * W + 1 + j, R0, CB, j);
          must_route(R0, CB, 4 * W + 1 + j, R0, CS, j);
          must_route(R0, CS, 4 * W + 1 + j, R0, CC, j);
        end
    for (int j = 0; j < COLS; j++) begin
      route(R0, CC, 4 * W + 1 + j, 0, 0, 0, 1'b1, orr, ot, ok);
      c_out_r[j] = orr; c_out_t[j] = ot;
      checks++;
      if (!ok) begin failures++; $display("no route from C output %0d to the edge", j); end
    end
    // Control nets from the CLB: LUT n is output pin n of the CLB.
    must_route(R0, CL, 4 * W + 1 + 11, R0, CA, ROWS);       // A window reset
    must_route(R0, CL, 4 * W + 1 + 12, R0, CB, ROWS);       // B window reset
    must_route(R0, CL, 4 * W + 1 + 13, R0, CS, ROWS);       // S clear
    must_route(R0, CL, 4 * W + 1 + 13, R0, CS, ROWS + 1);   // S commit
    must_route(R0, CL, 4 * W + 1 + 14, R0, CS, ROWS + 2);   // S load
    must_route(R0, CL, 4 * W + 1 + 9,  R0, CS, ROWS + 3);   // S addr[0] = w0
    must_route(R0, CL, 4 * W + 1 + 10, R0, CS, ROWS + 4);   // S addr[1] = w1
    must_route(R0, CL, 4 * W + 1 + 15, R0, CC, ROWS);       // C window reset

    // CLB: decoders and window number first, counter bits last (bit 0 starts it).
    for (int i = 0; i < 6; i++) sel[i] = (i < NB) ? N_IN + i : 0;
    clb_lut(11, tbl_equals(0, NB), sel, 1'b0);
    clb_lut(12, tbl_equals(1, NB), sel, 1'b0);
    clb_lut(13, tbl_equals(2, NB), sel, 1'b0);
    clb_lut(14, tbl_equals(3, NB), sel, 1'b0);
    clb_lut(15, tbl_equals(3, NB), sel, 1'b0);
    clb_lut(8, tbl_equals(GAM - 2, NB), sel, 1'b1);           // wr: registered, high at q = GAM-1
    sel = '{N_IN + 8, N_IN + 9, 0, 0, 0, 0};
    clb_lut(9, tbl_toggle(2), sel, 1'b1);                      // w0 ^= wr
    sel = '{N_IN + 8, N_IN + 9, N_IN + 10, 0, 0, 0};
    clb_lut(10, tbl_toggle(3), sel, 1'b1);                     // w1 ^= wr & w0
    for (int k = NB - 1; k >= 0; k--) begin
      for (int i = 0; i < 6; i++) sel[i] = (i <= k) ? N_IN + i : 0;
      clb_lut(k, tbl_count_bit(k), sel, 1'b1);
    end
    $display("configuration: %0d writes in %0d cycles, %0d switch-box hops through SMB/CLB tiles",
             n_cfg_writes, ncycles - t_cfg0, n_passthrough);

    // Run. The counter is 0 in this cycle.
    q_ref = 0; wr_ref = 0; w0_ref = 0; w1_ref = 0;
    for (int c = 0; c < 2 * COLS; c++) begin
      sa.v[c] = 0; sa.spk[c] = 0; sb.v[c] = 0; sb.spk[c] = 0; sc.v[c] = 0; sc.spk[c] = 0;
    end
    for (int j = 0; j < COLS; j++) begin sa.pend[j] = 0; sb.pend[j] = 0; sc.pend[j] = 0; end
    for (int l = 0; l < ROWS; l++) begin smb_cnt[l] = 0; smb_gen[l] = 0; end
    for (int s = 0; s < 4; s++) for (int l = 0; l < ROWS; l++) smb_mem[s][l] = 0;
    smb_phase = 0; smb_active = 0;
    for (int w = 0; w < NWIN + 2; w++)
      for (int i = 0; i < ROWS; i++) xw[w][i] = (w < NWIN) ? $urandom_range(0, GAM - 1) : 0;
    t_run0 = ncycles;

    for (int cyc = 0; cyc < (NWIN + 2) * GAM; cyc++) begin
      int win;
      logic [ROWS-1:0] xs, a_o, b_o, s_o;
      logic [COLS-1:0] c_o;
      bit pa, pb, pcl, pld, pc;
      win = cyc / GAM;
      // Input spikes of window win in counter cycles 1 .. GAM-1.
      for (int i = 0; i < ROWS; i++) xs[i] = (q_ref >= 1) && brev(q_ref - 1, NB) < xw[win][i];
      for (int i = 0; i < ROWS; i++) begin
        if (xin_r[i] >= 0) edge_in_w[xin_r[i]][xin_t[i]] = xs[i];
        else edge_in_n[-1 - xin_r[i]][xin_t[i]] = xs[i];
      end
      pa = (q_ref == 0); pb = (q_ref == 1); pcl = (q_ref == 2); pld = (q_ref == 3); pc = (q_ref == 3);
      n_ctl_pulse += int'(pa) + int'(pb) + int'(pcl) + int'(pld);
      a_o = ROWS'(pe_out(sa));
      b_o = ROWS'(pe_out(sb));
      for (int l = 0; l < ROWS; l++) s_o[l] = smb_active && brev(smb_phase, NB) < smb_gen[l];
      c_o = pe_out(sc);
      if (|a_o && |b_o && !pb) n_handover++;
      for (int l = 0; l < ROWS; l++) n_replay_spk += int'(s_o[l]);
      #1;
      for (int j = 0; j < COLS; j++) begin
        logic got;
        got = edge_out_e[c_out_r[j]][c_out_t[j]];
        checks++;
        if (got !== c_o[j]) begin
          failures++;
          if (failures < 10) $display("cycle %0d (q=%0d) C out %0d = %b expected %b", cyc, q_ref, j, got, c_o[j]);
        end
        n_out_spk += int'(got);
      end
      // Advance the model to the next clock.
      pe_step(sa, ga, eta_a, xs, pa);
      pe_step(sb, gb, eta_b, a_o, pb);
      pe_step(sc, gc, eta_c, s_o, pc);
      if (pcl) begin
        int slot;
        slot = w0_ref + 2 * w1_ref;
        for (int l = 0; l < ROWS; l++) smb_mem[slot][l] = smb_cnt[l];
        n_commit++; slot_seen[slot] = 1;
      end
      for (int l = 0; l < ROWS; l++) begin
        if (pcl) smb_cnt[l] = int'(b_o[l]);
        else if (b_o[l] && smb_cnt[l] < GAM - 1) smb_cnt[l]++;
      end
      if (pld) begin
        for (int l = 0; l < ROWS; l++) smb_gen[l] = smb_mem[w0_ref + 2 * w1_ref][l];
        smb_phase = 0; smb_active = 1;
      end else if (smb_active) begin
        if (smb_phase == GAM - 1) smb_active = 0;
        smb_phase++;
      end
      begin
        int wr_n;
        wr_n = (q_ref == GAM - 2);
        if (wr_ref) begin
          w1_ref = w1_ref ^ w0_ref;
          w0_ref = w0_ref ^ 1;
        end
        wr_ref = wr_n;
      end
      q_ref = (q_ref + 1) % GAM;
      @(negedge clk);
    end
    // Mechanism coverage.
    check_seen("neuron firing", n_fire);
    check_seen("subtracter blocking", n_block);
    check_seen("excess negative spikes (ReLU clamp)", n_relu0);
    check_seen("direct PE-to-PE hand-over", n_handover);
    check_seen("SMB commit", n_commit);
    check_seen("SMB replay spikes", n_replay_spk);
    check_seen("CLB control pulses", n_ctl_pulse);
    check_seen("output spikes of C at the chip edge", n_out_spk);
    check_seen("routes through SMB/CLB switch boxes", n_passthrough);
    check_seen("SMB slots 0..2 used", int'(slot_seen[0] && slot_seen[1] && slot_seen[2]));
    $display("run: %0d windows of %0d cycles in %0d cycles", NWIN + 2, GAM, ncycles - t_run0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  task automatic check_seen(input string what, input int n);
    $display("  %-40s %0d", what, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("  mechanism never happened: %s", what);
    end
  endtask
