// fpsa_top: the FPSA chip, a GRID_R x GRID_C array of tiles joined by the
// reconfigurable routing network.
//
// Every tile (fpsa_tile) is a PE, an SMB or a CLB under its switch box and
// connection boxes. Column c holds the kind given by col_kind(c): the
// repeating pattern PE PE PE SMB CLB SMB PE PE PE of the paper's architecture
// drawing, whose grid (8 rows of 9 tiles) is also the default size. Each
// tile's leaving tracks on a side are the arriving tracks of its neighbour on
// that side; at the array border they leave the chip as edge_out_* and the
// neighbour's tracks come in as edge_in_*, which is how spike trains enter and
// leave. All tiles run on one clock; a routed path is a fixed combinational
// wire through switch boxes, so a spike leaving one block reaches the next in
// the same cycle, and the blocks' own one-cycle latency forms the pipeline.
//
// Configuration port: cfg_we writes cfg_data to target cfg_tgt at cfg_addr of
// tile (cfg_row, cfg_col); see fpsa_pkg for the targets. One write per clock.
// The sizes of the blocks are the paper's; the array size, channel width
// ROUTE_W and the configuration port are our own choices.
module fpsa_top
  import fpsa_pkg::*;
#(
  parameter int unsigned GRID_R = 8,
  parameter int unsigned GRID_C = 9,
  parameter int unsigned W      = ROUTE_W,
  parameter int unsigned ROWS   = XBAR_ROWS,
  parameter int unsigned COLS   = XBAR_COLS,
  parameter int unsigned CELLS  = XBAR_CELLS,
  parameter int unsigned LVL_W  = XBAR_LVL_W,
  parameter int unsigned MEM_BITS = SMB_BITS,
  parameter int unsigned N_LUT  = CLB_LUTS,
  parameter int unsigned N_IN   = XBAR_ROWS,
  localparam int unsigned PE_CFG_W  = 2 * COLS * CELLS * LVL_W,
  localparam int unsigned CLB_CFG_W = (1 << LUT_K) + LUT_K * $clog2(N_IN + N_LUT) + 2,
  localparam int unsigned CFG_W = (PE_CFG_W > CLB_CFG_W) ? PE_CFG_W : CLB_CFG_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [GRID_C-1:0][W-1:0]      edge_in_n,
  input  logic [GRID_C-1:0][W-1:0]      edge_in_s,
  input  logic [GRID_R-1:0][W-1:0]      edge_in_e,
  input  logic [GRID_R-1:0][W-1:0]      edge_in_w,
  output logic [GRID_C-1:0][W-1:0]      edge_out_n,
  output logic [GRID_C-1:0][W-1:0]      edge_out_s,
  output logic [GRID_R-1:0][W-1:0]      edge_out_e,
  output logic [GRID_R-1:0][W-1:0]      edge_out_w,
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_row,
  input  logic [7:0]                    cfg_col,
  input  cfg_tgt_t                      cfg_tgt,
  input  logic [15:0]                   cfg_addr,
  input  logic [CFG_W-1:0]              cfg_data
);

  function automatic tile_t col_kind(input int c);
    case (c % 9)
      3, 5:    return TILE_SMB;
      4:       return TILE_CLB;
      default: return TILE_PE;
    endcase
  endfunction

  logic [3:0][W-1:0] arr [GRID_R][GRID_C];
  logic [3:0][W-1:0] dep [GRID_R][GRID_C];

  for (genvar r = 0; r < GRID_R; r++) begin : g_row
    for (genvar c = 0; c < GRID_C; c++) begin : g_col
      // Arriving tracks: from the neighbour's opposite side, or the chip edge.
      if (r == 0) begin : g_n_edge
        assign arr[r][c][SIDE_N] = edge_in_n[c];
        assign edge_out_n[c]     = dep[r][c][SIDE_N];
      end else begin : g_n
        assign arr[r][c][SIDE_N] = dep[r-1][c][SIDE_S];
      end
      if (r == GRID_R - 1) begin : g_s_edge
        assign arr[r][c][SIDE_S] = edge_in_s[c];
        assign edge_out_s[c]     = dep[r][c][SIDE_S];
      end else begin : g_s
        assign arr[r][c][SIDE_S] = dep[r+1][c][SIDE_N];
      end
      if (c == 0) begin : g_w_edge
        assign arr[r][c][SIDE_W] = edge_in_w[r];
        assign edge_out_w[r]     = dep[r][c][SIDE_W];
      end else begin : g_w
        assign arr[r][c][SIDE_W] = dep[r][c-1][SIDE_E];
      end
      if (c == GRID_C - 1) begin : g_e_edge
        assign arr[r][c][SIDE_E] = edge_in_e[r];
        assign edge_out_e[r]     = dep[r][c][SIDE_E];
      end else begin : g_e
        assign arr[r][c][SIDE_E] = dep[r][c+1][SIDE_W];
      end

      fpsa_tile #(
        .TTYPE(col_kind(c)), .W(W), .ROWS(ROWS), .COLS(COLS), .CELLS(CELLS),
        .LVL_W(LVL_W), .MEM_BITS(MEM_BITS), .N_LUT(N_LUT), .N_IN(N_IN)
      ) u_tile (
        .clk     (clk),
        .rst_n   (rst_n),
        .arr     (arr[r][c]),
        .dep     (dep[r][c]),
        .cfg_we  (cfg_we && int'(cfg_row) == r && int'(cfg_col) == c),
        .cfg_tgt (cfg_tgt),
        .cfg_addr(cfg_addr),
        .cfg_data(cfg_data)
      );
    end
  end

endmodule
