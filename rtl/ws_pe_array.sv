// ws_pe_array: the ROWS x COLS weight-stationary PE array of tier 0.
//
// Each column computes one OFMAP channel: row r of every column holds element r of that
// channel's filter vector, and the column sums the products from top to bottom, one PE
// per cycle. Two things differ from a planar WS array and are the point of the design:
//   * weights: w_in carries the whole weight matrix at once (row r comes from RRAM bank r
//     over its own vertical vias) and w_load writes every PE in a single cycle, instead of
//     shifting weights down from the top edge for ROWS cycles;
//   * IFMAP: a_in[r] is multicast to all PEs of row r in the same cycle, instead of being
//     passed from PE to PE left to right.
// The psums still move down one row per cycle, so the order of the MAC operations is the
// one of the planar WS array; the caller must present a_in[r] for a given IFMAP vector r
// cycles after a_in[0] (see ifmap_skew). Then psum_out[c] is the dot product of that
// vector with column c's weights ROWS cycles after a_in[0] was applied, and all columns
// finish the same vector in the same cycle.
//
// Interface: w_in[r][c], a_in[r] and psum_out[c] are packed arrays of bytes / psums.
// The top row's psum input is zero. Sizes default to the paper's 256 x 256.
// The paper gives the array size, the parallel preload, the row multicast and the
// downward psum flow; the row-r-from-bank-r weight mapping and the zero top-row psum
// (no accumulation across folds) are this design's choices.
module ws_pe_array #(
  parameter int unsigned ROWS   = ws_mono3d_pkg::PE_ROWS,
  parameter int unsigned COLS   = ws_mono3d_pkg::PE_COLS,
  parameter int unsigned DATA_W = ws_mono3d_pkg::DATA_W,
  parameter int unsigned ACC_W  = ws_mono3d_pkg::ACC_W
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    w_load,
  input  logic [ROWS-1:0][COLS-1:0][DATA_W-1:0]   w_in,
  input  logic [ROWS-1:0][DATA_W-1:0]             a_in,
  output logic [COLS-1:0][ACC_W-1:0]              psum_out
);

  // psum[r][c] enters PE (r, c) from above; psum[ROWS][c] leaves the bottom edge.
  logic [ROWS:0][COLS-1:0][ACC_W-1:0] psum;

  assign psum[0] = '0;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      ws_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (w_load),
        .w_in     (w_in[r][c]),
        .a_in     (a_in[r]),
        .psum_in  (psum[r][c]),
        .psum_out (psum[r+1][c])
      );
    end
  end

  assign psum_out = psum[ROWS];

endmodule
