// ifmap_skew: row-dependent delay between the IFMAP SRAM and the PE array.
//
// The IFMAP SRAM delivers one whole IFMAP vector (one byte per array row) per cycle.
// Because psums still travel down the columns one row per cycle, row r must see a
// vector's byte r cycles after row 0 does. This block delays lane r by r register
// stages (lane 0 is a wire), a triangular register file of ROWS*(ROWS-1)/2 bytes.
// The skew itself is not described in the paper; it follows from keeping the WS order
// of MAC operations with multicast inputs, and this realisation is this design's own.
// Registers reset to zero, so bubbles enter the array as zeros.
module ifmap_skew #(
  parameter int unsigned ROWS   = ws_mono3d_pkg::PE_ROWS,
  parameter int unsigned DATA_W = ws_mono3d_pkg::DATA_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ROWS-1:0][DATA_W-1:0] d_in,
  output logic [ROWS-1:0][DATA_W-1:0] d_out
);

  assign d_out[0] = d_in[0];

  for (genvar r = 1; r < ROWS; r++) begin : g_lane
    // sr[0] is the newest stage, sr[r-1] the oldest.
    logic [r-1:0][DATA_W-1:0] sr;
    if (r == 1) begin : g_one
      always_ff @(posedge clk) begin
        if (!rst_n) sr <= '0;
        else        sr[0] <= d_in[r];
      end
    end else begin : g_many
      always_ff @(posedge clk) begin
        if (!rst_n) sr <= '0;
        else        sr <= {sr[r-2:0], d_in[r]};
      end
    end
    assign d_out[r] = sr[r-1];
  end

endmodule
