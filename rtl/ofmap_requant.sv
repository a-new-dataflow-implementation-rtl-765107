// ofmap_requant: turns the bottom-edge psums into 8-bit OFMAP bytes.
//
// Each column's ACC_W-bit psum is shifted right arithmetically by `shift` bits and then
// saturated to the signed 8-bit range [-128, 127]. Combinational.
//
// The paper stores OFMAPs in an SRAM whose 16 banks of 16-byte words take exactly one
// byte per column per cycle and says the array uses 8-bit integer MACs, but it does not
// say how psums are brought back to 8 bits. The shift-and-saturate rule (truncating,
// no rounding, no activation function) is this design's own choice.
module ofmap_requant #(
  parameter int unsigned COLS    = ws_mono3d_pkg::PE_COLS,
  parameter int unsigned ACC_W   = ws_mono3d_pkg::ACC_W,
  parameter int unsigned DATA_W  = ws_mono3d_pkg::DATA_W,
  parameter int unsigned SHIFT_W = ws_mono3d_pkg::SHIFT_W
) (
  input  logic [COLS-1:0][ACC_W-1:0]  psum,
  input  logic [SHIFT_W-1:0]          shift,
  output logic [COLS-1:0][DATA_W-1:0] q
);

  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 << (DATA_W - 1));

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [ACC_W-1:0] v;
      v = $signed(psum[c]) >>> shift;
      if (v > QMAX)      q[c] = QMAX[DATA_W-1:0];
      else if (v < QMIN) q[c] = QMIN[DATA_W-1:0];
      else               q[c] = v[DATA_W-1:0];
    end
  end

endmodule
