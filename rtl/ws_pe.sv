// ws_pe: one processing element of the WS-Mono3D systolic array.
//
// The PE keeps one stationary weight. In the preload cycle (w_load high) the weight is
// written straight from the filter RRAM word that reaches the array over the vertical
// vias, so all PEs of the array load at once; nothing is passed from PE to PE. Every
// cycle the PE multiplies the IFMAP byte multicast along its row (a_in) by the weight
// and adds the psum of the PE above (psum_in); the sum is registered and goes to the
// PE below on the next cycle (psum_out). Operands are signed 8-bit integers.
//
// Timing: psum_out(t+1) = psum_in(t) + a_in(t) * weight(t); a weight loaded in cycle t
// is used from cycle t+1 on. Reset clears the weight and the psum.
//
// From the paper: the stationary weight, the 8-bit integer MAC, parallel weight
// preloading, row multicast of the IFMAP and top-to-bottom psum forwarding. Own
// choices: signed operands, the accumulator width and the synchronous active-low reset.
module ws_pe #(
  parameter int unsigned DATA_W = ws_mono3d_pkg::DATA_W,
  parameter int unsigned ACC_W  = ws_mono3d_pkg::ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,
  input  logic [DATA_W-1:0] w_in,
  input  logic [DATA_W-1:0] a_in,
  input  logic [ACC_W-1:0]  psum_in,
  output logic [ACC_W-1:0]  psum_out
);

  logic [DATA_W-1:0]          w_q;
  logic signed [2*DATA_W-1:0] prod;
  logic [ACC_W-1:0]           prod_ext;

  assign prod     = $signed(a_in) * $signed(w_q);
  assign prod_ext = {{(ACC_W - 2*DATA_W){prod[2*DATA_W-1]}}, prod};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_q      <= '0;
      psum_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      psum_out <= psum_in + prod_ext;
    end
  end

endmodule
