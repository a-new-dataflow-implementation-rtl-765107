// mem_1r1w: one memory bank with one read port and one write port.
//
// Used for every SRAM bank (IFMAP and OFMAP) and every RRAM bank (filter weights):
// the design gives each bank one read and one write port, each with its own vertical
// vias, and all banks can be accessed in parallel. Both ports are synchronous to clk.
// A write (we) stores wdata at waddr at the clock edge. A read (re) returns the word at
// raddr in rdata one cycle later; rdata then holds that word until the next read, which
// lets a fetched RRAM word wait at the bank output until the array preloads it.
// A read of the address written in the same cycle returns the old word.
//
// The array is plain behavioural storage; the SRAM/RRAM macros, their sense amplifiers
// and H-tree routing are not modelled at the circuit level. Contents are not reset.
// Latency (1 cycle) and the hold-until-next-read output are this design's choices.
module mem_1r1w #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned WIDTH = 2048,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
