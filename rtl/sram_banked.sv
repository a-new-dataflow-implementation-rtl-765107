// sram_banked: a multi-bank on-chip SRAM, used for both the IFMAP and the OFMAP buffer.
//
// The paper's buffers are 2 MB each, built from 16 banks with 16-byte words (8192 words
// per bank); they sit on tier 1, directly above the PE array, and every bank has its own
// read port and write port reaching the array through vertical vias, so all banks can be
// accessed in the same cycle. Reading all 16 banks at one address gives 256 bytes: one
// IFMAP byte for each of the 256 array rows (IFMAP buffer), or room for one output byte of
// each of the 256 columns (OFMAP buffer).
//
// Interface: per-bank arrays of ports, bank b on index b, each as in mem_1r1w
// (synchronous write; read data one cycle after re, held until the next read).
// Byte j of bank b's word (bits 8j+7:8j) belongs to array row / column b*WORD_BYTES + j;
// that lane mapping is made by the top level, not here.
module sram_banked #(
  parameter int unsigned BANKS      = ws_mono3d_pkg::SRAM_BANKS,
  parameter int unsigned WORD_BYTES = ws_mono3d_pkg::SRAM_WORD_BYTES,
  parameter int unsigned BANK_WORDS = ws_mono3d_pkg::SRAM_BANK_WORDS,
  localparam int unsigned WIDTH     = 8 * WORD_BYTES,
  localparam int unsigned AW        = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [BANKS-1:0]            we,
  input  logic [BANKS-1:0][AW-1:0]    waddr,
  input  logic [BANKS-1:0][WIDTH-1:0] wdata,
  input  logic [BANKS-1:0]            re,
  input  logic [BANKS-1:0][AW-1:0]    raddr,
  output logic [BANKS-1:0][WIDTH-1:0] rdata
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    mem_1r1w #(.WORDS(BANK_WORDS), .WIDTH(WIDTH)) u_bank (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (we[b]),
      .waddr (waddr[b]),
      .wdata (wdata[b]),
      .re    (re[b]),
      .raddr (raddr[b]),
      .rdata (rdata[b])
    );
  end

endmodule
