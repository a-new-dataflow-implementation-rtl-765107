// filter_rram: the 32 MB weight store on tiers 2 to 5.
//
// Four RRAM tiers of 64 banks each (256 banks), every bank 128 KB with 256-byte words,
// i.e. 512 words and a 9-bit address. Bank k = tier*64 + bank-in-tier holds the weights
// of PE array row k: byte c of a word (bits 8c+7:8c) is the weight of column c. One
// word address therefore names one complete 256 x 256 weight tile, and reading all 256
// banks at that address in one cycle is what lets the array preload a fold's weights in
// a single cycle. The weights of a whole network are written once, before inference,
// and never overwritten while it runs (RRAM write endurance).
//
// Ports:
//   write (host side): we, wbank (0..TIERS*BANKS_PER_TIER-1), waddr, wdata; one bank
//     word per cycle, decoded here to the write port of that bank.
//   read (array side): re with raddr reads the same word address in every bank; rdata
//     is valid one cycle later and is held until the next read.
// From the paper: tier/bank/word sizes, one read and one write port per bank, parallel
// access to all banks. Own choices: a common read address for all banks, the row-to-
// bank mapping, 1-cycle read latency, and single-bank host writes. The RRAM cells are
// modelled as ordinary storage (single-level cells, as in the paper).
module filter_rram #(
  parameter int unsigned TIERS          = ws_mono3d_pkg::RRAM_TIERS,
  parameter int unsigned BANKS_PER_TIER = ws_mono3d_pkg::RRAM_BANKS_PER_TIER,
  parameter int unsigned WORD_BYTES     = ws_mono3d_pkg::RRAM_WORD_BYTES,
  parameter int unsigned BANK_WORDS     = ws_mono3d_pkg::RRAM_BANK_WORDS,
  localparam int unsigned NBANKS        = TIERS * BANKS_PER_TIER,
  localparam int unsigned WIDTH         = 8 * WORD_BYTES,
  localparam int unsigned AW            = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1,
  localparam int unsigned BW            = (NBANKS > 1) ? $clog2(NBANKS) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [BW-1:0]                wbank,
  input  logic [AW-1:0]                waddr,
  input  logic [WIDTH-1:0]             wdata,
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic [NBANKS-1:0][WIDTH-1:0] rdata
);

  for (genvar t = 0; t < TIERS; t++) begin : g_tier
    for (genvar b = 0; b < BANKS_PER_TIER; b++) begin : g_bank
      localparam int unsigned K = t * BANKS_PER_TIER + b;
      logic bank_we;
      assign bank_we = we && (wbank == BW'(K));
      mem_1r1w #(.WORDS(BANK_WORDS), .WIDTH(WIDTH)) u_bank (
        .clk   (clk),
        .rst_n (rst_n),
        .we    (bank_we),
        .waddr (waddr),
        .wdata (wdata),
        .re    (re),
        .raddr (raddr),
        .rdata (rdata[K])
      );
    end
  end

  a_wbank_range : assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (int'(wbank) < int'(NBANKS)))
    else $error("filter_rram: write to bank %0d of %0d", wbank, NBANKS);

endmodule
