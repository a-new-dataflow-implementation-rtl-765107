// ws_mono3d_top: the WS-Mono3D accelerator, a weight-stationary systolic array whose
// memories sit on the tiers above it.
//
// Blocks and the tiers they stand for:
//   tier 0     ws_pe_array (ROWS x COLS 8-bit MACs) with ifmap_skew and ofmap_requant
//              at its edges, and the fold sequencer ws_controller;
//   tier 1     IFMAP and OFMAP buffers, each an sram_banked of SRAM_BANKS banks;
//   tiers 2-5  filter_rram, RRAM_TIERS x RRAM_BANKS_PER_TIER banks of weights.
// The vertical vias between tiers are the plain wires between these instances: each
// bank port is connected to the array over its own full-width bus.
//
// Data movement of one fold (see ws_controller for the cycle schedule):
//   * all RRAM banks are read at one word address; bank r's word is row r of the tile
//     (byte c = column c) and the whole tile enters the PEs in one preload cycle;
//   * each cycle all IFMAP banks are read at one address: the SRAM_BANKS words together
//     are one IFMAP vector, byte j of bank b is the input of array row b*SRAM_WORD_BYTES+j;
//     the vector is skewed by row and multicast along each row;
//   * the bottom-edge psums of all columns finish together; they are requantised to
//     bytes and written at one address into all OFMAP banks (column c to byte c mod
//     SRAM_WORD_BYTES of bank c / SRAM_WORD_BYTES).
// The array must match the memories: SRAM_BANKS*SRAM_WORD_BYTES = ROWS = COLS and
// RRAM_TIERS*RRAM_BANKS_PER_TIER = ROWS; the RRAM word is one byte per column.
//
// Host ports stand in for the off-chip DRAM side, which this design does not include:
// the host writes IFMAP words and RRAM words (one bank word per cycle) and reads OFMAP
// words (data one cycle after of_host_re). It must not write an IFMAP word that a
// running fold reads. Fold commands use a valid/ready handshake.
// Parameter defaults are the paper's configuration: 256 x 256 PEs, 2 MB IFMAP SRAM and
// 2 MB OFMAP SRAM of 16 banks x 16-byte words, 32 MB RRAM of 4 x 64 banks x 512 words
// of 256 bytes. The tier assignment, sizes, one-cycle preload and multicast follow the
// paper; the byte/bank mappings, the requantisation, the row skew, the command
// interface and the host ports are this design's own choices. Psums of folds that split
// a layer's reduction dimension are not accumulated (the paper does not say how).
module ws_mono3d_top
#(
  parameter int unsigned ROWS                = ws_mono3d_pkg::PE_ROWS,
  parameter int unsigned COLS                = ws_mono3d_pkg::PE_COLS,
  parameter int unsigned SRAM_BANKS          = ws_mono3d_pkg::SRAM_BANKS,
  parameter int unsigned SRAM_WORD_BYTES     = ws_mono3d_pkg::SRAM_WORD_BYTES,
  parameter int unsigned SRAM_BANK_WORDS     = ws_mono3d_pkg::SRAM_BANK_WORDS,
  parameter int unsigned RRAM_TIERS          = ws_mono3d_pkg::RRAM_TIERS,
  parameter int unsigned RRAM_BANKS_PER_TIER = ws_mono3d_pkg::RRAM_BANKS_PER_TIER,
  parameter int unsigned RRAM_BANK_WORDS     = ws_mono3d_pkg::RRAM_BANK_WORDS,
  localparam int unsigned ACCW   = 2 * ws_mono3d_pkg::DATA_W + $clog2(ROWS),
  localparam int unsigned SW     = 8 * SRAM_WORD_BYTES,
  localparam int unsigned IF_AW  = (SRAM_BANK_WORDS > 1) ? $clog2(SRAM_BANK_WORDS) : 1,
  localparam int unsigned NPIX_W = $clog2(SRAM_BANK_WORDS) + 1,
  localparam int unsigned SB_W   = (SRAM_BANKS > 1) ? $clog2(SRAM_BANKS) : 1,
  localparam int unsigned NRB    = RRAM_TIERS * RRAM_BANKS_PER_TIER,
  localparam int unsigned RB_W   = (NRB > 1) ? $clog2(NRB) : 1,
  localparam int unsigned RR_AW  = (RRAM_BANK_WORDS > 1) ? $clog2(RRAM_BANK_WORDS) : 1,
  localparam int unsigned RW     = COLS * ws_mono3d_pkg::DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // fold commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [RR_AW-1:0]     cmd_rram_addr,
  input  logic [IF_AW-1:0]     cmd_ifmap_base,
  input  logic [NPIX_W-1:0]    cmd_n_pixels,
  input  logic [IF_AW-1:0]     cmd_ofmap_base,
  input  logic [ws_mono3d_pkg::SHIFT_W-1:0]   cmd_shift,
  output logic                 busy,
  output logic [1:0]           fold_state,  // ctrl_state_e: idle/preload/stream/drain
  // host: IFMAP SRAM write
  input  logic                 if_host_we,
  input  logic [SB_W-1:0]      if_host_bank,
  input  logic [IF_AW-1:0]     if_host_addr,
  input  logic [SW-1:0]        if_host_wdata,
  // host: OFMAP SRAM read
  input  logic                 of_host_re,
  input  logic [SB_W-1:0]      of_host_bank,
  input  logic [IF_AW-1:0]     of_host_addr,
  output logic [SW-1:0]        of_host_rdata,
  // host: filter RRAM write
  input  logic                 rr_host_we,
  input  logic [RB_W-1:0]      rr_host_bank,
  input  logic [RR_AW-1:0]     rr_host_addr,
  input  logic [RW-1:0]        rr_host_wdata
);

  // ------------------------------------------------------------ fold controller
  ws_mono3d_pkg::ctrl_state_e        state;
  logic               rram_re, w_load, if_re, of_we;
  logic [RR_AW-1:0]   rram_raddr;
  logic [IF_AW-1:0]   if_raddr, of_waddr;
  logic [ws_mono3d_pkg::SHIFT_W-1:0] of_shift;

  ws_controller #(
    .ROWS(ROWS), .IF_AW(IF_AW), .OF_AW(IF_AW), .RR_AW(RR_AW),
    .NPIX_W(NPIX_W), .SHIFT_W(ws_mono3d_pkg::SHIFT_W)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_rram_addr, .cmd_ifmap_base, .cmd_n_pixels,
    .cmd_ofmap_base, .cmd_shift,
    .rram_re, .rram_raddr, .w_load, .if_re, .if_raddr,
    .of_we, .of_waddr, .of_shift, .busy, .state
  );

  assign fold_state = state;

  // ------------------------------------------------------------ filter RRAM (tiers 2-5)
  logic [NRB-1:0][RW-1:0] rram_rdata;

  filter_rram #(
    .TIERS(RRAM_TIERS), .BANKS_PER_TIER(RRAM_BANKS_PER_TIER),
    .WORD_BYTES(COLS), .BANK_WORDS(RRAM_BANK_WORDS)
  ) u_rram (
    .clk, .rst_n,
    .we(rr_host_we), .wbank(rr_host_bank), .waddr(rr_host_addr), .wdata(rr_host_wdata),
    .re(rram_re), .raddr(rram_raddr), .rdata(rram_rdata)
  );

  // ------------------------------------------------------------ IFMAP SRAM (tier 1)
  logic [SRAM_BANKS-1:0]            ifs_we;
  logic [SRAM_BANKS-1:0][IF_AW-1:0] ifs_waddr, ifs_raddr;
  logic [SRAM_BANKS-1:0][SW-1:0]    ifs_wdata, ifs_rdata;

  for (genvar b = 0; b < SRAM_BANKS; b++) begin : g_ifs
    assign ifs_we[b]    = if_host_we && (if_host_bank == SB_W'(b));
    assign ifs_waddr[b] = if_host_addr;
    assign ifs_wdata[b] = if_host_wdata;
    assign ifs_raddr[b] = if_raddr;
  end

  sram_banked #(
    .BANKS(SRAM_BANKS), .WORD_BYTES(SRAM_WORD_BYTES), .BANK_WORDS(SRAM_BANK_WORDS)
  ) u_ifmap (
    .clk, .rst_n,
    .we(ifs_we), .waddr(ifs_waddr), .wdata(ifs_wdata),
    .re({SRAM_BANKS{if_re}}), .raddr(ifs_raddr), .rdata(ifs_rdata)
  );

  // ------------------------------------------------------------ PE array (tier 0)
  logic [ROWS-1:0][ws_mono3d_pkg::DATA_W-1:0]           a_vec, a_skew;
  logic [ROWS-1:0][COLS-1:0][ws_mono3d_pkg::DATA_W-1:0] w_tile;
  logic [COLS-1:0][ACCW-1:0]             psum_bot;
  logic [COLS-1:0][ws_mono3d_pkg::DATA_W-1:0]           q_bot;

  assign a_vec  = ifs_rdata;   // bank b, byte j -> row b*SRAM_WORD_BYTES + j
  assign w_tile = rram_rdata;  // RRAM bank r, byte c -> PE (r, c)

  ifmap_skew #(.ROWS(ROWS), .DATA_W(ws_mono3d_pkg::DATA_W)) u_skew (
    .clk, .rst_n, .d_in(a_vec), .d_out(a_skew)
  );

  ws_pe_array #(.ROWS(ROWS), .COLS(COLS), .DATA_W(ws_mono3d_pkg::DATA_W), .ACC_W(ACCW)) u_array (
    .clk, .rst_n, .w_load, .w_in(w_tile), .a_in(a_skew), .psum_out(psum_bot)
  );

  ofmap_requant #(.COLS(COLS), .ACC_W(ACCW), .DATA_W(ws_mono3d_pkg::DATA_W), .SHIFT_W(ws_mono3d_pkg::SHIFT_W)) u_requant (
    .psum(psum_bot), .shift(of_shift), .q(q_bot)
  );

  // ------------------------------------------------------------ OFMAP SRAM (tier 1)
  logic [SRAM_BANKS-1:0][IF_AW-1:0] ofs_waddr, ofs_raddr;
  logic [SRAM_BANKS-1:0][SW-1:0]    ofs_wdata, ofs_rdata;
  logic [SRAM_BANKS-1:0]            ofs_re;
  logic [SB_W-1:0]                  of_host_bank_q;

  assign ofs_wdata = q_bot;    // column c -> bank c / SRAM_WORD_BYTES, byte c mod it

  for (genvar b = 0; b < SRAM_BANKS; b++) begin : g_ofs
    assign ofs_waddr[b] = of_waddr;
    assign ofs_raddr[b] = of_host_addr;
    assign ofs_re[b]    = of_host_re && (of_host_bank == SB_W'(b));
  end

  sram_banked #(
    .BANKS(SRAM_BANKS), .WORD_BYTES(SRAM_WORD_BYTES), .BANK_WORDS(SRAM_BANK_WORDS)
  ) u_ofmap (
    .clk, .rst_n,
    .we({SRAM_BANKS{of_we}}), .waddr(ofs_waddr), .wdata(ofs_wdata),
    .re(ofs_re), .raddr(ofs_raddr), .rdata(ofs_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)          of_host_bank_q <= '0;
    else if (of_host_re) of_host_bank_q <= of_host_bank;
  end
  assign of_host_rdata = ofs_rdata[of_host_bank_q];

  // ------------------------------------------------------------ static checks
  initial begin
    assert (SRAM_BANKS * SRAM_WORD_BYTES == ROWS && ROWS == COLS)
      else $error("ws_mono3d_top: SRAM width must give one byte per row and column");
    assert (RRAM_TIERS * RRAM_BANKS_PER_TIER == ROWS)
      else $error("ws_mono3d_top: need one RRAM bank per array row");
  end

endmodule
