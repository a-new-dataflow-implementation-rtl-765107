// ws_controller: fold sequencer of the WS-Mono3D array.
//
// A fold is one 256 x 256 weight tile held in the array while a stream of IFMAP vectors
// (one per output pixel, one byte per array row) passes through it. The controller takes
// one fold command at a time and runs it as the paper's WS-Mono3D schedule:
//   fetch    read the tile's word address in all RRAM banks (1 cycle; for back-to-back
//            folds it is hidden in the previous fold's last drain cycle);
//   preload  w_load: every PE takes its weight from the RRAM output (1 cycle). The first
//            IFMAP vector is read from the IFMAP SRAM in the same cycle;
//   stream   one IFMAP vector per cycle, N vectors in all; each is multicast along the
//            rows one cycle after its read, so the first reaches all of row 0 in 1 cycle;
//   drain    ROWS cycles in which the last psums move down the columns.
// The next fold's preload follows directly, so a fold takes N + ROWS cycles; the first
// one also pays its fetch cycle. This is 1 preload + 1 multicast + (N + ROWS - 2) cycles,
// against ROWS preload cycles and COLS forwarding cycles per fold in a planar WS array.
//
// Each read carries a tag {valid, first} down a ROWS+1 stage pipe that matches the
// array latency; when it comes out, the requantised bottom-row outputs are written to
// the OFMAP SRAM (of_we), at the fold's OFMAP base address for the first vector and at
// consecutive addresses after it. The write-side base address and shift are taken at
// preload, so a fold's last write may share its cycle with the next fold's preload.
//
// Command interface (valid/ready): cmd_rram_addr = RRAM word address of the tile,
// cmd_ifmap_base / cmd_n_pixels = first IFMAP SRAM word and number of vectors (>= 1),
// cmd_ofmap_base = first OFMAP SRAM word, cmd_shift = requantisation shift.
// cmd_ready is high in IDLE and in the last drain cycle. busy is high while a fold runs
// or its outputs are still being written.
//
// From the paper: one-cycle parallel preload (A2), one-cycle IFMAP multicast (A3), and
// the per-fold cycle structure C = sum(1 + 1 + O_i). Own choices: the command interface,
// the prefetch of the RRAM word, and the address generation (sequential words).
module ws_controller
#(
  parameter int unsigned ROWS    = ws_mono3d_pkg::PE_ROWS,
  parameter int unsigned IF_AW   = $clog2(ws_mono3d_pkg::SRAM_BANK_WORDS),
  parameter int unsigned OF_AW   = $clog2(ws_mono3d_pkg::SRAM_BANK_WORDS),
  parameter int unsigned RR_AW   = $clog2(ws_mono3d_pkg::RRAM_BANK_WORDS),
  parameter int unsigned NPIX_W  = $clog2(ws_mono3d_pkg::SRAM_BANK_WORDS) + 1,
  parameter int unsigned SHIFT_W = ws_mono3d_pkg::SHIFT_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // fold command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [RR_AW-1:0]   cmd_rram_addr,
  input  logic [IF_AW-1:0]   cmd_ifmap_base,
  input  logic [NPIX_W-1:0]  cmd_n_pixels,
  input  logic [OF_AW-1:0]   cmd_ofmap_base,
  input  logic [SHIFT_W-1:0] cmd_shift,
  // filter RRAM read
  output logic               rram_re,
  output logic [RR_AW-1:0]   rram_raddr,
  // PE array
  output logic               w_load,
  // IFMAP SRAM read (all banks, same address)
  output logic               if_re,
  output logic [IF_AW-1:0]   if_raddr,
  // OFMAP SRAM write (all banks, same address)
  output logic               of_we,
  output logic [OF_AW-1:0]   of_waddr,
  output logic [SHIFT_W-1:0] of_shift,
  // status
  output logic               busy,
  output ws_mono3d_pkg::ctrl_state_e state
);

  localparam int unsigned DCNT_W = $clog2(ROWS + 1);

  ws_mono3d_pkg::ctrl_state_e       state_d;
  logic [IF_AW-1:0]  if_base_q;
  logic [NPIX_W-1:0] n_pix_q;
  logic [OF_AW-1:0]  of_base_q, of_base_pend_q;
  logic [SHIFT_W-1:0] shift_pend_q;
  logic [NPIX_W-1:0] k_q;           // index of the vector read this cycle
  logic [DCNT_W-1:0] dcnt_q;        // drain cycles left, including this one
  ws_mono3d_pkg::out_tag_t [ROWS:0] tag_q;         // tag pipe, tag_q[ROWS] is at the bottom edge
  ws_mono3d_pkg::out_tag_t          tag_in;
  logic [OF_AW-1:0]  of_addr_q;
  logic              accept;

  // ---------------------------------------------------------------- sequencing
  assign cmd_ready = (state == ws_mono3d_pkg::S_IDLE) || (state == ws_mono3d_pkg::S_DRAIN && dcnt_q == DCNT_W'(1));
  assign accept    = cmd_valid && cmd_ready;

  assign rram_re    = accept;
  assign rram_raddr = cmd_rram_addr;
  assign w_load     = (state == ws_mono3d_pkg::S_PRELOAD);
  assign if_re      = (state == ws_mono3d_pkg::S_PRELOAD) || (state == ws_mono3d_pkg::S_STREAM);
  assign if_raddr   = if_base_q + IF_AW'(k_q);

  always_comb begin
    state_d = state;
    unique case (state)
      ws_mono3d_pkg::S_IDLE:    if (accept) state_d = ws_mono3d_pkg::S_PRELOAD;
      ws_mono3d_pkg::S_PRELOAD: state_d = (n_pix_q == NPIX_W'(1)) ? ws_mono3d_pkg::S_DRAIN : ws_mono3d_pkg::S_STREAM;
      ws_mono3d_pkg::S_STREAM:  if (k_q == n_pix_q - NPIX_W'(1)) state_d = ws_mono3d_pkg::S_DRAIN;
      ws_mono3d_pkg::S_DRAIN:   if (dcnt_q == DCNT_W'(1)) state_d = accept ? ws_mono3d_pkg::S_PRELOAD : ws_mono3d_pkg::S_IDLE;
      default:   state_d = ws_mono3d_pkg::S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= ws_mono3d_pkg::S_IDLE;
      if_base_q      <= '0;
      n_pix_q        <= '0;
      of_base_q      <= '0;
      of_base_pend_q <= '0;
      shift_pend_q   <= '0;
      of_shift       <= '0;
      k_q            <= '0;
      dcnt_q         <= '0;
    end else begin
      state <= state_d;
      if (accept) begin
        if_base_q      <= cmd_ifmap_base;
        n_pix_q        <= cmd_n_pixels;
        of_base_pend_q <= cmd_ofmap_base;
        shift_pend_q   <= cmd_shift;
      end
      if (state == ws_mono3d_pkg::S_PRELOAD) begin
        of_base_q <= of_base_pend_q;
        of_shift  <= shift_pend_q;
      end
      if (if_re) k_q <= k_q + NPIX_W'(1);
      else       k_q <= '0;
      if (state_d == ws_mono3d_pkg::S_DRAIN && state != ws_mono3d_pkg::S_DRAIN) dcnt_q <= DCNT_W'(ROWS);
      else if (state == ws_mono3d_pkg::S_DRAIN)                  dcnt_q <= dcnt_q - DCNT_W'(1);
    end
  end

  // ---------------------------------------------------------------- output tags
  assign tag_in.valid = if_re;
  assign tag_in.first = (state == ws_mono3d_pkg::S_PRELOAD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag_q     <= '0;
      of_addr_q <= '0;
    end else begin
      tag_q <= {tag_q[ROWS-1:0], tag_in};
      if (tag_q[ROWS].valid) of_addr_q <= of_waddr + OF_AW'(1);
    end
  end

  assign of_we    = tag_q[ROWS].valid;
  assign of_waddr = tag_q[ROWS].first ? of_base_q : of_addr_q;
  assign busy     = (state != ws_mono3d_pkg::S_IDLE) || (|tag_q);

  // ---------------------------------------------------------------- checks
  a_cmd_stable : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable({cmd_rram_addr, cmd_ifmap_base,
                                                      cmd_n_pixels, cmd_ofmap_base, cmd_shift}))
    else $error("ws_controller: command changed while waiting");
  a_cmd_nonempty : assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> cmd_n_pixels != '0)
    else $error("ws_controller: fold command with no IFMAP vectors");

endmodule
