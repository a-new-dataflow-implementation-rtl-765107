// tb_ws_controller: self-checking test of the fold sequencer (ROWS = 4 here).
// Sends 40 random fold commands, some presented while the previous fold still runs and
// some after idle gaps, and checks every cycle against a schedule computed here from the
// cycle A in which each command was accepted:
//   rram_re with the tile address in cycle A;  w_load in cycle A+1 only (one-cycle
//   preload); IFMAP reads of base..base+N-1 in cycles A+1..A+N (one vector per cycle);
//   OFMAP writes of ofmap_base..+N-1 with the fold's shift in cycles A+ROWS+2..A+ROWS+N+1;
//   acceptance at max(presented, A_prev + N_prev + ROWS), i.e. a fold period of N + ROWS.
module tb_ws_controller;
  localparam int R    = 4;
  localparam int IFA  = 6;
  localparam int OFA  = 6;
  localparam int RRA  = 3;
  localparam int NPW  = 7;
  localparam int SHW  = 5;
  localparam int NCMD = 40;
  localparam int MAXC = 6000;

  logic           clk = 1'b0;
  logic           rst_n;
  logic           cmd_valid, cmd_ready;
  logic [RRA-1:0] cmd_rram_addr;
  logic [IFA-1:0] cmd_ifmap_base;
  logic [NPW-1:0] cmd_n_pixels;
  logic [OFA-1:0] cmd_ofmap_base;
  logic [SHW-1:0] cmd_shift;
  logic           rram_re, w_load, if_re, of_we, busy;
  logic [RRA-1:0] rram_raddr;
  logic [IFA-1:0] if_raddr;
  logic [OFA-1:0] of_waddr;
  logic [SHW-1:0] of_shift;
  ws_mono3d_pkg::ctrl_state_e state;

  int checks = 0, failures = 0;

  ws_controller #(.ROWS(R), .IF_AW(IFA), .OF_AW(OFA), .RR_AW(RRA), .NPIX_W(NPW),
                  .SHIFT_W(SHW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (MAXC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected per-cycle activity
  bit             e_wl [MAXC];
  bit             e_ifre [MAXC];
  logic [IFA-1:0] e_ifa [MAXC];
  bit             e_ofwe [MAXC];
  logic [OFA-1:0] e_ofa [MAXC];
  logic [SHW-1:0] e_sh [MAXC];
  bit             e_busy [MAXC];

  task automatic chk(bit cond, string what, int cyc);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  initial begin
    int cyc, ncmd, gap, presented, next_ok, last_cyc, n;
    bit acc;
    rst_n = 1'b0; cmd_valid = 1'b0;
    cmd_rram_addr = '0; cmd_ifmap_base = '0; cmd_n_pixels = '0; cmd_ofmap_base = '0;
    cmd_shift = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cyc = 0; ncmd = 0; gap = 2; presented = -1; next_ok = 0; last_cyc = 0;
    while (cyc < MAXC - 100) begin
      // drive (just after the edge)
      if (!cmd_valid && ncmd < NCMD) begin
        if (gap == 0) begin
          cmd_valid      = 1'b1;
          cmd_rram_addr  = RRA'($urandom);
          cmd_ifmap_base = IFA'($urandom);
          cmd_n_pixels   = NPW'($urandom_range(1, 12));
          cmd_ofmap_base = OFA'($urandom);
          cmd_shift      = SHW'($urandom);
          presented      = cyc;
        end else gap--;
      end
      // sample and check (outputs settled)
      @(negedge clk);
      acc = cmd_valid && cmd_ready;
      chk(rram_re == acc, "rram_re", cyc);
      if (acc) begin
        n = int'(cmd_n_pixels);
        chk(rram_raddr == cmd_rram_addr, "rram_raddr", cyc);
        chk(cyc == ((presented > next_ok) ? presented : next_ok), "acceptance cycle", cyc);
        e_wl[cyc + 1] = 1'b1;
        for (int k = 0; k < n; k++) begin
          e_ifre[cyc + 1 + k] = 1'b1;
          e_ifa[cyc + 1 + k]  = cmd_ifmap_base + IFA'(k);
          e_ofwe[cyc + R + 2 + k] = 1'b1;
          e_ofa[cyc + R + 2 + k]  = cmd_ofmap_base + OFA'(k);
          e_sh[cyc + R + 2 + k]   = cmd_shift;
        end
        for (int c = cyc + 1; c <= cyc + n + R + 1; c++) e_busy[c] = 1'b1;
        next_ok  = cyc + n + R;
        last_cyc = cyc + n + R + 1;
      end
      chk(w_load == e_wl[cyc], "w_load", cyc);
      chk(if_re == e_ifre[cyc], "if_re", cyc);
      if (if_re && e_ifre[cyc]) chk(if_raddr == e_ifa[cyc], "if_raddr", cyc);
      chk(of_we == e_ofwe[cyc], "of_we", cyc);
      if (of_we && e_ofwe[cyc]) begin
        chk(of_waddr == e_ofa[cyc], "of_waddr", cyc);
        chk(of_shift == e_sh[cyc], "of_shift", cyc);
      end
      chk(busy == e_busy[cyc], "busy", cyc);
      @(posedge clk);
      #1;
      if (acc) begin
        ncmd++;
        cmd_valid = 1'b0;
        // half of the commands come back to back, the rest after a gap
        gap = ($urandom_range(0, 1) == 1) ? 0 : $urandom_range(0, 25);
      end
      cyc++;
      if (ncmd == NCMD && cyc > last_cyc + 3) break;
    end
    chk(ncmd == NCMD, "all commands accepted", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
