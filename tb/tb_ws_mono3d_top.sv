// tb_ws_mono3d_top: end-to-end test of the accelerator at a reduced size (8 x 8 PEs,
// 2 SRAM banks of 4-byte words, 2 RRAM tiers x 4 banks).
// The host loads four random weight tiles into the filter RRAM and 64 random IFMAP
// vectors into the IFMAP SRAM, then runs five folds: three issued back to back, one after
// an idle gap and a one-vector fold, with shifts that give in-range outputs as well as
// positive and negative saturation. The OFMAP SRAM is read back through the host port
// and every output byte is compared with a dot product and requantisation computed here.
// Timing checks: each fold spends exactly one cycle in preload, N cycles reading vectors,
// a back-to-back fold starts N + ROWS cycles after the previous one, and the last output
// is written N + ROWS cycles after a fold's preload. Each mechanism (parallel preload,
// multicast streaming, drain, back-to-back hand-over, idle restart, both saturations
// and host IFMAP writes while a fold runs) is counted, and one that never happens
// counts as a failure.
module tb_ws_mono3d_top;
  localparam int R   = 8;
  localparam int NB  = 2;
  localparam int WB  = 4;
  localparam int SBW = 64;
  localparam int RT  = 2;
  localparam int RBT = 4;
  localparam int RBW = 4;
  localparam int IFA = $clog2(SBW);
  localparam int NPW = IFA + 1;
  localparam int SBB = $clog2(NB);
  localparam int RBB = $clog2(RT * RBT);
  localparam int RRA = $clog2(RBW);
  localparam int NV  = 64;
  localparam int NF  = 5;

  logic               clk = 1'b0;
  logic               rst_n;
  logic               cmd_valid, cmd_ready, busy;
  logic [1:0]         fold_state;
  logic [RRA-1:0]     cmd_rram_addr;
  logic [IFA-1:0]     cmd_ifmap_base, cmd_ofmap_base;
  logic [NPW-1:0]     cmd_n_pixels;
  logic [4:0]         cmd_shift;
  logic               if_host_we, of_host_re, rr_host_we;
  logic [SBB-1:0]     if_host_bank, of_host_bank;
  logic [IFA-1:0]     if_host_addr, of_host_addr;
  logic [8*WB-1:0]    if_host_wdata, of_host_rdata;
  logic [RBB-1:0]     rr_host_bank;
  logic [RRA-1:0]     rr_host_addr;
  logic [8*R-1:0]     rr_host_wdata;

  int checks = 0, failures = 0;

  ws_mono3d_top #(
    .ROWS(R), .COLS(R), .SRAM_BANKS(NB), .SRAM_WORD_BYTES(WB), .SRAM_BANK_WORDS(SBW),
    .RRAM_TIERS(RT), .RRAM_BANKS_PER_TIER(RBT), .RRAM_BANK_WORDS(RBW)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- workload
  logic [7:0] wt  [RBW][R][R];   // tile, row, column
  logic [7:0] vec [NV][R];       // vector, row
  int f_tile [NF] = '{0, 1, 2, 3, 1};
  int f_base [NF] = '{0, 10, 3, 40, 63};
  int f_n    [NF] = '{10, 6, 20, 9, 1};
  int f_obas [NF] = '{0, 10, 16, 36, 45};
  int f_sh   [NF] = '{6, 0, 9, 31, 3};
  int f_gap  [NF] = '{0, 0, 0, 30, 0};   // idle cycles before presenting the command

  function automatic logic [7:0] expect_q(int f, int k, int c);
    int s = 0;
    longint v;
    for (int r = 0; r < R; r++)
      s += int'($signed(vec[f_base[f] + k][r])) * int'($signed(wt[f_tile[f]][r][c]));
    v = longint'(s) >>> f_sh[f];
    if (v > 127) return 8'h7f;
    if (v < -128) return 8'h80;
    return v[7:0];
  endfunction

  // ---------------------------------------------------------------- monitors
  int cyc = 0;
  int n_preload = 0, n_stream = 0, n_drain = 0, n_handover = 0, n_restart = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_in_range = 0, n_host_busy = 0;
  int pre_cyc [$];
  logic [1:0] st_prev = 2'd0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      st_prev <= fold_state;
      if (fold_state == 2'd1) begin
        n_preload++;
        pre_cyc.push_back(cyc);
        if (st_prev == 2'd3) n_handover++;
        if (st_prev == 2'd0) n_restart++;
      end
      if (fold_state == 2'd1 || fold_state == 2'd2) n_stream++;
      if (fold_state == 2'd3) n_drain++;
    end
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int busy_end, total_n;
    rst_n = 1'b0; cmd_valid = 1'b0; cmd_rram_addr = '0; cmd_ifmap_base = '0;
    cmd_ofmap_base = '0; cmd_n_pixels = '0; cmd_shift = '0;
    if_host_we = 1'b0; if_host_bank = '0; if_host_addr = '0; if_host_wdata = '0;
    of_host_re = 1'b0; of_host_bank = '0; of_host_addr = '0;
    rr_host_we = 1'b0; rr_host_bank = '0; rr_host_addr = '0; rr_host_wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // weights: RRAM bank r, word t = row r of tile t
    for (int t = 0; t < RBW; t++)
      for (int r = 0; r < R; r++) begin
        for (int c = 0; c < R; c++) begin
          wt[t][r][c] = 8'($urandom);
          rr_host_wdata[8*c +: 8] = wt[t][r][c];
        end
        rr_host_we = 1'b1; rr_host_bank = RBB'(r); rr_host_addr = RRA'(t);
        @(posedge clk); #1;
      end
    rr_host_we = 1'b0;
    // IFMAP vectors: row r in bank r / WB, byte r % WB, word = vector index
    for (int v = 0; v < NV; v++) begin
      for (int r = 0; r < R; r++) vec[v][r] = 8'($urandom);
      for (int b = 0; b < NB; b++) begin
        for (int j = 0; j < WB; j++) if_host_wdata[8*j +: 8] = vec[v][b*WB + j];
        if_host_we = 1'b1; if_host_bank = SBB'(b); if_host_addr = IFA'(v);
        @(posedge clk); #1;
      end
    end
    if_host_we = 1'b0;

    // host traffic while the folds run: IFMAP writes to words no fold reads
    // (the banks' write ports are separate from the read ports the array uses)
    fork
      begin
        repeat (20) @(posedge clk);
        for (int v = 32; v < 40; v++) begin
          for (int r = 0; r < R; r++) vec[v][r] = 8'($urandom);
          for (int b = 0; b < NB; b++) begin
            for (int j = 0; j < WB; j++) if_host_wdata[8*j +: 8] = vec[v][b*WB + j];
            if_host_we = 1'b1; if_host_bank = SBB'(b); if_host_addr = IFA'(v);
            @(posedge clk); #1;
            n_host_busy += int'(busy);
          end
        end
        if_host_we = 1'b0;
      end
    join_none

    // folds
    for (int f = 0; f < NF; f++) begin
      repeat (f_gap[f]) @(posedge clk);
      #1;
      cmd_valid = 1'b1;
      cmd_rram_addr = RRA'(f_tile[f]); cmd_ifmap_base = IFA'(f_base[f]);
      cmd_n_pixels = NPW'(f_n[f]); cmd_ofmap_base = IFA'(f_obas[f]); cmd_shift = 5'(f_sh[f]);
      do @(posedge clk); while (!cmd_ready);
      #1 cmd_valid = 1'b0;
    end
    while (busy) @(posedge clk);
    busy_end = cyc;
    #1;

    // timing
    chk(pre_cyc.size() == NF, "one preload cycle per fold");
    total_n = 0;
    for (int f = 0; f < NF; f++) total_n += f_n[f];
    chk(n_stream == total_n, $sformatf("vector cycles %0d expected %0d", n_stream, total_n));
    for (int f = 1; f < NF && f < pre_cyc.size(); f++)
      if (f_gap[f] == 0)
        chk(pre_cyc[f] - pre_cyc[f-1] == f_n[f-1] + R,
            $sformatf("fold %0d period %0d expected %0d", f - 1, pre_cyc[f] - pre_cyc[f-1],
                      f_n[f-1] + R));
    if (pre_cyc.size() == NF)
      chk(busy_end - pre_cyc[NF-1] == f_n[NF-1] + R + 1,
          $sformatf("last fold: busy until %0d cycles after preload, expected %0d",
                    busy_end - pre_cyc[NF-1], f_n[NF-1] + R + 1));

    // outputs
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < f_n[f]; k++)
        for (int b = 0; b < NB; b++) begin
          of_host_re = 1'b1; of_host_bank = SBB'(b); of_host_addr = IFA'(f_obas[f] + k);
          @(posedge clk); #1;
          of_host_re = 1'b0;
          for (int j = 0; j < WB; j++) begin
            logic [7:0] e;
            e = expect_q(f, k, b*WB + j);
            if (e == 8'h7f) n_sat_hi++; else if (e == 8'h80) n_sat_lo++; else n_in_range++;
            chk(of_host_rdata[8*j +: 8] == e,
                $sformatf("fold %0d vector %0d column %0d: got %0h expected %0h", f, k,
                          b*WB + j, of_host_rdata[8*j +: 8], e));
          end
        end

    $display("mechanisms: preload=%0d vector_cycles=%0d drain=%0d handover=%0d restart=%0d sat_hi=%0d sat_lo=%0d in_range=%0d host_writes_while_busy=%0d",
             n_preload, n_stream, n_drain, n_handover, n_restart, n_sat_hi, n_sat_lo, n_in_range,
             n_host_busy);
    chk(n_preload > 0, "parallel preload happened");
    chk(n_stream > 0, "multicast streaming happened");
    chk(n_drain > 0, "drain happened");
    chk(n_handover > 0, "back-to-back fold hand-over happened");
    chk(n_restart > 1, "restart from idle happened");
    chk(n_sat_hi > 0, "positive saturation happened");
    chk(n_sat_lo > 0, "negative saturation happened");
    chk(n_in_range > 0, "in-range outputs happened");
    chk(n_host_busy > 0, "host IFMAP writes during a running fold happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
