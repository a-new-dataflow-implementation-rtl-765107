// tb_ws_mono3d_large: one complete fold on a 64 x 64 accelerator that keeps the
// paper's memory organisation except for the bank count: 16-byte SRAM words with 8192
// words per bank (4 banks per buffer here), 4 RRAM tiers of 512-word banks (16 banks per
// tier here, one per array row). The full 256 x 256 size elaborates, but its simulator
// build is too large to be practical, so this is the largest size simulated.
// The host writes one random 64 x 64 weight tile into word 5 of all RRAM banks
// and 6 random IFMAP vectors into the IFMAP SRAM, issues one fold command and waits for
// it to finish. Checks: one preload cycle, 6 vector cycles, the fold busy for exactly
// N + ROWS + 1 cycles after its preload cycle, and every one of the 6 x 64 output bytes
// read back from the OFMAP SRAM against a dot product and requantisation computed here.
module tb_ws_mono3d_large;
  localparam int R    = 64;
  localparam int WB   = 16;
  localparam int NB   = R / WB;
  localparam int RT   = 4;
  localparam int SBB  = $clog2(NB);
  localparam int RBB  = $clog2(R);
  localparam int N    = 6;
  localparam int TILE = 5;
  localparam int IB   = 100;   // IFMAP base word
  localparam int OB   = 2000;  // OFMAP base word
  localparam int SH   = 10;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          cmd_valid, cmd_ready, busy;
  logic [1:0]    fold_state;
  logic [8:0]    cmd_rram_addr;
  logic [12:0]   cmd_ifmap_base, cmd_ofmap_base;
  logic [13:0]   cmd_n_pixels;
  logic [4:0]    cmd_shift;
  logic          if_host_we, of_host_re, rr_host_we;
  logic [SBB-1:0] if_host_bank, of_host_bank;
  logic [12:0]   if_host_addr, of_host_addr;
  logic [127:0]  if_host_wdata, of_host_rdata;
  logic [RBB-1:0] rr_host_bank;
  logic [8:0]    rr_host_addr;
  logic [8*R-1:0] rr_host_wdata;

  int checks = 0, failures = 0;

  ws_mono3d_top #(
    .ROWS(R), .COLS(R), .SRAM_BANKS(NB), .SRAM_WORD_BYTES(WB),
    .RRAM_TIERS(RT), .RRAM_BANKS_PER_TIER(R / RT)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] wt  [R][R];
  logic [7:0] vec [N][R];
  int cyc = 0, n_pre = 0, n_vec = 0, pre_at = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && fold_state == 2'd1) begin n_pre++; pre_at = cyc; end
    if (rst_n && (fold_state == 2'd1 || fold_state == 2'd2)) n_vec++;
  end

  function automatic logic [7:0] expect_q(int k, int c);
    int s = 0;
    int v;
    for (int r = 0; r < R; r++) s += int'($signed(vec[k][r])) * int'($signed(wt[r][c]));
    v = s >>> SH;
    if (v > 127) return 8'h7f;
    if (v < -128) return 8'h80;
    return v[7:0];
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int busy_end;
    rst_n = 1'b0; cmd_valid = 1'b0; cmd_rram_addr = '0; cmd_ifmap_base = '0;
    cmd_ofmap_base = '0; cmd_n_pixels = '0; cmd_shift = '0;
    if_host_we = 1'b0; if_host_bank = '0; if_host_addr = '0; if_host_wdata = '0;
    of_host_re = 1'b0; of_host_bank = '0; of_host_addr = '0;
    rr_host_we = 1'b0; rr_host_bank = '0; rr_host_addr = '0; rr_host_wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < R; c++) begin
        wt[r][c] = 8'($urandom);
        rr_host_wdata[8*c +: 8] = wt[r][c];
      end
      rr_host_we = 1'b1; rr_host_bank = RBB'(r); rr_host_addr = 9'(TILE);
      @(posedge clk); #1;
    end
    rr_host_we = 1'b0;
    for (int v = 0; v < N; v++) begin
      for (int r = 0; r < R; r++) vec[v][r] = 8'($urandom);
      for (int b = 0; b < NB; b++) begin
        for (int j = 0; j < WB; j++) if_host_wdata[8*j +: 8] = vec[v][b*WB + j];
        if_host_we = 1'b1; if_host_bank = SBB'(b); if_host_addr = 13'(IB + v);
        @(posedge clk); #1;
      end
    end
    if_host_we = 1'b0;

    cmd_valid = 1'b1; cmd_rram_addr = 9'(TILE); cmd_ifmap_base = 13'(IB);
    cmd_n_pixels = 14'(N); cmd_ofmap_base = 13'(OB); cmd_shift = 5'(SH);
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 1'b0;
    @(posedge clk);
    while (busy) @(posedge clk);
    busy_end = cyc;
    #1;
    chk(n_pre == 1, "one preload cycle");
    chk(n_vec == N, $sformatf("vector cycles %0d expected %0d", n_vec, N));
    chk(busy_end - pre_at == N + R + 1,
        $sformatf("busy for %0d cycles after preload, expected %0d", busy_end - pre_at, N + R + 1));

    for (int k = 0; k < N; k++)
      for (int b = 0; b < NB; b++) begin
        of_host_re = 1'b1; of_host_bank = SBB'(b); of_host_addr = 13'(OB + k);
        @(posedge clk); #1;
        of_host_re = 1'b0;
        for (int j = 0; j < WB; j++)
          chk(of_host_rdata[8*j +: 8] == expect_q(k, b*WB + j),
              $sformatf("vector %0d column %0d: got %0h expected %0h", k, b*WB + j,
                        of_host_rdata[8*j +: 8], expect_q(k, b*WB + j)));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
