// tb_ws_mono3d_resnet: two consecutive layers of ResNet-50 (the first bottleneck of
// stage conv2_x: a 1x1 convolution 64 -> 64 channels and a 1x1 convolution 64 -> 256
// channels, both on a 56 x 56 feature map, batch 1) run on a 64 x 64 accelerator with
// the paper's 16-byte SRAM words, 8192-word SRAM banks and 4 RRAM tiers.
// Both layers have a reduction length of 64, so each output-channel group of 64 is one
// fold of 3136 IFMAP vectors: one fold for the first layer and four for the second, run
// two at a time back to back (the OFMAP SRAM holds 8192 words). Between the layers the
// host copies the first layer's outputs from the OFMAP SRAM into the IFMAP SRAM, as the
// off-chip side would. Inputs and weights are random int8. Every output byte of both
// layers is checked against a reference convolution computed here, and so is every
// fold's timing: one preload cycle, 3136 vector cycles, a period of 3136 + 64 cycles for
// back-to-back folds and 3136 + 64 + 1 busy cycles after the preload of a lone fold.
module tb_ws_mono3d_resnet;
  localparam int R    = 64;
  localparam int WB   = 16;
  localparam int NB   = R / WB;
  localparam int RT   = 4;
  localparam int SBB  = $clog2(NB);
  localparam int RBB  = $clog2(R);
  localparam int HW   = 56 * 56;   // output pixels = IFMAP vectors per fold
  localparam int CIN  = 64;
  localparam int C1   = 64;        // layer 1 output channels
  localparam int C2   = 256;       // layer 2 output channels
  localparam int SH   = 9;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] x   [HW][CIN];    // layer 1 input, pixel-major
  logic [7:0] w1  [CIN][C1];
  logic [7:0] y1  [HW][C1];     // reference layer 1 output
  logic [7:0] w2  [C1][C2];
  int cyc = 0, n_pre = 0, n_vec = 0;
  int pre_at [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && fold_state == 2'd1) begin n_pre++; pre_at.push_back(cyc); end
    if (rst_n && (fold_state == 2'd1 || fold_state == 2'd2)) n_vec++;
  end

  function automatic logic [7:0] rq(int s);
    int v;
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

  // weights of output-channel group g of a layer into RRAM word t (bank r = input channel)
  task automatic load_tile(int t, bit second, int g);
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < R; c++)
        rr_host_wdata[8*c +: 8] = second ? w2[r][g*R + c] : w1[r][g*R + c];
      rr_host_we = 1'b1; rr_host_bank = RBB'(r); rr_host_addr = 9'(t);
      @(posedge clk); #1;
    end
    rr_host_we = 1'b0;
  endtask

  task automatic run_folds(int t0, int nf, int obase0);
    int first_pre;
    first_pre = pre_at.size();
    for (int f = 0; f < nf; f++) begin
      cmd_valid = 1'b1; cmd_rram_addr = 9'(t0 + f); cmd_ifmap_base = '0;
      cmd_n_pixels = 14'(HW); cmd_ofmap_base = 13'(obase0 + f * HW); cmd_shift = 5'(SH);
      do @(posedge clk); while (!cmd_ready);
      #1 cmd_valid = 1'b0;
    end
    @(posedge clk);
    while (busy) @(posedge clk);
    #1;
    chk(pre_at.size() == first_pre + nf, "one preload cycle per fold");
    for (int f = 1; f < nf; f++)
      chk(pre_at[first_pre + f] - pre_at[first_pre + f - 1] == HW + R,
          $sformatf("fold period %0d", pre_at[first_pre + f] - pre_at[first_pre + f - 1]));
    chk(cyc - 1 - pre_at[first_pre + nf - 1] == HW + R + 1,
        $sformatf("last fold busy %0d cycles after preload", cyc - 1 - pre_at[first_pre + nf - 1]));
  endtask

  initial begin
    int s, vec_before;
    rst_n = 1'b0; cmd_valid = 1'b0; cmd_rram_addr = '0; cmd_ifmap_base = '0;
    cmd_ofmap_base = '0; cmd_n_pixels = '0; cmd_shift = '0;
    if_host_we = 1'b0; if_host_bank = '0; if_host_addr = '0; if_host_wdata = '0;
    of_host_re = 1'b0; of_host_bank = '0; of_host_addr = '0;
    rr_host_we = 1'b0; rr_host_bank = '0; rr_host_addr = '0; rr_host_wdata = '0;
    for (int p = 0; p < HW; p++) for (int i = 0; i < CIN; i++) x[p][i] = 8'($urandom);
    for (int i = 0; i < CIN; i++) for (int o = 0; o < C1; o++) w1[i][o] = 8'($urandom);
    for (int i = 0; i < C1; i++) for (int o = 0; o < C2; o++) w2[i][o] = 8'($urandom);
    for (int p = 0; p < HW; p++)
      for (int o = 0; o < C1; o++) begin
        s = 0;
        for (int i = 0; i < CIN; i++) s += int'($signed(x[p][i])) * int'($signed(w1[i][o]));
        y1[p][o] = rq(s);
      end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // weights of both layers: tile 0 = layer 1, tiles 1..4 = layer 2 channel groups
    load_tile(0, 1'b0, 0);
    for (int g = 0; g < C2 / R; g++) load_tile(1 + g, 1'b1, g);
    // layer 1 input: vector p = the 64 channels of pixel p
    for (int p = 0; p < HW; p++)
      for (int b = 0; b < NB; b++) begin
        for (int j = 0; j < WB; j++) if_host_wdata[8*j +: 8] = x[p][b*WB + j];
        if_host_we = 1'b1; if_host_bank = SBB'(b); if_host_addr = 13'(p);
        @(posedge clk); #1;
      end
    if_host_we = 1'b0;

    // layer 1: one fold
    vec_before = n_vec;
    run_folds(0, 1, 0);
    chk(n_vec - vec_before == HW, "layer 1 vector cycles");
    // check layer 1 and copy it into the IFMAP SRAM as layer 2's input
    for (int p = 0; p < HW; p++)
      for (int b = 0; b < NB; b++) begin
        of_host_re = 1'b1; of_host_bank = SBB'(b); of_host_addr = 13'(p);
        @(posedge clk); #1;
        of_host_re = 1'b0;
        for (int j = 0; j < WB; j++)
          chk(of_host_rdata[8*j +: 8] == y1[p][b*WB + j],
              $sformatf("layer 1 pixel %0d channel %0d", p, b*WB + j));
        if_host_we = 1'b1; if_host_bank = SBB'(b); if_host_addr = 13'(p);
        if_host_wdata = of_host_rdata;
        @(posedge clk); #1;
        if_host_we = 1'b0;
      end

    // layer 2: four folds, two at a time
    for (int half = 0; half < 2; half++) begin
      vec_before = n_vec;
      run_folds(1 + 2 * half, 2, 0);
      chk(n_vec - vec_before == 2 * HW, "layer 2 vector cycles");
      for (int f = 0; f < 2; f++)
        for (int p = 0; p < HW; p++)
          for (int b = 0; b < NB; b++) begin
            of_host_re = 1'b1; of_host_bank = SBB'(b); of_host_addr = 13'(f * HW + p);
            @(posedge clk); #1;
            of_host_re = 1'b0;
            for (int j = 0; j < WB; j++) begin
              int o;
              o = (2 * half + f) * R + b * WB + j;
              s = 0;
              for (int i = 0; i < C1; i++) s += int'($signed(y1[p][i])) * int'($signed(w2[i][o]));
              chk(of_host_rdata[8*j +: 8] == rq(s),
                  $sformatf("layer 2 pixel %0d channel %0d", p, o));
            end
          end
    end
    chk(n_pre == 5, "five folds in all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
