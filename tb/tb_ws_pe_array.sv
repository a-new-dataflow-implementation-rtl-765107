// tb_ws_pe_array: self-checking test of the weight-stationary PE array (6 x 5 here).
// Loads a random weight tile in one w_load cycle, then streams random IFMAP vectors
// with the row skew the array expects (row r gets vector k in cycle k + r) and checks
// that every column's bottom psum equals the dot product of vector k with the column's
// weights exactly ROWS-1 clocks after row 0 took vector k, for every vector. A second
// tile is then preloaded over the first to check that one cycle replaces all weights.
module tb_ws_pe_array;
  localparam int R  = 6;
  localparam int C  = 5;
  localparam int DW = 8;
  localparam int AW = 2 * DW + $clog2(R);
  localparam int NV = 20;

  logic                        clk = 1'b0;
  logic                        rst_n;
  logic                        w_load;
  logic [R-1:0][C-1:0][DW-1:0] w_in;
  logic [R-1:0][DW-1:0]        a_in;
  logic [C-1:0][AW-1:0]        psum_out;

  int checks = 0, failures = 0;

  ws_pe_array #(.ROWS(R), .COLS(C), .DATA_W(DW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] wt [R][C];
  logic [DW-1:0] vec [NV][R];

  function automatic logic [AW-1:0] dot(int k, int c);
    int s = 0;
    for (int r = 0; r < R; r++) s += int'($signed(vec[k][r])) * int'($signed(wt[r][c]));
    return AW'(s);
  endfunction

  task automatic run_tile();
    // one preload cycle
    @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        wt[r][c] = DW'($urandom);
        w_in[r][c] = wt[r][c];
      end
    for (int k = 0; k < NV; k++)
      for (int r = 0; r < R; r++) vec[k][r] = DW'($urandom);
    w_load = 1'b1;
    @(negedge clk);
    w_load = 1'b0;
    w_in = '0;   // the tile must stay in the PEs after the preload cycle
    // cycle t: row r sees vector t - r
    for (int t = 0; t < NV + R; t++) begin
      for (int r = 0; r < R; r++)
        a_in[r] = (t - r >= 0 && t - r < NV) ? vec[t-r][r] : '0;
      @(posedge clk); #1;
      // after this edge the bottom row holds vector t - (R - 1)
      if (t - (R - 1) >= 0 && t - (R - 1) < NV) begin
        for (int c = 0; c < C; c++) begin
          checks++;
          if (psum_out[c] !== dot(t - (R - 1), c)) begin
            failures++;
            if (failures < 10)
              $display("vector %0d column %0d: got %0h expected %0h", t - (R - 1), c,
                       psum_out[c], dot(t - (R - 1), c));
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 1'b0; w_load = 1'b0; w_in = '0; a_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run_tile();
    run_tile();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
