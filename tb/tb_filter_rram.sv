// tb_filter_rram: self-checking test of the filter RRAM (2 tiers x 3 banks x 8 words
// of 4 bytes here). Writes every bank word through the single host write port with the
// bank index, then reads word addresses in random order; one read must return the word
// of every bank at that address at once, one cycle later, and hold it while re is low
// even when the host keeps writing. Expected words come from a reference copy kept here.
module tb_filter_rram;
  localparam int T  = 2;
  localparam int BT = 3;
  localparam int WB = 4;
  localparam int NW = 8;
  localparam int NB = T * BT;
  localparam int W  = 8 * WB;
  localparam int A  = $clog2(NW);
  localparam int BW = $clog2(NB);

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic                 we, re;
  logic [BW-1:0]        wbank;
  logic [A-1:0]         waddr, raddr;
  logic [W-1:0]         wdata;
  logic [NB-1:0][W-1:0] rdata;

  int checks = 0, failures = 0;

  filter_rram #(.TIERS(T), .BANKS_PER_TIER(BT), .WORD_BYTES(WB), .BANK_WORDS(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] model [NB][NW];

  task automatic check_all(int a, string what);
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (rdata[b] !== model[b][a]) begin
        failures++;
        if (failures < 10)
          $display("%s addr %0d bank %0d: got %0h expected %0h", what, a, b, rdata[b], model[b][a]);
      end
    end
  endtask

  initial begin
    int a;
    rst_n = 1'b0; we = 1'b0; re = 1'b0; wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < NW; w++) begin
        we = 1'b1; wbank = BW'(b); waddr = A'(w); wdata = W'($urandom);
        model[b][w] = wdata;
        @(negedge clk);
      end
    we = 1'b0;
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(0, NW - 1);
      re = 1'b1; raddr = A'(a);
      @(negedge clk);
      re = 1'b0; raddr = A'($urandom);
      check_all(a, "read");
      // hold: a few cycles with host writes to other addresses, no read
      for (int h = 0; h < 2; h++) begin
        int hb, hw;
        hb = $urandom_range(0, NB - 1);
        hw = (a + 1 + $urandom_range(0, NW - 2)) % NW;
        we = 1'b1; wbank = BW'(hb); waddr = A'(hw); wdata = W'($urandom);
        @(negedge clk);
        model[hb][hw] = wdata;
        we = 1'b0;
        check_all(a, "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
