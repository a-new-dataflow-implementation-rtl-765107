// tb_sram_banked: self-checking test of the banked SRAM used for the IFMAP and OFMAP
// buffers (4 banks x 3-byte words x 32 words here). Every cycle each bank gets a random
// write and a random read on its own ports, so all banks are used in parallel. A
// reference copy of the contents in this testbench predicts each read: the word is
// checked one cycle after re, must equal the contents before a same-cycle write to the
// same address, and must stay unchanged in cycles without a read.
module tb_sram_banked;
  localparam int NB = 4;
  localparam int WB = 3;
  localparam int NW = 32;
  localparam int W  = 8 * WB;
  localparam int A  = $clog2(NW);

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic [NB-1:0]        we, re;
  logic [NB-1:0][A-1:0] waddr, raddr;
  logic [NB-1:0][W-1:0] wdata, rdata;

  int checks = 0, failures = 0;

  sram_banked #(.BANKS(NB), .WORD_BYTES(WB), .BANK_WORDS(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] model [NB][NW];
  logic [W-1:0] expect_q [NB];

  initial begin
    rst_n = 1'b0; we = '0; re = '0; waddr = '0; raddr = '0; wdata = '0;
    // fill every word so that all reads have a known value
    @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < NW; a++) begin
      for (int b = 0; b < NB; b++) begin
        we[b] = 1'b1; waddr[b] = A'(a); wdata[b] = W'($urandom); model[b][a] = wdata[b];
      end
      @(negedge clk);
    end
    we = '0;
    for (int b = 0; b < NB; b++) expect_q[b] = '0;
    for (int i = 0; i < 3000; i++) begin
      for (int b = 0; b < NB; b++) begin
        we[b]    = 1'($urandom_range(0, 1));
        re[b]    = $urandom_range(0, 2) != 0;
        waddr[b] = A'($urandom);
        raddr[b] = (i % 5 == 0) ? waddr[b] : A'($urandom);  // read-during-write cases
        wdata[b] = W'($urandom);
      end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        if (re[b]) expect_q[b] = model[b][raddr[b]];
        if (we[b]) model[b][waddr[b]] = wdata[b];
        checks++;
        if (rdata[b] !== expect_q[b]) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d bank %0d: rdata=%0h expected %0h", i, b, rdata[b], expect_q[b]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
