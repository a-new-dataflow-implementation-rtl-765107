// tb_ws_pe: self-checking test of one processing element.
// Drives random signed weights, IFMAP bytes and incoming psums and checks, cycle by
// cycle, that psum_out = psum_in + a_in * weight one clock later, that a weight loaded
// with w_load is used from the next cycle on, and that it is held while w_load is low.
// The expected values are computed here with integer arithmetic.
module tb_ws_pe;
  localparam int DW = 8;
  localparam int AW = 24;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          w_load;
  logic [DW-1:0] w_in, a_in;
  logic [AW-1:0] psum_in, psum_out;

  int checks = 0, failures = 0;

  ws_pe #(.DATA_W(DW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [AW-1:0] mac(logic [AW-1:0] p, logic [DW-1:0] a, logic [DW-1:0] w);
    int prod;
    prod = int'($signed(a)) * int'($signed(w));
    return p + AW'(prod);
  endfunction

  initial begin
    logic [DW-1:0] w_model;
    logic [AW-1:0] exp_q;
    rst_n = 1'b0; w_load = 1'b0; w_in = '0; a_in = '0; psum_in = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (psum_out !== '0) begin failures++; $display("reset: psum_out=%0h", psum_out); end
    rst_n = 1'b1;
    w_model = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      w_load  = ($urandom_range(0, 7) == 0);
      w_in    = DW'($urandom);
      // corner cases: extreme operands
      case ($urandom_range(0, 9))
        0: a_in = 8'h80;
        1: a_in = 8'h7f;
        default: a_in = DW'($urandom);
      endcase
      psum_in = AW'($urandom);
      exp_q   = mac(psum_in, a_in, w_model);   // the old weight is used this cycle
      @(posedge clk); #1;
      if (w_load) w_model = w_in;
      checks++;
      if (psum_out !== exp_q) begin
        failures++;
        if (failures < 10) $display("cycle %0d: psum_out=%0h expected %0h", i, psum_out, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
