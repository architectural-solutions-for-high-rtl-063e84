// tb_tau_divider: random signed dividends and unsigned divisors, including
// division by zero and by one; the quotient must equal SystemVerilog's
// truncating division and done must come NW+2 cycles after start.
module tb_tau_divider;
  localparam int NW = 32, DW = 24;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic start = 0, busy, done;
  logic signed [NW-1:0] num, quo;
  logic [DW-1:0] den;

  tau_divider #(.NW(NW), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 200; r++) begin
      automatic longint n = longint'($signed(NW'($urandom))) >>> $urandom_range(0, 20);
      automatic longint d = longint'($urandom_range(1, (1 << DW) - 1)) >> $urandom_range(0, 22);
      automatic longint e;
      automatic int cyc = 0;
      if (r == 0) d = 0;
      if (r == 1) d = 1;
      e = (d == 0) ? 0 : n / d;
      @(negedge clk);
      num = NW'(n); den = DW'(d); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (longint'(quo) != e) begin failures++; $display("%0d / %0d = %0d, expected %0d", n, d, quo, e); end
      if (cyc != NW + 1) begin failures++; $display("done after %0d cycles", cyc + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
