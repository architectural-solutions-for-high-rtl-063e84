// tb_tau_fifo: random pushes and pops against a queue model, including
// filling to the full depth (in_ready must drop) and draining to empty.
module tb_tau_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data, out_data;

  tau_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0;
  logic [W-1:0] model [$];

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      // phases: fill, drain, random
      in_valid  = (c % 300 < 100) ? 1 : (c % 300 < 200) ? 0 : 1'($urandom_range(0, 1));
      out_ready = (c % 300 < 100) ? 0 : (c % 300 < 200) ? 1 : 1'($urandom_range(0, 1));
      in_data   = W'($urandom);
      #1;
      checks += 2;
      if (in_ready != (model.size() < DEPTH)) begin failures++; $display("in_ready wrong at %0d", c); end
      if (out_valid != (model.size() > 0)) begin failures++; $display("out_valid wrong at %0d", c); end
      if (!in_ready) n_full++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model.pop_front()) begin failures++; $display("data wrong at %0d", c); end
      end
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
