// tb_tau_seeding: checks stage 1 against a stable software sort. Random
// events, a sparse event (fewer than 16 charged particles) and an event with
// equal pt values are applied; the 16 seeds, the passed-on frame and the
// 33-cycle stage time are checked.
module tb_tau_seeding;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  particle_t in_frame [N_PART];
  particle_t out_frame [N_PART];
  particle_t out_seeds [N_SEED];

  tau_seeding dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    frame_t f;
    particle_t exp_s [N_SEED];
    int t0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int e = 0; e < 8; e++) begin
      gen_event(f, 2 + e, e == 1);
      if (e == 2) for (int i = 10; i < N_PART; i++) f[i] = '0;
      if (e == 3) for (int i = 0; i < N_PART; i++) f[i].pt = 16'(100 + (i % 3));
      ref_seeds(f, exp_s);
      @(negedge clk);
      in_frame = f;
      in_valid = 1;
      @(posedge clk);
      t0 = cyc;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(posedge clk);
      checks++;
      if (cyc - t0 != 33) begin failures++; $display("seeds after %0d cycles", cyc - t0); end
      for (int s = 0; s < N_SEED; s++) begin
        checks++;
        if (out_seeds[s] != exp_s[s]) begin
          failures++;
          $display("event %0d seed %0d: got pt %0d exp pt %0d", e, s, out_seeds[s].pt, exp_s[s].pt);
        end
      end
      checks++;
      if (out_frame != f) begin failures++; $display("frame not passed on"); end
      repeat (3) @(negedge clk);
      checks++;
      if (!out_valid || in_ready) begin failures++; $display("output not held"); end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
