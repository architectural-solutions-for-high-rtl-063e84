// tb_tau_clean: cleaning solution B. First a hand-made case in the spirit of
// the published six-tau example (two proximity groups plus isolated taus,
// one pair with equal pt); then random sets of 16 candidates clustered so
// that groups form. Outputs and the dropped count are compared with a
// software model (drop i if a nearby valid j has strictly higher pt, keep
// the first 8 survivors in candidate order), and out_valid must come 3
// cycles after the input is taken.
module tb_tau_clean;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  tau_t in_taus [N_SEED];
  tau_t out_taus [N_TAU_OUT];
  logic [4:0] n_dropped;

  tau_clean dut (.*);

  int checks = 0, failures = 0, n_over8 = 0;

  function automatic tau_t mkt(int pt, int eta, int phi, bit v);
    tau_t t = '0;
    t.pt = 16'(pt); t.eta = 12'(eta); t.phi = 11'(ref_wrap(phi)); t.valid = v; t.n_prong = 1;
    return t;
  endfunction

  task automatic run(input tau_t t [N_SEED]);
    tau_t e [N_TAU_OUT];
    int nd, c, k;
    ref_clean(t, e, nd);
    k = 0;
    for (int i = 0; i < N_SEED; i++) if (t[i].valid) k++;
    if (k - nd > N_TAU_OUT) n_over8++;
    @(negedge clk);
    in_taus = t;
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    c = 1;
    while (!out_valid) begin @(negedge clk); c++; end
    checks += 2;
    if (c != 3) begin failures++; $display("output after %0d cycles", c); end
    if (int'(n_dropped) != nd) begin failures++; $display("dropped %0d expected %0d", n_dropped, nd); end
    for (int o = 0; o < N_TAU_OUT; o++) begin
      checks++;
      if (out_taus[o] != e[o]) begin failures++; $display("slot %0d differs", o); end
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    tau_t t [N_SEED];
    repeat (3) @(posedge clk);
    rst = 0;
    // hand-made: group A = {0,2,5}, group B = {1,3}, isolated 4, equal-pt pair {6,7}
    for (int i = 0; i < N_SEED; i++) t[i] = '0;
    t[0] = mkt(50, 100, 100, 1);  t[2] = mkt(80, 130, 110, 1); t[5] = mkt(20, 90, 60, 1);
    t[1] = mkt(70, -300, 700, 1); t[3] = mkt(90, -320, -700, 1);
    t[4] = mkt(40, 400, -200, 1);
    t[6] = mkt(60, 0, -500, 1);   t[7] = mkt(60, 20, -510, 1);
    run(t);
    checks += 3;
    if (n_dropped != 3) begin failures++; $display("hand case: %0d dropped", n_dropped); end
    if (out_taus[0] != t[2] || out_taus[1] != t[3]) begin failures++; $display("hand case order"); end
    if (out_taus[5].valid) begin failures++; $display("hand case: slot 5 should be empty"); end
    for (int r = 0; r < 60; r++) begin
      int ncl = int'($urandom_range(1, 14));
      int ce [14], cp [14];
      for (int c = 0; c < ncl; c++) begin
        ce[c] = int'($urandom_range(0, 1000)) - 500;
        cp[c] = int'($urandom_range(0, 1439)) - 720;
      end
      for (int i = 0; i < N_SEED; i++) begin
        int c = int'($urandom_range(0, ncl - 1));
        t[i] = mkt(int'($urandom_range(1, 300)), ce[c] + int'($urandom_range(0, 120)) - 60,
                   cp[c] + int'($urandom_range(0, 120)) - 60, $urandom_range(0, 9) != 0);
      end
      if (r % 10 == 0)  // isolated taus: more than 8 survive
        for (int i = 0; i < N_SEED; i++) t[i] = mkt(int'($urandom_range(1, 300)), -800 + 100 * i, 0, 1);
      run(t);
    end
    checks++;
    if (n_over8 == 0) begin failures++; $display("never more than 8 survivors"); end
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
