// tb_tau_reco: tau reconstruction. Random properties for 16 seeds (empty
// seeds, zero pt sums, 0 to 5 charged candidates, phi sums across the wrap)
// are applied; each tau candidate is compared with a software model one
// cycle later.
module tb_tau_reco;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  tau_props_t in_props [N_SEED];
  tau_t out_taus [N_SEED];

  tau_reco dut (.*);

  int checks = 0, failures = 0, n_valid = 0, n_empty = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 20; r++) begin
      automatic tau_t e [N_SEED];
      for (int s = 0; s < N_SEED; s++) begin
        automatic tau_props_t p = '0;
        automatic int spt;
        p.seed = mk(int'($urandom_range(1, 2000)), int'($urandom_range(0, 1000)) - 500,
                    int'($urandom_range(0, 1439)) - 720, PID_CH_HAD, 0);
        if ($urandom_range(0, 7) == 0) p.seed.valid = 0;
        spt = ($urandom_range(0, 5) == 0) ? 0 : int'($urandom_range(1, 100000));
        p.sum_pt = SUMPT_W'(spt);
        p.avg_deta = 12'(int'($urandom_range(0, 184)) - 92);
        p.avg_dphi = 12'(int'($urandom_range(0, 184)) - 92);
        p.n_charged = 5'($urandom_range(0, 5));
        p.charge_sum = 6'(int'($urandom_range(0, 6)) - 3);
        in_props[s] = p;
        e[s].pt = (spt > 65535) ? 16'hffff : 16'(spt);
        e[s].eta = 12'(int'(p.seed.eta) + int'(p.avg_deta));
        e[s].phi = 11'(ref_wrap(int'(p.seed.phi) + int'(p.avg_dphi)));
        e[s].n_prong = p.n_charged;
        e[s].charge = p.charge_sum;
        e[s].valid = p.seed.valid && spt != 0 && p.n_charged >= 1 && p.n_charged <= 3;
        if (e[s].valid) n_valid++; else n_empty++;
      end
      @(negedge clk);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no output one cycle later"); end
      for (int s = 0; s < N_SEED; s++) begin
        checks++;
        if (out_taus[s] != e[s]) begin failures++; $display("run %0d seed %0d differs", r, s); end
      end
    end
    checks++;
    if (n_valid == 0 || n_empty == 0) begin failures++; $display("valid/empty not both seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
