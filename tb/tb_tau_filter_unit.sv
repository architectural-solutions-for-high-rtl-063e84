// tb_tau_filter_unit: one filter block. 32 random particles, some placed
// inside and some just outside the 0.4 rad cone (also across the phi wrap),
// are streamed against a seed; the appended items (one cycle later) and the
// pt sum are compared with a software cone test. An empty seed must pass
// nothing.
module tb_tau_filter_unit;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic start = 0, in_valid = 0, wr_en;
  particle_t seed, in_p, wr_data;
  logic [SUMPT_W-1:0] psum;

  tau_filter_unit dut (.*);

  int checks = 0, failures = 0;
  plist_t got;
  always @(posedge clk) if (wr_en) got.push_back(wr_data);

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 10; r++) begin
      automatic particle_t ps [FILT_LEN];
      automatic plist_t expl = {};
      automatic int exps = 0;
      seed = mk(500, int'($urandom_range(0, 600)) - 300, (r % 3 == 0) ? 715 : int'($urandom_range(0, 1439)) - 720,
                PID_CH_HAD, 0);
      if (r == 9) seed = '0;
      for (int k = 0; k < FILT_LEN; k++) begin
        int d = (k % 2) ? 60 : 110;
        ps[k] = mk(int'($urandom_range(1, 300)), int'(seed.eta) + int'($urandom_range(0, 2*d)) - d,
                   int'(seed.phi) + int'($urandom_range(0, 2*d)) - d, PID_CH_HAD, 0);
        if (k == 5) ps[k].valid = 0;
        if (ps[k].valid && seed.valid && pdr2(ps[k], seed) <= 92*92) begin
          expl.push_back(ps[k]);
          exps += int'(ps[k].pt);
        end
      end
      got = {};
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < FILT_LEN; k++) begin
        in_valid = 1; in_p = ps[k]; @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks += 2;
      if (got.size() != expl.size()) begin failures++; $display("run %0d: %0d items, expected %0d", r, got.size(), expl.size()); end
      else foreach (expl[k]) if (got[k] != expl[k]) begin failures++; $display("item %0d differs", k); break; end
      if (int'(psum) != exps) begin failures++; $display("run %0d: psum %0d, expected %0d", r, psum, exps); end
    end
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
