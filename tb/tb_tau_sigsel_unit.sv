// tb_tau_sigsel_unit: signal candidate selection for one seed. Lists with
// totalPt values that put the signal cone at its lower bound, its upper
// bound and in between are streamed through; each candidate's flag is
// compared with a floating-point cone test R = 3 GeV / totalPt bounded to
// [0.05, 0.10] rad, and the beats must come out unchanged, one per cycle,
// one cycle after they went in.
module tb_tau_sigsel_unit;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  cand_beat_t in_beat;
  sel_beat_t out_beat;

  tau_sigsel_unit dut (.*);

  int checks = 0, failures = 0, n_sig = 0, n_bkg = 0;
  sel_beat_t exp_q [$];

  // floating-point model of the cone (units: rad, GeV)
  function automatic bit fsig(particle_t p, particle_t seed, int tot);
    real r, dr, lsb = 3.14159265358979 / 720.0;
    if (!p.valid || !(p.pid == PID_CH_HAD || p.pid == PID_ELECTRON || p.pid == PID_PHOTON)) return 0;
    r = (tot == 0) ? 1.0e9 : 3.0 / (((tot > 65535) ? 65535 : tot) * 0.25);
    // bounds as integer LSB radii 11 and 23 (0.048 and 0.100 rad)
    if (r < 11 * lsb) r = 11 * lsb;
    if (r > 23 * lsb) r = 23 * lsb;
    dr = $sqrt(real'(pdr2(p, seed))) * lsb;
    return dr <= r + 1.0e-9;
  endfunction

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    automatic sel_beat_t e = exp_q.pop_front();
    checks++;
    if (out_beat != e) begin
      failures++;
      $display("beat differs: got %h exp %h", out_beat, e);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 30; r++) begin
      automatic particle_t seed = mk(400, int'($urandom_range(0, 400)) - 200, 715, PID_CH_HAD, 0);
      automatic int tot = (r % 3 == 0) ? 100 : (r % 3 == 1) ? 2000 : int'($urandom_range(120, 1100));
      if (r == 7) tot = 200000;
      for (int k = 0; k <= 20; k++) begin
        automatic cand_beat_t b = '0;
        automatic sel_beat_t e;
        if (k == 0) begin
          b.hdr = 1; b.p = seed; b.total_pt = SUMPT_W'(tot);
        end else begin
          b.p = mk(int'($urandom_range(1, 300)), int'(seed.eta) + int'($urandom_range(0, 50)) - 25,
                   int'(seed.phi) + int'($urandom_range(0, 50)) - 25, pid_e'($urandom_range(1, 5)), 0);
          b.total_pt = SUMPT_W'(tot);
        end
        b.last = (k == 20);
        e.hdr = b.hdr; e.last = b.last; e.total_pt = b.total_pt; e.p = b.p;
        e.is_signal = !b.hdr && fsig(b.p, seed, tot);
        if (!b.hdr) begin
          if (e.is_signal) n_sig++; else n_bkg++;
        end
        exp_q.push_back(e);
        @(negedge clk);
        in_valid = 1; in_beat = b;
        out_ready = (r % 4 == 3) ? 1'($urandom_range(0, 1)) : 1'b1;
        forever begin
          automatic logic acc;
          #1 acc = in_ready;
          @(posedge clk);
          if (acc) break;
          @(negedge clk);
          out_ready = 1;
        end
      end
      @(negedge clk);
      in_valid = 0;
    end
    out_ready = 1;
    repeat (5) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d beats missing", exp_q.size()); end
    if (n_sig == 0 || n_bkg == 0) begin failures++; $display("no signal or no background seen"); end
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
