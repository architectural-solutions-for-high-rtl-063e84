// tb_tau_params_unit: conditional sum and average for one seed. Random
// lists with random signal flags (some with no signal candidate at all) are
// streamed in back to back; the pt sum, the two pt-weighted mean offsets
// (truncating division), the charged count and the charge sum are compared
// with a software model. Also checks that the second list is accepted while
// the first is still being divided, and the hand-over-to-result time.
module tb_tau_params_unit;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sel_beat_t in_beat;
  tau_props_t out_props;

  tau_params_unit dut (.*);

  int checks = 0, failures = 0, n_overlap = 0;
  tau_props_t exp_q [$];

  always @(posedge clk) if (!rst && in_valid && in_ready && dut.dstate == 1) n_overlap++;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    automatic tau_props_t e = exp_q.pop_front();
    checks++;
    if (out_props != e) begin
      failures++;
      $display("got sum=%0d de=%0d dp=%0d n=%0d q=%0d exp sum=%0d de=%0d dp=%0d n=%0d q=%0d",
               out_props.sum_pt, out_props.avg_deta, out_props.avg_dphi, out_props.n_charged, out_props.charge_sum,
               e.sum_pt, e.avg_deta, e.avg_dphi, e.n_charged, e.charge_sum);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    out_ready = 1;
    for (int r = 0; r < 30; r++) begin
      automatic particle_t seed = mk(300, int'($urandom_range(0, 400)) - 200, (r % 2) ? 710 : -300, PID_CH_HAD, 0);
      automatic int n = int'($urandom_range(1, 30));
      automatic longint spt = 0, swe = 0, swp = 0;
      automatic int nch = 0, q = 0;
      automatic tau_props_t e;
      for (int k = 0; k <= n; k++) begin
        automatic sel_beat_t b = '0;
        if (k == 0) begin b.hdr = 1; b.p = seed; end
        else begin
          b.p = mk(int'($urandom_range(1, 65535)), int'(seed.eta) + int'($urandom_range(0, 184)) - 92,
                   int'(seed.phi) + int'($urandom_range(0, 184)) - 92, pid_e'($urandom_range(1, 5)),
                   1'($urandom_range(0, 1)));
          b.is_signal = (r % 7 == 3) ? 1'b0 : 1'($urandom_range(0, 1));
          if (b.is_signal) begin
            spt += b.p.pt;
            swe += longint'(b.p.pt) * (int'(b.p.eta) - int'(seed.eta));
            swp += longint'(b.p.pt) * ref_wrap(int'(b.p.phi) - int'(seed.phi));
            if (ref_charged(b.p)) begin nch++; q += b.p.charge ? -1 : 1; end
          end
        end
        b.last = (k == n);
        @(negedge clk);
        in_valid = 1; in_beat = b;
        forever begin
          automatic logic acc;
          #1 acc = in_ready;
          @(posedge clk);
          if (acc) break;
          @(negedge clk);
        end
      end
      @(negedge clk);
      in_valid = 0;
      e.seed = seed; e.sum_pt = SUMPT_W'(spt);
      e.avg_deta = 12'((spt == 0) ? 0 : swe / spt);
      e.avg_dphi = 12'((spt == 0) ? 0 : swp / spt);
      e.n_charged = 5'(nch); e.charge_sum = 6'(q);
      exp_q.push_back(e);
    end
    repeat (100) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    if (n_overlap == 0) begin failures++; $display("no list accepted during a division"); end
    // timing: hand-over to result
    begin
      automatic int c = 0;
      @(negedge clk);
      out_ready = 0;
      in_valid = 1; in_beat = '0; in_beat.hdr = 1; in_beat.last = 1;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) begin @(negedge clk); c++; end
      checks++;
      if (c != 35) begin failures++; $display("result %0d cycles after the last beat", c); end
      out_ready = 1;
      exp_q.push_back(out_props);
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
