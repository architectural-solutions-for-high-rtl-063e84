// tb_tau_merge_unit: merging solution B for one seed. Four source lists of
// random sizes (0..32, so that some runs exceed the 30-item target) are
// presented as ping-pong read ports. The output stream is compared with the
// reference order (index-major, list-minor, at most 30 items), the header
// with the seed and the summed totalPt, and the release with the end of the
// stream. With a free output the header follows one cycle after the sources
// become valid and then one item per cycle (last item n+1 cycles after the
// sources become valid); other runs stall the output at random.
module tb_tau_merge_unit;
  import tau_pkg::*;
  import tau_ref_pkg::*;
  localparam int SIDE_W = $bits(particle_t) + SUMPT_W;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic src_valid [N_FILT];
  logic [5:0] src_size [N_FILT];
  logic [SIDE_W-1:0] src_side [N_FILT];
  logic [4:0] src_addr;
  particle_t src_data [N_FILT];
  logic src_release, out_valid, out_ready = 1;
  cand_beat_t out_beat;

  tau_merge_unit dut (.*);

  particle_t mem [N_FILT][FILT_LEN];
  always_comb for (int j = 0; j < N_FILT; j++) src_data[j] = mem[j][src_addr];

  int checks = 0, failures = 0, cyc = 0, n_trunc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int j = 0; j < N_FILT; j++) begin src_valid[j] = 0; src_size[j] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 40; r++) begin
      automatic plist_t l [N_FILT];
      automatic plist_t expl;
      automatic cand_beat_t got [$];
      automatic particle_t seed = mk(700, 10, 20, PID_CH_HAD, 0);
      automatic int tot = 0, t0, t1;
      automatic bit stall = (r % 2 == 1);
      for (int j = 0; j < N_FILT; j++) begin
        automatic int n = (r % 5 == 0) ? 32 : int'($urandom_range(0, 12));
        if (r == 3) n = 0;
        l[j] = {};
        for (int k = 0; k < n; k++) begin
          mem[j][k] = mk(int'($urandom_range(1, 999)), 0, 0, PID_PHOTON, 0);
          l[j].push_back(mem[j][k]);
        end
        src_size[j] = 6'(n);
        src_side[j] = {seed, SUMPT_W'(100 * (j + 1))};
        tot += 100 * (j + 1);
      end
      ref_merge(l, expl);
      if (l[0].size() + l[1].size() + l[2].size() + l[3].size() > MAX_CAND) n_trunc++;
      @(negedge clk);
      for (int j = 0; j < N_FILT; j++) src_valid[j] = 1;
      t0 = cyc;
      forever begin
        out_ready = stall ? 1'($urandom_range(0, 1)) : 1'b1;
        @(posedge clk);
        if (out_valid && out_ready) begin
          got.push_back(out_beat);
          if (out_beat.last) begin
            checks++;
            if (!src_release) begin failures++; $display("no release with last beat"); end
            t1 = cyc;
            break;
          end
        end
        @(negedge clk);
      end
      @(negedge clk);
      for (int j = 0; j < N_FILT; j++) src_valid[j] = 0;
      out_ready = 1;
      checks += 2;
      if (got.size() != expl.size() + 1) begin
        failures++;
        $display("run %0d: %0d beats, expected %0d", r, got.size(), expl.size() + 1);
        continue;
      end
      if (!got[0].hdr || got[0].p != seed || int'(got[0].total_pt) != tot) begin
        failures++; $display("run %0d: bad header", r);
      end
      foreach (expl[k]) begin
        checks++;
        if (got[k+1].hdr || got[k+1].p != expl[k]) begin failures++; $display("run %0d item %0d differs", r, k); end
      end
      if (!stall) begin
        checks++;
        if (t1 - t0 != expl.size() + 1) begin
          failures++; $display("run %0d: %0d cycles for %0d items", r, t1 - t0, expl.size());
        end
      end
    end
    checks++;
    if (n_trunc == 0) begin failures++; $display("no truncated run"); end
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
