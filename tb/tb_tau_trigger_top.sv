// tb_tau_trigger_top: end-to-end test of the tau trigger at its default
// sizes. Events from the generator in tau_ref_pkg are sent on the 360 MHz
// link clock; the algorithm runs on a 300 MHz clock. Every accepted event's
// output is compared with the software reference, in order.
// Phase 1 sends events at the nominal rate, one every 54 link cycles, and
// checks that none is dropped and that the latency stays within 275 link
// cycles. Phase 2 sends a burst faster than the pipeline can take, so that
// the input crossing drops events and stages stall on full source buffers.
// Mechanisms counted (each must occur): dropped input event, target list
// truncated at 30 (in the reference), source buffers released with unread
// leftovers (in the RTL), a stage held back by the next one (seeding waiting
// for filtering, or a merge unit waiting for its target FIFO), duplicate taus
// removed by cleaning, empty seed slots, empty tau slots.
`timescale 1ps/1ps
module tb_tau_trigger_top;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  localparam int N_NOMINAL = 12;
  localparam int N_BURST   = 12;
  localparam int II_LINK   = 54;
  localparam int MAX_LAT   = 275;

  logic clk_link = 0, clk_algo = 0, rst_link = 1, rst_algo = 1;
  always #1389 clk_link = !clk_link;
  always #1667 clk_algo = !clk_algo;

  logic      in_valid = 0;
  particle_t in_frame [N_PART];
  logic      in_dropped, out_valid;
  tau_t      out_taus [N_TAU_OUT];
  logic [$clog2(N_SEED+1)-1:0] out_n_dropped;

  tau_trigger_top dut (.*);

  int checks = 0, failures = 0;
  int n_drop_in = 0, n_trunc = 0, n_leftover = 0, n_backpr = 0, n_clean = 0, n_empty_seed = 0, n_empty_tau = 0;
  longint link_cycle = 0;
  typedef tau_t [N_TAU_OUT-1:0] tau_vec_t;
  tau_vec_t exp_q [$];
  typedef tau_t [N_SEED-1:0] tau16_vec_t;
  tau16_vec_t exp16_q [$];
  int n_reco = 0;
  int     exp_nd [$];
  longint t_in [$];
  int     n_out = 0, max_lat = 0;

  always @(posedge clk_link) link_cycle <= link_cycle + 1;

  // source buffers released with items never read (left to be overwritten)
  for (genvar s = 0; s < N_SEED; s++) begin : g_mon
    always @(posedge clk_algo)
      if (!rst_algo && dut.g_lane[s].src_release &&
          int'(dut.g_lane[s].src_size[0]) + int'(dut.g_lane[s].src_size[1]) +
          int'(dut.g_lane[s].src_size[2]) + int'(dut.g_lane[s].src_size[3]) > MAX_CAND)
        n_leftover++;
  end

  // backpressure: a stage holds valid output that the next stage cannot take
  always @(posedge clk_algo)
    if (!rst_algo && dut.seed_valid && !dut.seed_ready) n_backpr++;
  for (genvar s = 0; s < N_SEED; s++) begin : g_bp
    always @(posedge clk_algo)
      if (!rst_algo && dut.g_lane[s].m_valid && !dut.g_lane[s].m_ready) n_backpr++;
  end

  task automatic send(input bit dense, input int ncl);
    frame_t f;
    tau_t o [N_TAU_OUT];
    tau_t t16 [N_SEED];
    tau_vec_t ov;
    int nd, ntr, nseed;
    gen_event(f, ncl, dense);
    if (ncl == 0)  // sparse event: fewer than 16 charged particles
      for (int i = 12; i < N_PART; i++) f[i] = '0;
    ref_event(f, o, nd, t16, ntr);
    @(negedge clk_link);
    in_frame = f;
    in_valid = 1;
    #1;
    if (in_dropped) n_drop_in++;
    else begin
      for (int i = 0; i < N_TAU_OUT; i++) ov[i] = o[i];
      exp_q.push_back(ov);
      begin
        tau16_vec_t v16;
        for (int i = 0; i < N_SEED; i++) v16[i] = t16[i];
        exp16_q.push_back(v16);
      end
      exp_nd.push_back(nd);
      t_in.push_back(link_cycle);
      n_trunc += ntr;
      nseed = 0;
      for (int i = 0; i < N_PART; i++) if (ref_charged(f[i])) nseed++;
      if (nseed < N_SEED) n_empty_seed++;
    end
    @(negedge clk_link);
    in_valid = 0;
  endtask

  // the 16 reconstructed candidates, before cleaning
  always @(posedge clk_algo) if (!rst_algo && dut.reco_valid && dut.clean_ready) begin
    tau16_vec_t e;
    if (exp16_q.size() != 0) begin
      e = exp16_q.pop_front();
      for (int i = 0; i < N_SEED; i++) begin
        checks++;
        if (dut.reco_taus[i] !== e[i]) begin
          failures++;
          $display("event %0d candidate %0d: got pt=%0d eta=%0d phi=%0d np=%0d v=%0d exp pt=%0d eta=%0d phi=%0d np=%0d v=%0d @%0t",
                   n_reco, i, dut.reco_taus[i].pt, dut.reco_taus[i].eta, dut.reco_taus[i].phi,
                   dut.reco_taus[i].n_prong, dut.reco_taus[i].valid,
                   e[i].pt, e[i].eta, e[i].phi, e[i].n_prong, e[i].valid, $time);
        end
      end
    end
    n_reco++;
  end

  always @(posedge clk_link) if (out_valid) begin
    tau_vec_t e;
    int lat;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      e = exp_q.pop_front();
      lat = int'(link_cycle - t_in.pop_front());
      if (lat > max_lat) max_lat = lat;
      for (int i = 0; i < N_TAU_OUT; i++) begin
        checks++;
        if (out_taus[i] !== e[i]) begin
          failures++;
          $display("event %0d slot %0d: got pt=%0d eta=%0d phi=%0d v=%0d exp pt=%0d eta=%0d phi=%0d v=%0d",
                   n_out, i, out_taus[i].pt, out_taus[i].eta, out_taus[i].phi, out_taus[i].valid,
                   e[i].pt, e[i].eta, e[i].phi, e[i].valid);
        end
        if (!e[i].valid) n_empty_tau++;
      end
      checks++;
      if (int'(out_n_dropped) != exp_nd[0]) begin
        failures++;
        $display("event %0d: dropped count %0d, expected %0d", n_out, out_n_dropped, exp_nd[0]);
      end
      if (exp_nd.pop_front() > 0) n_clean++;
    end
    n_out++;
  end

  initial begin
    foreach (in_frame[i]) in_frame[i] = '0;
    repeat (5) @(posedge clk_link);
    rst_link = 0; rst_algo = 0;
    repeat (5) @(posedge clk_link);
    // phase 1: nominal rate
    for (int e = 0; e < N_NOMINAL; e++) begin
      send(e % 3 == 1, (e == 5) ? 0 : 3 + e % 6);
      repeat (II_LINK - 2) @(posedge clk_link);
    end
    checks++;
    if (n_drop_in != 0) begin
      failures++;
      $display("events dropped at the nominal rate: %0d", n_drop_in);
    end
    repeat (400) @(posedge clk_link);
    checks++;
    if (max_lat > MAX_LAT) begin
      failures++;
      $display("latency %0d link cycles above %0d", max_lat, MAX_LAT);
    end
    $display("nominal rate: %0d events, max latency %0d link cycles", n_out, max_lat);
    // phase 2: burst
    for (int e = 0; e < N_BURST; e++) begin
      send(e % 2 == 0, 4 + e % 5);
      repeat (6) @(posedge clk_link);
    end
    repeat (1500) @(posedge clk_link);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d events never came out", exp_q.size());
    end
    $display("mechanisms: dropped_in=%0d truncated_lists=%0d leftover_releases=%0d backpressure_cycles=%0d cleaned_events=%0d short_seed_events=%0d empty_tau_slots=%0d",
             n_drop_in, n_trunc, n_leftover, n_backpr, n_clean, n_empty_seed, n_empty_tau);
    if (n_drop_in == 0)    begin failures++; $display("mechanism not seen: input drop"); end
    if (n_trunc == 0)      begin failures++; $display("mechanism not seen: list truncation"); end
    if (n_leftover == 0)      begin failures++; $display("mechanism not seen: buffer released with leftovers"); end
    if (n_backpr == 0)     begin failures++; $display("mechanism not seen: backpressure stall"); end
    if (n_clean == 0)      begin failures++; $display("mechanism not seen: cleaning drop"); end
    if (n_empty_seed == 0) begin failures++; $display("mechanism not seen: empty seed"); end
    if (n_empty_tau == 0)  begin failures++; $display("mechanism not seen: empty tau"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_link);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
