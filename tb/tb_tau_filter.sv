// tb_tau_filter: checks the filtering stage (64 filter blocks). Random
// events and seeds from the reference generator are applied; every block's
// appended items, their count and the committed side word (seed, partial
// pt sum) are compared with the software reference. Also checks the 34-cycle
// stage timing and that the stage waits while lists_ready is low.
module tb_tau_filter;
  import tau_pkg::*;
  import tau_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  logic in_valid = 0, in_ready, lists_ready = 1, commit;
  particle_t in_frame [N_PART];
  particle_t in_seeds [N_SEED];
  logic wr_en [N_SEED][N_FILT];
  particle_t wr_data [N_SEED][N_FILT];
  logic [$bits(particle_t)+SUMPT_W-1:0] commit_side [N_SEED][N_FILT];

  tau_filter dut (.*);

  int checks = 0, failures = 0;
  particle_t got [N_SEED][N_FILT][$];
  int cyc = 0, t_start = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int s = 0; s < N_SEED; s++)
      for (int j = 0; j < N_FILT; j++)
        if (wr_en[s][j]) got[s][j].push_back(wr_data[s][j]);
  end

  initial begin
    frame_t f;
    particle_t seeds [N_SEED];
    repeat (3) @(posedge clk);
    rst = 0;
    for (int e = 0; e < 6; e++) begin
      gen_event(f, 3 + e, e % 2 == 0);
      ref_seeds(f, seeds);
      if (e == 3) seeds[N_SEED-1] = '0;  // an empty seed slot
      for (int s = 0; s < N_SEED; s++) for (int j = 0; j < N_FILT; j++) got[s][j] = {};
      @(negedge clk);
      in_frame = f;
      in_seeds = seeds;
      in_valid = 1;
      lists_ready = (e != 2);
      if (e == 2) begin
        repeat (5) @(negedge clk);
        checks++;
        if (dut.state != 0) begin failures++; $display("started without list space"); end
        lists_ready = 1;
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t_start = cyc;
      @(negedge clk);
      in_valid = 0;
      while (!commit) @(posedge clk);
      checks++;
      if (cyc - t_start != 34) begin
        failures++;
        $display("commit after %0d cycles, expected 34", cyc - t_start);
      end
      for (int s = 0; s < N_SEED; s++)
        for (int j = 0; j < N_FILT; j++) begin
          plist_t l;
          int ps;
          ref_filter(f, seeds[s], j, l, ps);
          checks++;
          if (got[s][j].size() != l.size() || commit_side[s][j] != {seeds[s], SUMPT_W'(ps)}) begin
            failures++;
            $display("event %0d seed %0d block %0d: %0d items (exp %0d), side mismatch=%0d",
                     e, s, j, got[s][j].size(), l.size(), commit_side[s][j] != {seeds[s], SUMPT_W'(ps)});
          end else
            foreach (l[k]) begin
              checks++;
              if (got[s][j][k] != l[k]) begin failures++; $display("item mismatch"); end
            end
        end
      @(posedge clk);
    end
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
