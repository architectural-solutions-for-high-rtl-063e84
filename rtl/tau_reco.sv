// tau_reco: stage 6 of the tau trigger. Builds the N tau candidates of an
// event from the seeds and the per-seed properties, in one clock cycle.
//
// For each seed: pt = sum of signal pt (saturated to 16 bits), eta = seed
// eta + mean eta offset, phi = seed phi + mean phi offset wrapped into
// [-pi, pi), prong count and charge from the charged signal candidates. A
// candidate is valid when its seed is valid, its pt is non-zero and it has
// one to three charged signal candidates; otherwise it is left empty.
//
// Handshake: valid/ready with a single output register (1-cycle latency).
// The one-cycle reconstruction of 16 candidates, some possibly empty, is
// from the published design; the validity rule is this design's choice.
module tau_reco
  import tau_pkg::*;
#(
  parameter int unsigned N = N_SEED
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  input  tau_props_t in_props [N],
  output logic       out_valid,
  input  logic       out_ready,
  output tau_t       out_taus [N]
);
  tau_t t [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      t[i].pt      = (in_props[i].sum_pt > SUMPT_W'(16'hffff)) ? 16'hffff : in_props[i].sum_pt[15:0];
      t[i].eta     = in_props[i].seed.eta + in_props[i].avg_deta;
      t[i].phi     = 11'(wrap_phi(13'(in_props[i].seed.phi) + 13'(in_props[i].avg_dphi)));
      t[i].n_prong = in_props[i].n_charged;
      t[i].charge  = in_props[i].charge_sum;
      t[i].valid   = in_props[i].seed.valid && (in_props[i].sum_pt != '0) &&
                     (in_props[i].n_charged >= 5'd1) && (in_props[i].n_charged <= 5'd3);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (in_valid && in_ready) begin
      out_valid <= 1'b1;
      out_taus  <= t;
    end else if (out_ready) out_valid <= 1'b0;
  end
endmodule
