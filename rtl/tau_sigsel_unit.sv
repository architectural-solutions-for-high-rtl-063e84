// tau_sigsel_unit: stage 4 of the tau trigger for one seed. Marks each
// candidate of the seed's list as a signal candidate or not.
//
// The header beat gives the seed and the list's totalPt. A candidate is a
// signal candidate when its type is a charged hadron, an electron or a
// photon, and it lies inside the signal cone around the seed, whose radius
// is R = K / totalPt bounded to [R_min, R_max]. The division is avoided by
// squaring: dr2 <= R_min^2, or dr2 <= R_max^2 and dr2 * totalPt^2 <= K^2.
// totalPt is saturated to 16 bits, which cannot change the result because
// the R_min test then decides.
//
// Stream in and out with valid/ready; one registered stage, so each beat
// takes one cycle and the stage never stalls unless its output is stalled.
// That the selection depends on particle type and on a region set by totalPt
// follows the published description; the exact criteria, cone constants and
// units are this design's choice, as the original does not list them.
module tau_sigsel_unit
  import tau_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  input  cand_beat_t in_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output sel_beat_t  out_beat
);
  particle_t          seed;
  logic [15:0]        tpt;
  logic [31:0]        tpt2;
  logic [25:0]        d;
  logic               type_ok, in_cone, sig;

  assign tpt2    = 32'(tpt) * 32'(tpt);
  assign d       = dr2(in_beat.p, seed);
  assign type_ok = in_beat.p.valid &&
                   (in_beat.p.pid == PID_CH_HAD || in_beat.p.pid == PID_ELECTRON ||
                    in_beat.p.pid == PID_PHOTON);
  assign in_cone = (d <= 26'(R2_SIG_MIN)) ||
                   ((d <= 26'(R2_SIG_MAX)) && (64'(d) * 64'(tpt2) <= K2_SIG));
  assign sig     = !in_beat.hdr && type_ok && in_cone;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      seed      <= '0;
      tpt       <= '0;
    end else begin
      if (in_valid && in_ready) begin
        out_valid          <= 1'b1;
        out_beat.hdr       <= in_beat.hdr;
        out_beat.last      <= in_beat.last;
        out_beat.total_pt  <= in_beat.total_pt;
        out_beat.p         <= in_beat.p;
        out_beat.is_signal <= sig;
        if (in_beat.hdr) begin
          seed <= in_beat.p;
          tpt  <= (in_beat.total_pt > SUMPT_W'(16'hffff)) ? 16'hffff : in_beat.total_pt[15:0];
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
