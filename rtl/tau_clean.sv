// tau_clean: stage 7 of the tau trigger (cleaning solution B). Removes
// secondary detections of the same tau and keeps at most N_OUT taus.
//
// No sorting is done. A N_IN x N_IN cleaning matrix is built with
//   M(i,j) = NearBy(i,j) AND LessPt(i,j),
// NearBy = the two candidates are within the cleaning distance (dr2 <=
// R2_CLEAN), LessPt = candidate i has a strictly lower pt than candidate j.
// Candidate i is dropped when any M(i,j) = 1 with j != i, so within a group
// of nearby candidates only the highest-pt one survives. Empty candidates
// neither survive nor drop others. The survivors are packed, in candidate
// order, into the first N_OUT output slots; unused slots have valid = 0.
//
// Timing: capture, matrix, drop-and-pack: out_valid 3 cycles after the input
// is accepted, held until out_ready; a new event is accepted after that.
// The matrix method is the published one; the strict comparison (equal-pt
// neighbours both survive), the packing order and the cone are this design's
// choices.
module tau_clean
  import tau_pkg::*;
#(
  parameter int unsigned N_IN  = N_SEED,
  parameter int unsigned N_OUT = N_TAU_OUT
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  output logic in_ready,
  input  tau_t in_taus [N_IN],
  output logic out_valid,
  input  logic out_ready,
  output tau_t out_taus [N_OUT],
  output logic [$clog2(N_IN+1)-1:0] n_dropped  // valid candidates removed as duplicates
);
  typedef enum logic [1:0] {S_IDLE, S_MAT, S_PACK, S_OUT} state_e;
  state_e state;
  tau_t taus [N_IN];
  logic [N_IN-1:0] m [N_IN];
  logic [N_IN-1:0] keep;
  tau_t packed_taus [N_OUT];
  logic [$clog2(N_IN+1)-1:0] ndrop;

  function automatic logic near_by(tau_t a, tau_t b);
    logic signed [25:0] de, dp;
    de = 26'(13'(a.eta) - 13'(b.eta));
    dp = 26'(wrap_phi(13'(a.phi) - 13'(b.phi)));
    return (de * de + dp * dp) <= 26'(R2_CLEAN);
  endfunction

  always_comb begin
    int k;
    ndrop = '0;
    for (int i = 0; i < N_IN; i++) begin
      keep[i] = taus[i].valid && (m[i] == '0);
      if (taus[i].valid && !keep[i]) ndrop = ndrop + 1'b1;
    end
    k = 0;
    for (int o = 0; o < N_OUT; o++) packed_taus[o] = '0;
    for (int i = 0; i < N_IN; i++)
      if (keep[i]) begin
        if (k < N_OUT) packed_taus[k] = taus[i];
        k = k + 1;
      end
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk) begin
    if (rst) state <= S_IDLE;
    else begin
      case (state)
        S_IDLE: if (in_valid) begin
          taus  <= in_taus;
          state <= S_MAT;
        end
        S_MAT: begin
          for (int i = 0; i < N_IN; i++)
            for (int j = 0; j < N_IN; j++)
              m[i][j] <= (i != j) && taus[i].valid && taus[j].valid &&
                         near_by(taus[i], taus[j]) && (taus[i].pt < taus[j].pt);
          state <= S_PACK;
        end
        S_PACK: begin
          out_taus  <= packed_taus;
          n_dropped <= ndrop;
          state     <= S_OUT;
        end
        default: if (out_ready) state <= S_IDLE;
      endcase
    end
  end
endmodule
