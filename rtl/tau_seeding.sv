// tau_seeding: stage 1 of the tau trigger. Selects the N_SEED charged
// particles with the highest pt out of the N_PART particles of one event.
//
// The event is captured whole on in_valid && in_ready. The particles are then
// scanned LANES at a time; each cycle the LANES new particles are merged into
// a sorted list of N_SEED seeds by ranking all N_SEED+LANES entries against
// each other and keeping the first N_SEED ranks. Ties keep the earlier
// particle (list entries, then lower particle index), so the result equals a
// stable sort by descending pt. Non-charged or empty slots are not seeds;
// unused seed slots come out with valid = 0.
//
// Timing: 1 capture cycle plus N_PART/LANES scan cycles (33 cycles at the
// defaults), then out_valid is held until out_ready. The captured frame is
// passed on with the seeds because the filtering stage needs all particles.
// The selection rule is from the published algorithm; the rank-merge
// structure and the 4 lanes are this design's choice (the original refers the
// seeding's insides to a separate publication).
module tau_seeding
  import tau_pkg::*;
#(
  parameter int unsigned NP    = N_PART,
  parameter int unsigned NS    = N_SEED,
  parameter int unsigned LANES = 4
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  output logic      in_ready,
  input  particle_t in_frame [NP],
  output logic      out_valid,
  input  logic      out_ready,
  output particle_t out_frame [NP],
  output particle_t out_seeds [NS]
);
  localparam int unsigned STEPS = NP / LANES;
  localparam int unsigned NE    = NS + LANES;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DONE} state_e;
  state_e state;
  logic [$clog2(STEPS+1)-1:0] step;
  particle_t frame [NP];
  particle_t seeds [NS];

  // Candidates for this step.
  particle_t elem [NE];
  logic [16:0] key [NE];
  logic [$clog2(NE)-1:0] rank [NE];
  particle_t merged [NS];

  always_comb begin
    for (int k = 0; k < NS; k++) elem[k] = seeds[k];
    for (int l = 0; l < LANES; l++) elem[NS+l] = frame[step*LANES + l];
    for (int k = 0; k < NE; k++)
      key[k] = (elem[k].valid && is_charged(elem[k].pid)) ? {1'b1, elem[k].pt} : 17'd0;
    for (int k = 0; k < NE; k++) begin
      rank[k] = '0;
      for (int m = 0; m < NE; m++)
        if (m != k && ((key[m] > key[k]) || (key[m] == key[k] && m < k)))
          rank[k] = rank[k] + 1'b1;
    end
    for (int r = 0; r < NS; r++) begin
      merged[r] = '0;
      for (int k = 0; k < NE; k++)
        if (rank[k] == r[$clog2(NE)-1:0] && key[k][16]) merged[r] = elem[k];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      step  <= '0;
      for (int k = 0; k < NS; k++) seeds[k] <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          frame <= in_frame;
          for (int k = 0; k < NS; k++) seeds[k] <= '0;
          step  <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          seeds <= merged;
          step  <= step + 1'b1;
          if (32'(step) == STEPS - 1) state <= S_DONE;
        end
        default: if (out_ready) state <= S_IDLE;
      endcase
    end
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_frame = frame;
  assign out_seeds = seeds;

  initial assert (NP % LANES == 0) else $error("NP must be a multiple of LANES");
endmodule
