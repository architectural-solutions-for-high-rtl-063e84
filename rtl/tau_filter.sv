// tau_filter: stage 2 of the tau trigger. For every one of the NS seeds,
// NF filter blocks each examine FL of the event's particles (block j of a
// seed sees particles j*FL .. j*FL+FL-1), so the whole event is filtered in
// FL cycles rather than the NP cycles a single pass per seed would need,
// which would break the 0.15 us initiation interval (54 cycles at 360 MHz,
// 45 at 300 MHz). With the defaults this is 16 x 4 = 64 filter blocks and 32
// scan cycles.
//
// Handshake: an event (frame plus seeds) is accepted when the stage is idle
// and all NS*NF downstream source buffers can take a new list (lists_ready).
// Each block appends its passing particles through wr_en/wr_data; one cycle
// after the last particle, commit is raised for one cycle for all lists at
// once, with commit_side = {seed, partial totalPt} of each block.
//
// Timing: 1 capture + FL scan + 1 flush cycle (34 at the defaults).
// Block count, split and list length are the published ones; the sequencing
// is this design's choice.
module tau_filter
  import tau_pkg::*;
#(
  parameter int unsigned NP = N_PART,
  parameter int unsigned NS = N_SEED,
  parameter int unsigned NF = N_FILT,
  parameter int unsigned FL = FILT_LEN
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  output logic               in_ready,
  input  particle_t          in_frame [NP],
  input  particle_t          in_seeds [NS],
  input  logic               lists_ready,
  output logic               wr_en   [NS][NF],
  output particle_t          wr_data [NS][NF],
  output logic               commit,
  output logic [$bits(particle_t)+SUMPT_W-1:0] commit_side [NS][NF]
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FLUSH} state_e;
  state_e state;
  logic [$clog2(FL+1)-1:0] t;
  particle_t frame [NP];
  particle_t seeds [NS];
  logic start;
  logic [SUMPT_W-1:0] psum [NS][NF];

  // Not in the commit cycle: lists_ready does not yet reflect that commit.
  assign in_ready = (state == S_IDLE) && !commit && lists_ready;
  assign start    = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      t      <= '0;
      commit <= 1'b0;
    end else begin
      commit <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          frame <= in_frame;
          seeds <= in_seeds;
          t     <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          t <= t + 1'b1;
          if (32'(t) == FL - 1) state <= S_FLUSH;
        end
        default: begin
          commit <= 1'b1;
          state  <= S_IDLE;
        end
      endcase
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_seed
    for (genvar j = 0; j < NF; j++) begin : g_blk
      tau_filter_unit u_unit (
        .clk     (clk),
        .rst     (rst),
        .start   (start),
        .seed    (seeds[s]),
        .in_valid(state == S_SCAN),
        .in_p    (frame[j*FL + int'(t[$clog2(FL)-1:0])]),
        .wr_en   (wr_en[s][j]),
        .wr_data (wr_data[s][j]),
        .psum    (psum[s][j])
      );
      assign commit_side[s][j] = {seeds[s], psum[s][j]};
    end
  end

  initial assert (NP == NF * FL) else $error("NP must equal NF*FL");
endmodule
