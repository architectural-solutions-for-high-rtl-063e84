// tau_params_unit: stage 5 of the tau trigger for one seed: conditional sum
// and average of the signal candidates' parameters.
//
// Two sub-stages so that a new list can be summed while the previous one is
// still being divided. Summing: the header beat clears the sums and gives
// the seed; every signal candidate then adds its pt to sum_pt and its
// pt-weighted eta and phi offsets from the seed to two weighted sums (pt is
// the weighting coefficient); charged signal candidates are counted and
// their charges summed. After the last beat the sums are handed to the
// dividing sub-stage, where two dividers run in parallel and turn the
// weighted sums into pt-weighted mean offsets (the two divisions per group).
//
// Input stream: one beat per cycle while summing. Output: out_valid with the
// tau properties, held until out_ready. Timing: list length + 1 (hand-over)
// + NW+2 (division) + 1 cycles; a new list is accepted while dividing. The
// sum-and-average with two divisions is from the published description;
// weighting by pt and averaging the angular offsets is this design's reading
// of it.
module tau_params_unit
  import tau_pkg::*;
#(
  parameter int unsigned NW = 32
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  input  sel_beat_t  in_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output tau_props_t out_props
);
  // summing sub-stage
  logic                 acc_full;   // sums complete, waiting for the divider
  particle_t            seed;
  logic [SUMPT_W-1:0]   sum_pt;
  logic signed [NW-1:0] sum_we, sum_wp;
  logic [4:0]           n_ch;
  logic signed [5:0]    q_sum;
  logic signed [NW-1:0] w_e, w_p;
  // dividing sub-stage
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_OUT} dstate_e;
  dstate_e              dstate;
  logic                 hand;
  tau_props_t           held;
  logic signed [NW-1:0] quo_e, quo_p;
  logic                 done_e, done_p, busy_e, busy_p;

  assign w_e = NW'($signed({1'b0, in_beat.p.pt})) * NW'(deta(in_beat.p, seed));
  assign w_p = NW'($signed({1'b0, in_beat.p.pt})) * NW'(dphi(in_beat.p, seed));

  assign in_ready  = !acc_full;
  assign hand      = acc_full && (dstate == D_IDLE);
  assign out_valid = (dstate == D_OUT);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_full <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        if (in_beat.hdr) begin
          seed   <= in_beat.p;
          sum_pt <= '0;
          sum_we <= '0;
          sum_wp <= '0;
          n_ch   <= '0;
          q_sum  <= '0;
        end else if (in_beat.is_signal) begin
          sum_pt <= sum_pt + SUMPT_W'(in_beat.p.pt);
          sum_we <= sum_we + w_e;
          sum_wp <= sum_wp + w_p;
          if (is_charged(in_beat.p.pid)) begin
            n_ch  <= n_ch + 1'b1;
            q_sum <= in_beat.p.charge ? q_sum - 6'sd1 : q_sum + 6'sd1;
          end
        end
        if (in_beat.last) acc_full <= 1'b1;
      end
      if (hand) acc_full <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dstate <= D_IDLE;
    end else begin
      case (dstate)
        D_IDLE: if (hand) begin
          held.seed       <= seed;
          held.sum_pt     <= sum_pt;
          held.n_charged  <= n_ch;
          held.charge_sum <= q_sum;
          held.avg_deta   <= '0;
          held.avg_dphi   <= '0;
          dstate          <= D_RUN;
        end
        D_RUN: if (done_e && done_p) begin
          held.avg_deta <= 12'(quo_e);
          held.avg_dphi <= 12'(quo_p);
          dstate        <= D_OUT;
        end
        default: if (out_ready) dstate <= D_IDLE;
      endcase
    end
  end

  assign out_props = held;

  // Both dividers start together and take the same number of cycles.
  tau_divider #(.NW(NW), .DW(SUMPT_W)) u_div_eta (
    .clk(clk), .rst(rst), .start(hand), .num(sum_we), .den(sum_pt),
    .busy(busy_e), .done(done_e), .quo(quo_e));
  tau_divider #(.NW(NW), .DW(SUMPT_W)) u_div_phi (
    .clk(clk), .rst(rst), .start(hand), .num(sum_wp), .den(sum_pt),
    .busy(busy_p), .done(done_p), .quo(quo_p));

  assert property (@(posedge clk) disable iff (rst) done_e == done_p)
    else $error("tau_params_unit: dividers out of step");
endmodule
