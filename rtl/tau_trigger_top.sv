// tau_trigger_top: the complete HPS tau trigger. Every event of N_PART
// particles (64 bits each) yields up to N_TAU_OUT reconstructed, cleaned
// tau leptons.
//
// Two clocks. The link side (clk_link, 360 MHz in the target system) brings
// the event in and takes the taus out; the algorithm runs on clk_algo
// (300 MHz in the target system), and tau_cdc_bus instances cross both ways.
// Inside the algorithm clock the stages form a dataflow pipeline, each stage
// starting as soon as its input is there and its output has room:
//   1 tau_seeding       16 highest-pt charged particles
//   2 tau_filter        4 x 16 filter blocks -> 64 ping-pong source lists
//   3 tau_merge_unit    per seed, 4 lists -> one target FIFO of <= 30
//   4 tau_sigsel_unit   per seed, signal candidate flags
//   5 tau_params_unit   per seed, conditional sums and two divisions
//   6 tau_reco          16 tau candidates, once all seeds are done
//   7 tau_clean         cleaning matrix, <= 8 taus
// Stages 3 to 5 run independently for each seed; stage 6 waits for all 16.
//
// Link-side interface: in_valid with in_frame for one cycle per event. An
// event that arrives while the input crossing is still busy with the
// previous one is dropped and signalled on in_dropped. out_valid pulses for
// one link cycle with out_taus (slots with valid = 0 are empty) and
// out_n_dropped, the number of tau candidates the cleaning removed.
// The stage split and sizes follow the published design; widths, handshakes
// and the exact physics criteria are this design's choices (see each stage).
module tau_trigger_top
  import tau_pkg::*;
(
  input  logic      clk_link,
  input  logic      rst_link,
  input  logic      clk_algo,
  input  logic      rst_algo,
  input  logic      in_valid,
  input  particle_t in_frame [N_PART],
  output logic      in_dropped,
  output logic      out_valid,
  output tau_t      out_taus [N_TAU_OUT],
  output logic [$clog2(N_SEED+1)-1:0] out_n_dropped
);
  localparam int unsigned PW     = $bits(particle_t);
  localparam int unsigned FRAME_W = N_PART * PW;
  localparam int unsigned SIDE_W = PW + SUMPT_W;
  localparam int unsigned NDW    = $clog2(N_SEED+1);
  localparam int unsigned OUT_W  = N_TAU_OUT * $bits(tau_t) + NDW;
  localparam int unsigned SW     = $clog2(FILT_LEN+1);
  localparam int unsigned AW     = $clog2(FILT_LEN);

  // ---------------- input crossing (link -> algorithm clock) --------------
  logic [FRAME_W-1:0] in_flat, ev_flat;
  logic in_cdc_ready, ev_valid, ev_ready;
  particle_t ev_frame [N_PART];

  always_comb
    for (int i = 0; i < N_PART; i++) in_flat[i*PW +: PW] = in_frame[i];
  always_comb
    for (int i = 0; i < N_PART; i++) ev_frame[i] = particle_t'(ev_flat[i*PW +: PW]);

  assign in_dropped = in_valid && !in_cdc_ready;

  tau_cdc_bus #(.W(FRAME_W)) u_cdc_in (
    .src_clk(clk_link), .src_rst(rst_link), .src_valid(in_valid),
    .src_ready(in_cdc_ready), .src_data(in_flat),
    .dst_clk(clk_algo), .dst_rst(rst_algo), .dst_valid(ev_valid),
    .dst_ready(ev_ready), .dst_data(ev_flat));

  // ---------------- stage 1: seeding --------------------------------------
  logic seed_valid, seed_ready;
  particle_t seed_frame [N_PART];
  particle_t seeds [N_SEED];

  tau_seeding u_seeding (
    .clk(clk_algo), .rst(rst_algo),
    .in_valid(ev_valid), .in_ready(ev_ready), .in_frame(ev_frame),
    .out_valid(seed_valid), .out_ready(seed_ready),
    .out_frame(seed_frame), .out_seeds(seeds));

  // ---------------- stage 2: filtering into source PIPOs -------------------
  logic lists_ready, commit;
  logic wr_en [N_SEED][N_FILT];
  particle_t wr_data [N_SEED][N_FILT];
  logic [SIDE_W-1:0] commit_side [N_SEED][N_FILT];
  logic pipo_wr_ready [N_SEED][N_FILT];

  always_comb begin
    lists_ready = 1'b1;
    for (int s = 0; s < N_SEED; s++)
      for (int j = 0; j < N_FILT; j++) lists_ready = lists_ready && pipo_wr_ready[s][j];
  end

  tau_filter u_filter (
    .clk(clk_algo), .rst(rst_algo),
    .in_valid(seed_valid), .in_ready(seed_ready),
    .in_frame(seed_frame), .in_seeds(seeds),
    .lists_ready(lists_ready), .wr_en(wr_en), .wr_data(wr_data),
    .commit(commit), .commit_side(commit_side));

  // ---------------- stages 3-5, one lane per seed -------------------------
  logic       props_valid [N_SEED];
  tau_props_t props [N_SEED];
  logic       props_ready;

  for (genvar s = 0; s < N_SEED; s++) begin : g_lane
    logic              src_valid [N_FILT];
    logic [SW-1:0]     src_size  [N_FILT];
    logic [SIDE_W-1:0] src_side  [N_FILT];
    particle_t         src_data  [N_FILT];
    logic [AW-1:0]     src_addr;
    logic              src_release;
    logic              m_valid, m_ready, f_valid, f_ready, s_valid, s_ready;
    cand_beat_t        m_beat, f_beat;
    logic [$bits(cand_beat_t)-1:0] f_bits;
    sel_beat_t         s_beat;

    for (genvar j = 0; j < N_FILT; j++) begin : g_src
      logic [PW-1:0] rd_bits;
      tau_pipo #(.DEPTH(FILT_LEN), .W(PW), .SIDE_W(SIDE_W)) u_pipo (
        .clk(clk_algo), .rst(rst_algo),
        .wr_ready(pipo_wr_ready[s][j]), .wr_en(wr_en[s][j]), .wr_data(wr_data[s][j]),
        .commit(commit), .commit_side(commit_side[s][j]),
        .rd_valid(src_valid[j]), .rd_size(src_size[j]), .rd_side(src_side[j]),
        .rd_addr(src_addr), .rd_data(rd_bits), .release_bank(src_release));
      assign src_data[j] = particle_t'(rd_bits);
    end

    tau_merge_unit u_merge (
      .clk(clk_algo), .rst(rst_algo),
      .src_valid(src_valid), .src_size(src_size), .src_side(src_side),
      .src_addr(src_addr), .src_data(src_data), .src_release(src_release),
      .out_valid(m_valid), .out_ready(m_ready), .out_beat(m_beat));

    tau_fifo #(.W($bits(cand_beat_t)), .DEPTH(32)) u_target (
      .clk(clk_algo), .rst(rst_algo),
      .in_valid(m_valid), .in_ready(m_ready), .in_data(m_beat),
      .out_valid(f_valid), .out_ready(f_ready), .out_data(f_bits));
    assign f_beat = cand_beat_t'(f_bits);

    tau_sigsel_unit u_sigsel (
      .clk(clk_algo), .rst(rst_algo),
      .in_valid(f_valid), .in_ready(f_ready), .in_beat(f_beat),
      .out_valid(s_valid), .out_ready(s_ready), .out_beat(s_beat));

    tau_params_unit u_params (
      .clk(clk_algo), .rst(rst_algo),
      .in_valid(s_valid), .in_ready(s_ready), .in_beat(s_beat),
      .out_valid(props_valid[s]), .out_ready(props_ready), .out_props(props[s]));
  end

  // ---------------- stage 6: reconstruction, once all seeds are done -------
  logic all_props, reco_ready, reco_valid, clean_ready;
  tau_t reco_taus [N_SEED];

  always_comb begin
    all_props = 1'b1;
    for (int s = 0; s < N_SEED; s++) all_props = all_props && props_valid[s];
  end
  assign props_ready = all_props && reco_ready;

  tau_reco u_reco (
    .clk(clk_algo), .rst(rst_algo),
    .in_valid(all_props), .in_ready(reco_ready), .in_props(props),
    .out_valid(reco_valid), .out_ready(clean_ready), .out_taus(reco_taus));

  // ---------------- stage 7: cleaning --------------------------------------
  logic clean_valid, out_cdc_ready;
  tau_t clean_taus [N_TAU_OUT];
  logic [NDW-1:0] clean_ndrop;
  logic [OUT_W-1:0] clean_flat, out_flat;

  tau_clean u_clean (
    .clk(clk_algo), .rst(rst_algo),
    .in_valid(reco_valid), .in_ready(clean_ready), .in_taus(reco_taus),
    .out_valid(clean_valid), .out_ready(out_cdc_ready), .out_taus(clean_taus),
    .n_dropped(clean_ndrop));

  // ---------------- output crossing (algorithm -> link clock) -------------
  always_comb begin
    for (int i = 0; i < N_TAU_OUT; i++) clean_flat[i*$bits(tau_t) +: $bits(tau_t)] = clean_taus[i];
    clean_flat[OUT_W-1 -: NDW] = clean_ndrop;
  end

  tau_cdc_bus #(.W(OUT_W)) u_cdc_out (
    .src_clk(clk_algo), .src_rst(rst_algo), .src_valid(clean_valid),
    .src_ready(out_cdc_ready), .src_data(clean_flat),
    .dst_clk(clk_link), .dst_rst(rst_link), .dst_valid(out_valid),
    .dst_ready(1'b1), .dst_data(out_flat));

  always_comb begin
    for (int i = 0; i < N_TAU_OUT; i++) out_taus[i] = tau_t'(out_flat[i*$bits(tau_t) +: $bits(tau_t)]);
    out_n_dropped = out_flat[OUT_W-1 -: NDW];
  end
endmodule
