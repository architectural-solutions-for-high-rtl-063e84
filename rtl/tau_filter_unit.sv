// tau_filter_unit: one filter block of stage 2. It looks at one particle per
// cycle and passes it on when it lies within the candidate cone of its seed
// (squared angular distance dr2 <= R2_FILT, i.e. two multiplications and an
// addition per particle). Passing particles are appended to the block's
// source list: wr_en/wr_data go to the list's write port one cycle after the
// particle was presented. The block also sums the pt of the passing
// particles; psum is valid one cycle after the last particle and is cleared
// by start.
//
// The four-blocks-per-seed arrangement and the distance test come from the
// published design; the cone size and the one-cycle register are this
// design's choice.
module tau_filter_unit
  import tau_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  particle_t          seed,
  input  logic               in_valid,
  input  particle_t          in_p,
  output logic               wr_en,
  output particle_t          wr_data,
  output logic [SUMPT_W-1:0] psum
);
  logic pass;
  assign pass = in_valid && seed.valid && in_p.valid && (dr2(in_p, seed) <= 26'(R2_FILT));

  always_ff @(posedge clk) begin
    if (rst || start) begin
      wr_en <= 1'b0;
      psum  <= '0;
    end else begin
      wr_en <= pass;
      if (pass) psum <= psum + SUMPT_W'(in_p.pt);
    end
    wr_data <= in_p;
  end
endmodule
