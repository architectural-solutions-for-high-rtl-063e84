// tb_tau_cdc_bus: words crossing from a 360 MHz to a 300 MHz clock (and,
// in a second instance, back) with random destination back-pressure. Every
// word must arrive once, unchanged and in order; the source must refuse new
// words while one is in flight.
`timescale 1ps/1ps
module tb_tau_cdc_bus;
  localparam int W = 40;
  logic ca = 0, cb = 0, ra = 1, rb = 1;
  always #1389 ca = !ca;
  always #1667 cb = !cb;

  logic v_ab = 0, r_ab, dv_ab, dr_ab = 1;
  logic [W-1:0] d_ab, q_ab;
  logic v_ba = 0, r_ba, dv_ba, dr_ba = 1;
  logic [W-1:0] d_ba, q_ba;

  tau_cdc_bus #(.W(W)) dut (
    .src_clk(ca), .src_rst(ra), .src_valid(v_ab), .src_ready(r_ab), .src_data(d_ab),
    .dst_clk(cb), .dst_rst(rb), .dst_valid(dv_ab), .dst_ready(dr_ab), .dst_data(q_ab));
  tau_cdc_bus #(.W(W)) dut_back (
    .src_clk(cb), .src_rst(rb), .src_valid(v_ba), .src_ready(r_ba), .src_data(d_ba),
    .dst_clk(ca), .dst_rst(ra), .dst_valid(dv_ba), .dst_ready(dr_ba), .dst_data(q_ba));

  int checks = 0, failures = 0, n_refused = 0;
  logic [W-1:0] q1 [$], q2 [$];

  always @(posedge cb) if (!rb) begin
    if (dv_ab && dr_ab) begin
      checks++;
      if (q1.size() == 0 || q_ab != q1.pop_front()) begin failures++; $display("a->b word wrong"); end
    end
    dr_ab <= 1'($urandom_range(0, 3) != 0);
  end
  always @(posedge ca) if (!ra && dv_ba) begin
    checks++;
    if (q2.size() == 0 || q_ba != q2.pop_front()) begin failures++; $display("b->a word wrong"); end
  end

  // a -> b source
  initial begin
    repeat (4) @(posedge ca);
    ra = 0; rb = 0;
    for (int k = 0; k < 100; ) begin
      @(negedge ca);
      v_ab = 1; d_ab = {$urandom, 8'($urandom)};
      #1;
      if (r_ab) begin q1.push_back(d_ab); k++; end else n_refused++;
      @(negedge ca);
      v_ab = 0;
    end
  end
  // b -> a source
  initial begin
    repeat (6) @(posedge cb);
    for (int k = 0; k < 100; ) begin
      @(negedge cb);
      v_ba = 1; d_ba = {$urandom, 8'($urandom)};
      #1;
      if (r_ba) begin q2.push_back(d_ba); k++; end
      @(negedge cb);
      v_ba = 0;
    end
    repeat (40) @(posedge ca);
    checks += 3;
    if (q1.size() != 0 || q2.size() != 0) begin failures++; $display("words lost"); end
    if (n_refused == 0) begin failures++; $display("source never refused"); end
    if (checks < 200) begin failures++; $display("only %0d words arrived", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge ca);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
