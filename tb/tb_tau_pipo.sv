// tb_tau_pipo: ping-pong source buffer. Fills bank after bank with random
// lists, checks size, side word and random-address reads of each committed
// bank, that wr_ready drops when both banks are full and returns after a
// release, and that items left unread are simply overwritten by the next
// list.
module tb_tau_pipo;
  localparam int DEPTH = 32, W = 64, SIDE_W = 88;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic wr_ready, wr_en = 0, commit = 0, rd_valid, release_bank = 0;
  logic [W-1:0] wr_data, rd_data;
  logic [SIDE_W-1:0] commit_side, rd_side;
  logic [5:0] rd_size;
  logic [4:0] rd_addr = 0;

  tau_pipo #(.DEPTH(DEPTH), .W(W), .SIDE_W(SIDE_W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] lists [$][$];
  logic [SIDE_W-1:0] sides [$];

  task automatic fill(int n);
    logic [W-1:0] l [$];
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      wr_en = 1;
      wr_data = {$urandom, $urandom};
      l.push_back(wr_data);
    end
    @(negedge clk);
    wr_en = 0;
    commit = 1;
    commit_side = {$urandom, $urandom, 24'($urandom)};
    sides.push_back(commit_side);
    lists.push_back(l);
    @(negedge clk);
    commit = 0;
  endtask

  task automatic drain();
    logic [W-1:0] l [$];
    l = lists.pop_front();
    checks += 2;
    if (!rd_valid) begin failures++; $display("no readable bank"); end
    if (int'(rd_size) != l.size() || rd_side != sides.pop_front()) begin
      failures++; $display("size %0d expected %0d or side wrong", rd_size, l.size());
    end
    // read in reverse order: random access
    for (int k = l.size() - 1; k >= 0; k -= 2) begin
      rd_addr = 5'(k);
      #1;
      checks++;
      if (rd_data != l[k]) begin failures++; $display("item %0d wrong", k); end
    end
    @(negedge clk);
    release_bank = 1;
    @(negedge clk);
    release_bank = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 6; r++) begin
      fill(int'($urandom_range(0, 32)));
      fill(int'($urandom_range(1, 32)));
      @(negedge clk);
      checks++;
      if (wr_ready) begin failures++; $display("wr_ready with both banks full"); end
      drain();
      checks++;
      if (!wr_ready) begin failures++; $display("wr_ready low after release"); end
      drain();
      checks++;
      if (rd_valid) begin failures++; $display("rd_valid with both banks empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
