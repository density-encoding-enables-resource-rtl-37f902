// tb_rvfl_ctrl: checks the pass schedule of the controller at the default
// size (64 groups) and at a small one (5 groups): start to done takes
// G + 3 cycles, the read addresses run 0 .. G-1, acc_en is high for exactly
// G cycles with acc_grp = 0 .. G-1 in order, res_load comes in the cycle
// before done, and a start while busy is ignored and flagged.
module tb_rvfl_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, start;

  // default: N = 512, LANES = 8 -> 64 groups
  logic       busy_a, vl_a, clr_a, en_a, rl_a, done_a, ign_a;
  logic [5:0] ra_a, grp_a;
  rvfl_ctrl u_a (.clk, .rst, .start, .busy(busy_a), .v_load(vl_a), .acc_clr(clr_a),
    .rd_addr(ra_a), .acc_en(en_a), .acc_grp(grp_a), .res_load(rl_a), .done(done_a),
    .start_ignored(ign_a));

  // small: N = 10, LANES = 2 -> 5 groups
  logic       busy_b, vl_b, clr_b, en_b, rl_b, done_b, ign_b;
  logic [2:0] ra_b, grp_b;
  rvfl_ctrl #(.N(10), .LANES(2)) u_b (.clk, .rst, .start, .busy(busy_b), .v_load(vl_b),
    .acc_clr(clr_b), .rd_addr(ra_b), .acc_en(en_b), .acc_grp(grp_b), .res_load(rl_b),
    .done(done_b), .start_ignored(ign_b));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor one controller for one pass starting now.
  task automatic watch_a(input int G);
    int cyc = 0, en_cnt = 0, next_grp = 0, next_addr = 0, rl_at = -1;
    bit seen_done = 0;
    while (!seen_done && cyc < 200) begin
      @(posedge clk); #1; cyc++;
      if (busy_a && int'(ra_a) == next_addr && next_addr < G) next_addr++;
      if (en_a) begin
        checks++;
        if (int'(grp_a) != next_grp) begin
          failures++;
          $display("acc_grp %0d expected %0d", grp_a, next_grp);
        end
        next_grp++; en_cnt++;
      end
      if (rl_a) rl_at = cyc;
      if (done_a) begin
        seen_done = 1;
        checks += 4;
        if (cyc != G + 3) begin failures++; $display("latency %0d expected %0d", cyc, G + 3); end
        if (en_cnt != G)  begin failures++; $display("acc_en cycles %0d expected %0d", en_cnt, G); end
        if (rl_at != cyc - 1) begin failures++; $display("res_load at %0d, done at %0d", rl_at, cyc); end
        if (next_addr != G) begin failures++; $display("addresses seen %0d", next_addr); end
      end
    end
    checks++;
    if (!seen_done) begin failures++; $display("no done"); end
  endtask

  task automatic watch_b(input int G);
    int cyc = 0, en_cnt = 0, next_grp = 0;
    bit seen_done = 0;
    while (!seen_done && cyc < 200) begin
      @(posedge clk); #1; cyc++;
      if (en_b) begin
        checks++;
        if (int'(grp_b) != next_grp) begin failures++; $display("B acc_grp %0d expected %0d", grp_b, next_grp); end
        next_grp++; en_cnt++;
      end
      if (done_b) begin
        seen_done = 1;
        checks += 2;
        if (cyc != G + 3) begin failures++; $display("B latency %0d expected %0d", cyc, G + 3); end
        if (en_cnt != G)  begin failures++; $display("B acc_en cycles %0d", en_cnt); end
      end
    end
    checks++;
    if (!seen_done) begin failures++; $display("B no done"); end
  endtask

  initial begin
    rst = 1; start = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks += 2;
    if (busy_a || done_a) begin failures++; $display("not idle after reset"); end
    if (vl_a || clr_a) begin failures++; $display("load without start"); end
    for (int pass = 0; pass < 3; pass++) begin
      start = 1;
      #1;
      checks += 2;
      if (!vl_a || !clr_a) begin failures++; $display("v_load/acc_clr missing in start cycle"); end
      if (!vl_b) begin failures++; $display("B v_load missing"); end
      fork
        watch_a(64);
        watch_b(5);
        begin
          @(negedge clk); start = 0;
          // a start in the middle of the pass must be ignored
          repeat (3) @(negedge clk);
          start = 1;
          #1;
          checks += 2;
          if (!ign_a) begin failures++; $display("start while busy not flagged"); end
          if (vl_a) begin failures++; $display("start while busy accepted"); end
          @(negedge clk); start = 0;
        end
      join
      @(negedge clk);
      checks++;
      if (busy_a) begin failures++; $display("still busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
