// tb_win_mem: writes random words to every address of the W_in store at its
// default size, reads them back in a shuffled order and checks both the
// data and the one-cycle read latency (rdata changes only on the edge after
// the address is applied).
module tb_win_mem;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic         we;
  logic [5:0]   waddr, raddr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [64];

  win_mem u_dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  function automatic logic [127:0] rnd128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    @(negedge clk);
    for (int a = 0; a < 64; a++) begin
      we = 1; waddr = 6'(a); wdata = rnd128(); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(63);
      logic [127:0] prev;
      raddr = 6'(a);
      prev = rdata;
      #1;
      checks++;
      if (rdata != prev) begin
        failures++;
        $display("read data changed prev the clock edge");
      end
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin
        failures++;
        $display("addr %0d: read %h expected %h", a, rdata, model[a]);
      end
      // an occasional overwrite keeps the write path under test
      if (t % 7 == 0) begin
        we = 1; waddr = 6'(a); wdata = rnd128(); model[a] = wdata;
        @(negedge clk);
        we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
