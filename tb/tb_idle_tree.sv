// tb_idle_tree: global idle is the AND of all local idles, LEVELS cycles late.
//
// 37 sources, fan-in 4 (three register levels). Random patterns with mostly
// idle sources are applied; the output is compared with the AND of the
// pattern applied three cycles earlier, per context.
module tb_idle_tree;
  localparam int N = 37, C = 2, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [C-1:0] local_idle [N];
  logic [C-1:0] idle;

  idle_tree #(.NIN(N), .NCTX(C), .FANIN(4)) dut (.*);

  int checks = 0, failures = 0;
  logic [C-1:0] hist[$];
  int saw_idle = 0, saw_busy = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) local_idle[i] = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      logic [C-1:0] a;
      for (int i = 0; i < N; i++)
        for (int c = 0; c < C; c++)
          local_idle[i][c] = ($urandom_range(0, 60) != 0);
      a = '1;
      for (int i = 0; i < N; i++) a &= local_idle[i];
      hist.push_back(a);
      @(negedge clk);
      if (hist.size() >= LAT) begin
        logic [C-1:0] exp;
        exp = hist.pop_front();
        checks++;
        if (idle != exp) begin
          failures++;
          $display("FAIL: t=%0d idle=%b expected %b", t, idle, exp);
        end
        if (idle[0]) saw_idle++; else saw_busy++;
      end
    end
    checks++;
    if (saw_idle == 0 || saw_busy == 0) begin
      failures++;
      $display("FAIL: idle %0d busy %0d", saw_idle, saw_busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
