// tb_impl_sorter: the sorter hands out implications lowest level first.
//
// Random bursts of implications with random levels are pushed, interleaved
// with pops; every popped entry must have the lowest level among those held
// (checked against a reference list), carry the pushed variable, and the
// count and full outputs must match the reference.
module tb_impl_sorter;
  import satin_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, out_valid, full;
  flit_t din, out;
  logic [$clog2(D+1)-1:0] count;

  impl_sorter #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  flit_t held[$];
  int sorted_pops = 0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (count != held.size() || full != (held.size() == D) || out_valid != (held.size() != 0)) begin
        failures++;
        $display("FAIL: count %0d expected %0d", count, held.size());
      end
      pop  = out_valid && ($urandom_range(0, 2) == 0);
      push = !full && ($urandom_range(0, 1) == 1);
      din = '0;
      din.mtype = MSG_PROPLIT;
      din.i = ILVL_W'($urandom_range(0, 40));
      din.v = VAR_W'($urandom);
      if (pop) begin
        int mn, at;
        mn = 1 << 30; at = -1;
        foreach (held[k]) if (int'(held[k].i) < mn) mn = int'(held[k].i);
        foreach (held[k]) if (held[k] == out) at = k;
        checks++;
        if (int'(out.i) != mn || at < 0) begin
          failures++;
          $display("FAIL: popped level %0d, lowest held %0d, found=%0d", out.i, mn, at);
        end else begin
          held.delete(at);
          sorted_pops++;
        end
      end
      if (push) held.push_back(din);
    end
    checks++;
    if (sorted_pops < 500) begin
      failures++;
      $display("FAIL: too few pops %0d", sorted_pops);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
