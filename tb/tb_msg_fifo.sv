// tb_msg_fifo: random push/pop against a queue reference.
//
// Pushes and pops at random (never pushing when full without a pop, never
// popping when empty), compares every popped word and the full/empty/count
// outputs with a SystemVerilog queue, and checks simultaneous push and pop on
// a full buffer.
module tb_msg_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, empty, full;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;

  msg_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || count != model.size()) begin
        failures++;
        $display("FAIL: flags at t=%0d size=%0d empty=%b full=%b count=%0d", t, model.size(), empty, full, count);
      end
      pop  = !empty && ($urandom_range(0, 2) != 0);
      push = ($urandom_range(0, 2) != 0) && (!full || pop);
      if (t > 1000 && t < 1100) begin            // keep it full: push and pop together
        pop  = full;
        push = full || ($urandom_range(0, 1) == 1);
      end
      din  = W'($urandom);
      if (pop) begin
        checks++;
        if (dout != model[0]) begin
          failures++;
          $display("FAIL: data %h expected %h", dout, model[0]);
        end
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
