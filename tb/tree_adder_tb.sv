// tree_adder_tb: self-checking test of the pipelined adder tree.
// Two instances (N = 8, a power of two, and N = 5, which needs zero padding)
// receive a new random vector every clock. Each output is compared with the sum
// computed here, and must appear exactly ceil(log2(N)) clocks after its inputs.
module tree_adder_tb;
  import dr_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;

  fx_t in8 [8], in5 [5];
  fx_t sum8, sum5;

  tree_adder #(.N(8)) dut8 (.clk, .in(in8), .sum(sum8));
  tree_adder #(.N(5)) dut5 (.clk, .in(in5), .sum(sum5));

  fx_t exp8 [$], exp5 [$];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      fx_t s8, s5;
      s8 = 0; s5 = 0;
      for (int i = 0; i < 8; i++) begin
        in8[i] = fx_t'($urandom);
        s8 += in8[i];
      end
      for (int i = 0; i < 5; i++) begin
        in5[i] = fx_t'($urandom);
        s5 += in5[i];
      end
      exp8.push_back(s8);
      exp5.push_back(s5);
      @(posedge clk); #1; cyc++;
      // sums of the inputs applied 3 clocks ago must be present now
      if (exp8.size() == 3) begin
        checks++;
        if (sum8 !== exp8.pop_front()) begin failures++; $display("N=8 mismatch at t=%0d", t); end
      end
      if (exp5.size() == 3) begin
        checks++;
        if (sum5 !== exp5.pop_front()) begin failures++; $display("N=5 mismatch at t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
