// tb_force_reduction_tree: self-checking test of the pipelined adder tree.
//
// Drives a 16-input tree (the board size) and a 5-input tree (padding path)
// with random forces every clock, and compares each output with the sum
// computed here, delayed by the expected latency (4 and 3 clocks). Also
// checks that out_valid follows in_valid with that latency and that a sum
// that overflows in between but fits at the end comes out exact (modular
// fixed-point accumulation).
module tb_force_reduction_tree;
  import grape6_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   v16 [16], v5 [5];
  force_t f16 [16], f5 [5];
  logic   ov16, ov5;
  force_t s16, s5;

  force_reduction_tree #(.N(16)) dut16 (.clk, .rst_n, .in_valid(v16), .in_f(f16), .out_valid(ov16), .sum(s16));
  force_reduction_tree #(.N(5))  dut5  (.clk, .rst_n, .in_valid(v5),  .in_f(f5),  .out_valid(ov5),  .sum(s5));

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  force_t exp16 [$], exp5 [$];
  logic   vexp16 [$], vexp5 [$];

  function automatic acc_t rnd64();
    return {$urandom(), $urandom()};
  endfunction

  initial begin
    for (int i = 0; i < 16; i++) begin v16[i] = 0; f16[i] = '0; end
    for (int i = 0; i < 5; i++)  begin v5[i] = 0;  f5[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      force_t a16, a5;
      logic vv;
      vv = (n % 7 != 3);
      a16 = '0; a5 = '0;
      for (int i = 0; i < 16; i++) begin
        v16[i] = vv;
        for (int k = 0; k < 3; k++) begin
          f16[i][k] = (n < 100) ? acc_t'($urandom_range(1000)) - 500 : rnd64();
          a16[k] += f16[i][k];
        end
      end
      for (int i = 0; i < 5; i++) begin
        v5[i] = vv;
        for (int k = 0; k < 3; k++) begin
          f5[i][k] = rnd64();
          a5[k] += f5[i][k];
        end
      end
      exp16.push_back(a16); vexp16.push_back(vv);
      exp5.push_back(a5);   vexp5.push_back(vv);
      @(negedge clk);
      // latency 4 for N=16, 3 for N=5
      if (exp16.size() == 4) begin
        force_t e; logic ev;
        e = exp16.pop_front(); ev = vexp16.pop_front();
        checks++;
        if (ov16 != ev || (ev && s16 != e)) begin failures++; $display("FAIL N=16 at %0d", n); end
      end
      if (exp5.size() == 3) begin
        force_t e; logic ev;
        e = exp5.pop_front(); ev = vexp5.pop_front();
        checks++;
        if (ov5 != ev || (ev && s5 != e)) begin failures++; $display("FAIL N=5 at %0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
