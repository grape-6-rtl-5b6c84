// tb_particle_memory: self-checking test of the on-chip j-particle memory at
// its default depth. Writes random records to random addresses (including
// the first and last), reads them back and checks data and the one-clock
// read latency, and checks that writes beyond the depth change nothing.
module tb_particle_memory;
  import grape6_pkg::*;

  localparam int unsigned DEPTH = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we, re, rvalid;
  logic [15:0] waddr, raddr;
  logic [JPART_W-1:0] wdata, rdata;

  particle_memory dut (.*);

  int checks = 0, failures = 0;
  logic [JPART_W-1:0] model [DEPTH];
  logic written [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [JPART_W-1:0] rnd_word();
    logic [JPART_W-1:0] w;
    for (int i = 0; i < JPART_W; i += 32) w = {w, $urandom()};
    return w;
  endfunction

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = (n == 0) ? 0 : (n == 1) ? DEPTH - 1 : int'($urandom_range(DEPTH - 1));
      @(negedge clk);
      we = 1; waddr = 16'(a); wdata = rnd_word();
      model[a] = wdata; written[a] = 1;
    end
    // writes beyond the end must be dropped (they must not alias low addresses)
    @(negedge clk); waddr = 16'(DEPTH + 5); wdata = '1;
    @(negedge clk); waddr = 16'(4096 + 7); wdata = '1;
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      if (!written[a]) continue;
      re = 1; raddr = 16'(a);
      @(negedge clk);
      re = 0;
      checks++;
      if (!rvalid || rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: rvalid=%0b data mismatch", a, rvalid);
      end
      @(negedge clk);
      checks++;
      if (rvalid) begin failures++; $display("FAIL rvalid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
