// tb_grape6_chip: self-checking test of one force chip at its default size
// (16 pipelines, 3000-particle memory).
//
// Loads n_j random j-particles, 16 random i-particles and eps^2, starts, and
// checks (1) busy lasts exactly n_j + PIPE_LAT clocks, (2) each of the 16
// forces read back matches the double-precision reference, (3) WR_J and
// SET_NJ are ignored when the chip is not selected, (4) a second run with a
// larger n_j (including the full 3000) restarts from cleared accumulators.
module tb_grape6_chip;
  import grape6_pkg::*;
  import grape6_tb_pkg::*;

  localparam int unsigned NPIPE = 16;
  localparam int unsigned NJ    = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  down_t down;
  up_t   up;

  grape6_chip dut (.clk, .rst_n, .down, .up);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(op_e op, logic sel, int addr, vec3_t pos, longint scal);
    down.valid = 1; down.sel = sel;
    down.cmd = '0;
    down.cmd.op = op; down.cmd.addr = ADDR_W'(addr); down.cmd.pos = pos; down.cmd.scal = 64'(scal);
    @(negedge clk);
    down = '0;
  endtask

  vec3_t  jx [NJ];
  longint jm [NJ];
  vec3_t  ix [NPIPE];

  task automatic run_and_check(int nj, longint e2, int span);
    int busy_cycles;
    real f [NPIPE][3], a [NPIPE][3];
    for (int j = 0; j < nj; j++) begin
      for (int k = 0; k < 3; k++) jx[j][k] = rnd_signed(span);
      jm[j] = longint'($urandom_range((1 << 22) - 1));
      send(OP_WR_J, 1, j, jx[j], jm[j]);
    end
    // not selected: these must be ignored
    send(OP_WR_J, 0, 0, '{default: 32'sd5}, 1000);
    send(OP_SET_NJ, 0, 1, '0, 0);
    send(OP_SET_NJ, 1, nj, '0, 0);
    send(OP_SET_EPS, 0, 0, '0, e2);
    for (int p = 0; p < NPIPE; p++) begin
      for (int k = 0; k < 3; k++) ix[p][k] = rnd_signed(span);
      if (p == 3) ix[p] = jx[0];  // coincides with a j-particle
      send(OP_WR_I, 0, p, ix[p], 0);
    end
    for (int p = 0; p < NPIPE; p++)
      for (int k = 0; k < 3; k++) begin f[p][k] = 0; a[p][k] = 0; end
    for (int p = 0; p < NPIPE; p++)
      for (int j = 0; j < nj; j++) add_pair(ix[p], jx[j], jm[j], e2, f[p], a[p]);
    send(OP_START, 0, 0, '0, 0);
    busy_cycles = 0;
    while (up.busy) begin busy_cycles++; @(negedge clk); end
    checks++;
    if (busy_cycles != nj + PIPE_LAT) begin
      failures++;
      $display("FAIL busy for %0d clocks, expected %0d", busy_cycles, nj + PIPE_LAT);
    end
    for (int p = 0; p < NPIPE; p++) begin
      send(OP_RD_F, 0, p, '0, 0);
      checks++;
      if (!up.f_valid) begin failures++; $display("FAIL no f_valid"); end
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (!force_ok(up.f[k], f[p][k], a[p][k], nj)) begin
          failures++;
          $display("FAIL nj=%0d pipe %0d comp %0d: got %0d expected %0.1f", nj, p, k, up.f[k], f[p][k]);
        end
      end
    end
  endtask

  initial begin
    down = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_and_check(37, 100, 1 << 16);
    run_and_check(200, 0, 1 << 24);
    run_and_check(NJ, 4000, 1 << 20);
    // SET_NJ beyond the memory size is clipped to NJ
    send(OP_SET_NJ, 1, NJ + 100, '0, 0);
    send(OP_START, 0, 0, '0, 0);
    begin
      int n = 0;
      while (up.busy) begin n++; @(negedge clk); end
      checks++;
      if (n != NJ + PIPE_LAT) begin failures++; $display("FAIL clip: busy %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
