// tb_grape6_board: self-checking test of one board (16 chips, reduced to 4
// pipelines and 64-word memories per chip to keep the run short).
//
// Gives every chip its own random j-particles (addressed writes, chip field),
// plus one particle written to all chips with a broadcast write (replacing
// a nearby decoy written to each chip first), sets a
// different n_j per chip, broadcasts the i-particles and START, and checks
// (1) the summed force of each i-particle over all chips against the
// reference, (2) the force-read latency of 1 + 1 + clog2(16) = 6 clocks, and
// (3) that busy covers the slowest chip (max n_j + PIPE_LAT, plus one clock
// for the board's busy register, plus one for the input link).
module tb_grape6_board;
  import grape6_pkg::*;
  import grape6_tb_pkg::*;

  localparam int unsigned NCHIP = 16, NPIPE = 4, NJ = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  down_t down;
  up_t   up;

  grape6_board #(.NCHIP(NCHIP), .NPIPE(NPIPE), .NJ(NJ)) dut (.clk, .rst_n, .down, .up);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(op_e op, logic bcast, int chip, int addr, vec3_t pos, longint scal);
    down = '0;
    down.valid = 1; down.sel = 1;
    down.cmd.op = op; down.cmd.bcast = bcast; down.cmd.chip = CH_ID_W'(chip);
    down.cmd.addr = ADDR_W'(addr); down.cmd.pos = pos; down.cmd.scal = 64'(scal);
    @(negedge clk);
    down = '0;
  endtask

  vec3_t  jx [NCHIP][NJ];
  longint jm [NCHIP][NJ];
  int     nj [NCHIP];
  vec3_t  ix [NPIPE];

  initial begin
    real f [NPIPE][3], a [NPIPE][3];
    int maxnj, busy_cycles, lat, nterms;
    longint e2;
    down = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    e2 = 256;
    // a nearby decoy at j address 0 of every chip, written chip by chip; the
    // broadcast write below must replace it everywhere
    for (int c = 0; c < NCHIP; c++) send(OP_WR_J, 0, c, 0, '{default: 32'sd1000}, 1 << 22);
    // j-particle 0 of every chip by one broadcast write
    begin
      vec3_t x0; longint m0;
      for (int k = 0; k < 3; k++) x0[k] = rnd_signed(1 << 18);
      m0 = 12345;
      send(OP_WR_J, 1, 1, 0, x0, m0);
      for (int c = 0; c < NCHIP; c++) begin jx[c][0] = x0; jm[c][0] = m0; end
    end
    maxnj = 0;
    for (int c = 0; c < NCHIP; c++) begin
      nj[c] = 1 + int'($urandom_range(NJ - 1));
      if (nj[c] > maxnj) maxnj = nj[c];
      for (int j = 1; j < nj[c]; j++) begin
        for (int k = 0; k < 3; k++) jx[c][j][k] = rnd_signed(1 << 18);
        jm[c][j] = longint'($urandom_range((1 << 20) - 1));
        send(OP_WR_J, 0, c, j, jx[c][j], jm[c][j]);
      end
      send(OP_SET_NJ, 0, c, nj[c], '0, 0);
    end
    send(OP_SET_EPS, 0, 0, 0, '0, e2);
    for (int p = 0; p < NPIPE; p++) begin
      for (int k = 0; k < 3; k++) ix[p][k] = rnd_signed(1 << 18);
      send(OP_WR_I, 0, 0, p, ix[p], 0);
    end
    for (int p = 0; p < NPIPE; p++) for (int k = 0; k < 3; k++) begin f[p][k] = 0; a[p][k] = 0; end
    nterms = 0;
    for (int c = 0; c < NCHIP; c++) begin
      nterms += nj[c];
      for (int p = 0; p < NPIPE; p++)
        for (int j = 0; j < nj[c]; j++) add_pair(ix[p], jx[c][j], jm[c][j], e2, f[p], a[p]);
    end
    send(OP_START, 0, 0, 0, '0, 0);
    busy_cycles = 0;   // clocks after the one in which the board took START
    while (!up.busy) begin busy_cycles++; @(negedge clk); if (busy_cycles > 10) break; end
    while (up.busy)  begin busy_cycles++; @(negedge clk); end
    checks++;
    if (busy_cycles != maxnj + PIPE_LAT + 2) begin
      failures++; $display("FAIL busy %0d expected %0d", busy_cycles, maxnj + PIPE_LAT + 2);
    end
    for (int p = 0; p < NPIPE; p++) begin
      send(OP_RD_F, 0, 0, p, '0, 0);
      lat = 1;
      while (!up.f_valid && lat < 20) begin lat++; @(negedge clk); end
      checks++;
      if (lat != 6) begin failures++; $display("FAIL read latency %0d", lat); end
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (!force_ok(up.f[k], f[p][k], a[p][k], nterms)) begin
          failures++;
          $display("FAIL pipe %0d comp %0d: got %0d expected %0.1f", p, k, up.f[k], f[p][k]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
