// tb_grape6_system: end-to-end test of the GRAPE-6 back end at reduced size (2 clusters x 2 boards x 2
// chips x 4 pipelines, 32-word memories, 4-entry FIFO).
//
// Plays the front-end host: loads j-particles into chosen chips of every
// cluster (addressed writes) plus one particle into every chip (broadcast
// write), sets per-chip counts and eps^2, then runs two blocks of NPIPE
// i-particles (WR_I, START, RD_F) through the command FIFO as fast as it
// accepts them, and compares every returned force with the double-precision
// sum over all chips. Commands for the reconfigurable back end are mixed in
// and must come out on the rcp port. Mechanisms that must each happen at
// least once, counted: FIFO full (h_ready low), stall of a command behind a
// running START, rcp routing, rcp back-pressure, broadcast and addressed j
// writes, a zero-distance pair with eps = 0, and a force read with an empty
// FIFO whose latency is checked (7 clocks).
module tb_grape6_system;
  import grape6_pkg::*;
  import grape6_tb_pkg::*;

  localparam int unsigned NCLUSTER = 2, NBOARD = 2, NCHIP = 2, NPIPE = 4, NJ = 32, FIFO_DEPTH = 4;
  localparam int unsigned NCH = NCLUSTER * NBOARD * NCHIP;  // chips in the machine
  localparam int unsigned NUSED = 6;                         // chips given their own particles
  localparam int unsigned JPER  = 5;                         // own particles per used chip

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   h_valid, h_ready, f_valid, busy, rcp_valid, rcp_ready, rcp_busy;
  cmd_t   h_cmd, rcp_cmd;
  force_t f;

  grape6_system #(.NCLUSTER(NCLUSTER), .NBOARD(NBOARD), .NCHIP(NCHIP), .NPIPE(NPIPE),
                  .NJ(NJ), .FIFO_DEPTH(FIFO_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int n_full = 0, n_stall = 0, n_rcp = 0, n_rcp_wait = 0, n_bcast = 0, n_addr = 0, n_self = 0, n_lat = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reconfigurable back end: accepts on every other clock
  assign rcp_ready = cyc[0];
  assign rcp_busy  = 1'b0;
  cmd_t exp_rcp [$];
  always @(posedge clk) if (rst_n) begin
    if (rcp_valid && !rcp_ready) n_rcp_wait++;
    if (rcp_valid && rcp_ready) begin
      checks++; n_rcp++;
      if (exp_rcp.size() == 0 || rcp_cmd != exp_rcp[0]) begin failures++; $display("FAIL rcp command"); end
      else void'(exp_rcp.pop_front());
    end
    if (!h_ready) n_full++;
    if (busy && !dut.u_host.empty && !dut.u_host.head.rcp) n_stall++;
  end

  // returned forces, in order
  force_t got [$];
  always @(posedge clk) if (rst_n && f_valid) got.push_back(f);

  task automatic push(cmd_t c);
    h_valid = 1; h_cmd = c;
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk);
    h_valid = 0;
  endtask

  function automatic cmd_t mk(op_e op, logic bcast, int chip, int addr, vec3_t pos, longint scal);
    cmd_t c;
    c = '0;
    c.op = op; c.bcast = bcast; c.addr = ADDR_W'(addr); c.pos = pos; c.scal = 64'(scal);
    c.chip    = CH_ID_W'(chip % NCHIP);
    c.board   = BD_ID_W'((chip / NCHIP) % NBOARD);
    c.cluster = CL_ID_W'(chip / (NCHIP * NBOARD));
    return c;
  endfunction

  int     used [NUSED];
  vec3_t  jx [NUSED][JPER];
  longint jm [NUSED][JPER];
  vec3_t  bx;
  longint bm;
  vec3_t  ix [NPIPE];

  initial begin
    longint e2;
    h_valid = 0; h_cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    e2 = 0;  // no softening: the coincident pair below must give exactly nothing
    // chips spread over every cluster and board
    for (int u = 0; u < NUSED; u++) used[u] = (u * NCH) / NUSED;
    // particle 0 of every chip by one broadcast write
    for (int k = 0; k < 3; k++) bx[k] = rnd_signed(1 << 20);
    bm = 1000000;
    push(mk(OP_WR_J, 1, 0, 0, bx, bm)); n_bcast++;
    push(mk(OP_SET_NJ, 1, 0, 1, '0, 0));
    for (int u = 0; u < NUSED; u++) begin
      for (int j = 0; j < JPER; j++) begin
        for (int k = 0; k < 3; k++) jx[u][j][k] = rnd_signed(1 << 20);
        jm[u][j] = longint'($urandom_range((1 << 22) - 1));
        push(mk(OP_WR_J, 0, used[u], j + 1, jx[u][j], jm[u][j])); n_addr++;
        if (j == 2) begin
          cmd_t r;
          r = mk(OP_WR_J, 0, 0, j, jx[u][j], jm[u][j]);
          r.rcp = 1;
          exp_rcp.push_back(r);
          push(r);
        end
      end
      push(mk(OP_SET_NJ, 0, used[u], JPER + 1, '0, 0));
    end
    push(mk(OP_SET_EPS, 0, 0, 0, '0, e2));
    // first a lone force read with an empty FIFO: latency check
    while (!dut.u_host.empty || busy) @(negedge clk);
    begin
      int t0, lat;
      push(mk(OP_RD_F, 0, 0, 0, '0, 0));
      t0 = cyc;
      while (!f_valid && cyc - t0 < 100) @(negedge clk);
      lat = cyc - t0;  // clock edges after the one that accepted the read
      @(negedge clk);
      checks++; n_lat++;
      if (lat != 7) begin failures++; $display("FAIL read latency %0d expected 7", lat); end
      void'(got.pop_front());
    end
    for (int blk = 0; blk < 2; blk++) begin
      real fr [NPIPE][3], ar [NPIPE][3];
      int nterms;
      for (int p = 0; p < NPIPE; p++) begin
        for (int k = 0; k < 3; k++) ix[p][k] = rnd_signed(1 << 20);
        if (blk == 1 && p == 1) begin ix[p] = jx[0][0]; n_self++; end
        push(mk(OP_WR_I, 0, 0, p, ix[p], 0));
      end
      for (int p = 0; p < NPIPE; p++) for (int k = 0; k < 3; k++) begin fr[p][k] = 0; ar[p][k] = 0; end
      nterms = NCH + NUSED * JPER;
      for (int p = 0; p < NPIPE; p++) begin
        for (int c = 0; c < NCH; c++) add_pair(ix[p], bx, bm, e2, fr[p], ar[p]);
        for (int u = 0; u < NUSED; u++)
          for (int j = 0; j < JPER; j++) add_pair(ix[p], jx[u][j], jm[u][j], e2, fr[p], ar[p]);
      end
      push(mk(OP_START, 0, 0, 0, '0, 0));
      for (int p = 0; p < NPIPE; p++) begin
        push(mk(OP_RD_F, 0, 0, p, '0, 0));
        if (p == 0) begin
          cmd_t r;
          r = mk(OP_NOP, 0, 0, p, '0, 0);
          r.rcp = 1;
          exp_rcp.push_back(r);
          push(r);
        end
      end
      while (got.size() < NPIPE) @(negedge clk);
      for (int p = 0; p < NPIPE; p++) begin
        force_t g;
        g = got.pop_front();
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (!force_ok(g[k], fr[p][k], ar[p][k], nterms)) begin
            failures++;
            $display("FAIL block %0d pipe %0d comp %0d: got %0d expected %0.1f", blk, p, k, g[k], fr[p][k]);
          end
        end
      end
    end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_rcp.size() != 0 || got.size() != 0) begin failures++; $display("FAIL leftovers"); end
    $display("mechanisms: fifo_full=%0d stall=%0d rcp=%0d rcp_wait=%0d bcast_wr=%0d addr_wr=%0d self_pair=%0d latency=%0d",
             n_full, n_stall, n_rcp, n_rcp_wait, n_bcast, n_addr, n_self, n_lat);
    checks += 8;
    if (n_full == 0)     begin failures++; $display("FAIL FIFO never filled"); end
    if (n_stall == 0)    begin failures++; $display("FAIL no stall"); end
    if (n_rcp == 0)      begin failures++; $display("FAIL no rcp command"); end
    if (n_rcp_wait == 0) begin failures++; $display("FAIL no rcp back-pressure"); end
    if (n_bcast == 0)    begin failures++; $display("FAIL no broadcast write"); end
    if (n_addr == 0)     begin failures++; $display("FAIL no addressed write"); end
    if (n_self == 0)     begin failures++; $display("FAIL no zero-distance pair"); end
    if (n_lat == 0)      begin failures++; $display("FAIL no latency check"); end
    $display("finished at clock %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
