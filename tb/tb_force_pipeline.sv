// tb_force_pipeline: self-checking test of one force pipeline.
//
// Loads random i-particles and streams random j-particles (one per clock, no
// gaps), then compares the three accumulated force components with a
// double-precision reference m*dx/(r^2+eps^2)^1.5 * 2^ACC_FRAC computed here.
// The tolerance is 0.3% of the sum of the magnitudes of the terms plus one LSB
// per term, which covers the table truncation. Also checks the latency (the
// last term lands exactly PIPE_LAT clocks after the last j-particle), that a
// zero-distance pair with eps = 0 adds nothing, and that clear works.
module tb_force_pipeline;
  import grape6_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load_i, clear, j_valid, inflight;
  vec3_t i_pos, j_pos;
  logic [EPS_W-1:0] eps2;
  logic [MASS_W-1:0] j_mass;
  force_t acc;

  force_pipeline dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_signed(int span);
    return int'($urandom_range(2*span)) - span;
  endfunction

  real ref_f [3], ref_abs [3];

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic add_ref(vec3_t xi, vec3_t xj, longint m, longint e2);
    real dx [3], r2, rinv3;
    r2 = real'(e2);
    for (int k = 0; k < 3; k++) begin
      dx[k] = real'(longint'(xj[k]) - longint'(xi[k]));
      r2 += dx[k] * dx[k];
    end
    if (r2 == 0.0) return;
    rinv3 = 1.0 / (r2 * $sqrt(r2));
    for (int k = 0; k < 3; k++) begin
      ref_f[k]   += real'(m) * dx[k] * rinv3 * (2.0 ** ACC_FRAC);
      ref_abs[k] += fabs(real'(m) * dx[k] * rinv3 * (2.0 ** ACC_FRAC));
    end
  endtask

  task automatic compare(string what, int nterms);
    for (int k = 0; k < 3; k++) begin
      real got, tol;
      got = real'(acc[k]);
      tol = 0.003 * ref_abs[k] + real'(nterms) + 2.0;
      checks++;
      if (fabs(got - ref_f[k]) > tol) begin
        failures++;
        $display("FAIL %s comp %0d: got %0.1f expected %0.1f (tol %0.1f)", what, k, got, ref_f[k], tol);
      end
    end
  endtask

  initial begin
    load_i = 0; clear = 0; j_valid = 0; i_pos = '0; j_pos = '0; eps2 = '0; j_mass = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int span, nj, t_last;
      vec3_t xi;
      longint e2;
      span = (trial % 4 == 0) ? 1000 : (trial % 4 == 1) ? 1 << 20 : (trial % 4 == 2) ? 1 << 28 : 50;
      e2 = (trial % 3 == 0) ? 0 : longint'($urandom_range(1000));
      for (int k = 0; k < 3; k++) xi[k] = rnd_signed(span);
      for (int k = 0; k < 3; k++) begin ref_f[k] = 0; ref_abs[k] = 0; end
      @(negedge clk);
      i_pos = xi; load_i = 1; clear = 1; eps2 = e2;
      @(negedge clk);
      load_i = 0; clear = 0;
      nj = 1 + $urandom_range(60);
      for (int j = 0; j < nj; j++) begin
        vec3_t xj;
        longint m;
        for (int k = 0; k < 3; k++) xj[k] = xi[k] + rnd_signed(span);
        if (j == 5) xj = xi;  // self pair: zero distance
        m = longint'($urandom_range((1 << 20) - 1));
        j_pos = xj; j_mass = MASS_W'(m); j_valid = 1;
        add_ref(xi, xj, m, e2);
        @(negedge clk);
      end
      j_valid = 0;
      t_last = cycle;   // cycle count at this negedge: last j was sampled at edge t_last
      wait (!inflight);
      @(negedge clk);
      // latency: the sampling edge plus PIPE_LAT-1 more edges until the term is in acc
      checks++;
      if (cycle - t_last != PIPE_LAT - 1) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cycle - t_last, PIPE_LAT - 1);
      end
      compare($sformatf("trial %0d", trial), nj);
    end
    // a single zero-distance pair with eps = 0 must add exactly nothing
    @(negedge clk);
    clear = 1; eps2 = 0; i_pos = '{default: 32'sd77}; load_i = 1;
    @(negedge clk);
    clear = 0; load_i = 0; j_pos = '{default: 32'sd77}; j_mass = 24'd1000; j_valid = 1;
    @(negedge clk);
    j_valid = 0;
    repeat (PIPE_LAT + 2) @(negedge clk);
    checks++;
    if (acc != '0) begin failures++; $display("FAIL self pair gave non-zero force"); end
    // single exactly representable pair: dx = 4, r2 = 16, r^-3 = 1/64, m = 64 -> f = 4
    @(negedge clk);
    clear = 1; i_pos = '0; load_i = 1;
    @(negedge clk);
    clear = 0; load_i = 0; j_pos = '0; j_pos[0] = 32'sd4; j_mass = 24'd64; j_valid = 1;
    @(negedge clk);
    j_valid = 0;
    repeat (PIPE_LAT + 2) @(negedge clk);
    checks++;
    if (acc[0] != (64'sd4 <<< ACC_FRAC) || acc[1] != 0 || acc[2] != 0) begin
      failures++; $display("FAIL exact pair: %0d", acc[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
