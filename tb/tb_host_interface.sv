// tb_host_interface: self-checking test of the host interface with two
// clusters and a reconfigurable back-end port, both modelled in this bench.
//
// The cluster model raises busy 3 clocks after it receives START and keeps
// it for 20 clocks, and answers RD_F two clocks later with a force that
// encodes the cluster and the address. The reconfigurable port accepts a
// command only on every third clock. The bench pushes a random mix of
// commands as fast as h_ready allows and checks: every cluster command
// reaches both clusters in order with the right "selected" flag; every
// rcp command reaches the rcp port in order and never a cluster; no cluster
// command is issued while a START is in progress (stall); the returned
// force is the sum over the clusters. It also counts that the FIFO filled
// (h_ready low), that stalls and rcp back-pressure happened.
module tb_host_interface;
  import grape6_pkg::*;

  localparam int unsigned NCL = 2;

  logic   clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   h_valid, h_ready, f_valid, busy, rcp_valid, rcp_ready, rcp_busy;
  cmd_t   h_cmd, rcp_cmd;
  force_t f;
  down_t  cl_down [NCL];
  up_t    cl_up   [NCL];

  host_interface #(.NCLUSTER(NCL)) dut (.*);

  int checks = 0, failures = 0;
  int n_full = 0, n_stall = 0, n_rcp_wait = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- cluster models ----------------
  int busy_left [NCL];
  int start_in  [NCL];
  logic [ADDR_W-1:0] rd_addr [NCL][2];
  logic rd_v [NCL][2];

  function automatic force_t model_force(int c, logic [ADDR_W-1:0] a);
    force_t r;
    for (int k = 0; k < 3; k++) r[k] = acc_t'((c + 1) * 1000 + 10 * int'(a) + k) - 1500;
    return r;
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < NCL; c++) begin
      // RD_F answered two clocks after it arrives
      cl_up[c].f_valid <= rd_v[c][1];
      cl_up[c].f       <= model_force(c, rd_addr[c][1]);
      rd_v[c][1] <= rd_v[c][0];     rd_addr[c][1] <= rd_addr[c][0];
      rd_v[c][0] <= cl_down[c].valid && cl_down[c].cmd.op == OP_RD_F;
      rd_addr[c][0] <= cl_down[c].cmd.addr;
      // busy from 3 clocks after START for 20 clocks
      if (cl_down[c].valid && cl_down[c].cmd.op == OP_START) start_in[c] <= 3;
      else if (start_in[c] > 0) begin
        start_in[c] <= start_in[c] - 1;
        if (start_in[c] == 1) busy_left[c] <= 20;
      end
      if (busy_left[c] > 0) busy_left[c] <= busy_left[c] - 1;
      cl_up[c].busy <= (busy_left[c] > 1) || (start_in[c] == 1);
    end
  end

  // ---------------- reconfigurable port model ----------------
  int rcp_phase = 0;
  always @(posedge clk) rcp_phase <= (rcp_phase + 1) % 3;
  assign rcp_ready = (rcp_phase == 0);
  assign rcp_busy  = 1'b0;

  // ---------------- expectations ----------------
  cmd_t exp_cl [$];
  cmd_t exp_rcp [$];
  force_t exp_f [$];
  logic in_start;  // a START is outstanding in the cluster model
  int   start_guard;

  always @(posedge clk) if (rst_n) begin
    if (rcp_valid && !rcp_ready) n_rcp_wait++;
    if (!h_ready) n_full++;
    if (busy && !dut.empty && !dut.head.rcp) n_stall++;
    // cluster side
    if (cl_down[0].valid) begin
      cmd_t e;
      checks++;
      if (exp_cl.size() == 0) begin failures++; $display("FAIL unexpected cluster command"); end
      else begin
        e = exp_cl.pop_front();
        if (cl_down[0].cmd != e || cl_down[1].cmd != e || !cl_down[1].valid) begin
          failures++; $display("FAIL cluster command order/content");
        end
        for (int c = 0; c < NCL; c++)
          if (cl_down[c].sel != (e.bcast || e.cluster == CL_ID_W'(c))) begin
            failures++; $display("FAIL sel of cluster %0d", c);
          end
        if (start_guard > 0) begin
          failures++; $display("FAIL command issued while a START was in progress");
        end
        if (e.op == OP_RD_F) begin
          force_t s, m;
          s = '0;
          for (int c = 0; c < NCL; c++) begin
            m = model_force(c, e.addr);
            for (int k = 0; k < 3; k++) s[k] += m[k];
          end
          exp_f.push_back(s);
        end
      end
    end
    if (cl_down[0].valid && cl_down[0].cmd.op == OP_START) start_guard <= 3 + 20;
    else if (start_guard > 0) start_guard <= start_guard - 1;
    // rcp side
    if (rcp_valid && rcp_ready) begin
      checks++;
      if (exp_rcp.size() == 0 || rcp_cmd != exp_rcp[0]) begin failures++; $display("FAIL rcp command"); end
      else void'(exp_rcp.pop_front());
    end
    // results
    if (f_valid) begin
      checks++;
      if (exp_f.size() == 0 || f != exp_f[0]) begin failures++; $display("FAIL force sum got %0d %0d %0d exp %0d %0d %0d", f[0], f[1], f[2], exp_f[0][0], exp_f[0][1], exp_f[0][2]); end
      else void'(exp_f.pop_front());
    end
  end

  initial begin
    h_valid = 0; h_cmd = '0; start_guard = 0;
    for (int c = 0; c < NCL; c++) begin
      busy_left[c] = 0; start_in[c] = 0; cl_up[c] = '0;
      rd_v[c][0] = 0; rd_v[c][1] = 0; rd_addr[c][0] = 0; rd_addr[c][1] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      cmd_t c;
      int r;
      c = '0;
      r = int'($urandom_range(99));
      c.op      = (r < 8) ? OP_START : (r < 40) ? OP_RD_F : (r < 60) ? OP_WR_I : OP_WR_J;
      c.rcp     = (r >= 80);
      c.bcast   = ($urandom_range(3) == 0);
      c.cluster = CL_ID_W'($urandom_range(NCL - 1));
      c.addr    = ADDR_W'($urandom_range(15));
      c.scal    = {$urandom(), $urandom()};
      h_valid = 1; h_cmd = c;
      @(posedge clk);
      while (!h_ready) @(posedge clk);
      if (c.rcp) exp_rcp.push_back(c); else exp_cl.push_back(c);
      @(negedge clk);
      h_valid = 0;
    end
    h_valid = 0;
    repeat (300) @(negedge clk);
    checks++;
    if (exp_cl.size() != 0 || exp_rcp.size() != 0 || exp_f.size() != 0) begin
      failures++; $display("FAIL leftovers cl=%0d rcp=%0d f=%0d", exp_cl.size(), exp_rcp.size(), exp_f.size());
    end
    $display("mechanisms: fifo_full=%0d stall=%0d rcp_wait=%0d", n_full, n_stall, n_rcp_wait);
    checks += 3;
    if (n_full == 0)     begin failures++; $display("FAIL FIFO never filled"); end
    if (n_stall == 0)    begin failures++; $display("FAIL never stalled"); end
    if (n_rcp_wait == 0) begin failures++; $display("FAIL rcp never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
