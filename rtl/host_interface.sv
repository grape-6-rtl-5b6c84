// host_interface: root of the GRAPE-6 network, between the front-end host
// and the back ends.
//
// The paper attaches two kinds of back end to a general-purpose front end
// through a high-speed network: clusters of custom force chips and
// reconfigurable (FPGA) processors. It asks that the special-purpose side
// provide "adequate buffering and flow control" so that host and back end can
// work concurrently. This block does that:
//   * a FIFO of FIFO_DEPTH commands takes commands from the host with a
//     valid/ready handshake, so the host can queue a whole step's commands
//     (including the reads that follow a START) and go on computing;
//   * commands with cmd.rcp set are handed, in order, to the reconfigurable
//     back-end port (valid/ready);
//   * all other commands go to the clusters: the "selected" flag is narrowed
//     by the cluster field (or kept for a broadcast) and the command is sent
//     on one link register per cluster;
//   * while the clusters are busy, the next cluster command waits at the
//     head of the FIFO (stall). After a START the stall is held for HOLD
//     clocks, the round trip of the busy flag through the tree, so the first
//     clocks after a START are covered before the chips' busy arrives;
//   * forces returned by the clusters are summed by one more
//     force_reduction_tree and delivered to the host on f/f_valid.
// The command FIFO, the stall rule and the port to the reconfigurable back
// end are this design's choices; the paper gives only the requirement.
//
// Timing: one command per clock leaves the FIFO when it is not stalled. busy
// is high while a START is in progress anywhere (either kind of back end).
module host_interface
  import grape6_pkg::*;
#(
  parameter int unsigned NCLUSTER   = 2,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned HOLD       = 8
)(
  input  logic   clk,
  input  logic   rst_n,
  // host side
  input  logic   h_valid,
  input  cmd_t   h_cmd,
  output logic   h_ready,
  output logic   f_valid,
  output force_t f,
  output logic   busy,
  // custom-chip clusters
  output down_t  cl_down [NCLUSTER],
  input  up_t    cl_up   [NCLUSTER],
  // reconfigurable back end
  output logic   rcp_valid,
  output cmd_t   rcp_cmd,
  input  logic   rcp_ready,
  input  logic   rcp_busy
);

  localparam int unsigned FAW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  // ---------------- command FIFO ----------------
  cmd_t             fifo [FIFO_DEPTH];
  logic [FAW-1:0]   rd_ptr, wr_ptr;
  logic [FAW:0]     count;
  logic             push, pop, empty;
  cmd_t             head;

  assign empty   = (count == '0);
  assign h_ready = (32'(count) < FIFO_DEPTH);
  assign push    = h_valid && h_ready;
  assign head    = fifo[rd_ptr];

  always_ff @(posedge clk)
    if (push) fifo[wr_ptr] <= h_cmd;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else begin
      if (push) wr_ptr <= (32'(wr_ptr) == FIFO_DEPTH-1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (32'(rd_ptr) == FIFO_DEPTH-1) ? '0 : rd_ptr + 1'b1;
      count <= count + FAW'(push) - FAW'(pop);
    end

  // ---------------- dispatch ----------------
  logic [$clog2(HOLD+1)-1:0] hold_cnt;
  logic  spd_busy, cl_busy, spd_issue;

  always_comb begin
    cl_busy = 1'b0;
    for (int c = 0; c < NCLUSTER; c++) cl_busy |= cl_up[c].busy;
  end
  assign spd_busy  = cl_busy || (hold_cnt != '0);
  assign rcp_valid = !empty && head.rcp;
  assign rcp_cmd   = head;
  assign spd_issue = !empty && !head.rcp && !spd_busy;
  assign pop       = spd_issue || (rcp_valid && rcp_ready);
  assign busy      = spd_busy || rcp_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) hold_cnt <= '0;
    else if (spd_issue && head.op == OP_START) hold_cnt <= ($clog2(HOLD+1))'(HOLD);
    else if (hold_cnt != '0) hold_cnt <= hold_cnt - 1'b1;

  for (genvar c = 0; c < NCLUSTER; c++) begin : g_cl
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) cl_down[c] <= '0;
      else begin
        cl_down[c].valid <= spd_issue;
        cl_down[c].sel   <= head.bcast || head.cluster == CL_ID_W'(c);
        cl_down[c].cmd   <= head;
      end
  end

  // ---------------- force reduction over clusters ----------------
  logic   cv [NCLUSTER];
  force_t cf [NCLUSTER];
  for (genvar c = 0; c < NCLUSTER; c++) begin : g_up
    assign cv[c] = cl_up[c].f_valid;
    assign cf[c] = cl_up[c].f;
  end

  force_reduction_tree #(.N(NCLUSTER)) u_tree (
    .clk, .rst_n, .in_valid(cv), .in_f(cf), .out_valid(f_valid), .sum(f)
  );

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(pop && empty)) else $error("host interface: pop from empty FIFO");
  a_rcp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rcp_valid && !rcp_ready |=> rcp_valid && rcp_cmd == $past(rcp_cmd))
    else $error("host interface: rcp command changed while waiting");

endmodule
