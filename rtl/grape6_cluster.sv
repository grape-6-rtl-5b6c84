// grape6_cluster: one GRAPE-6 cluster, a controller with its boards.
//
// In the paper a controller drives 16-32 boards (up to 32); this level of the
// hierarchy is called a cluster, and its interconnect is a point-to-point
// network rather than GRAPE-4's shared buses. Here the controller takes one
// command per clock from the host interface over a link (one register
// stage), narrows the "selected" flag by the command's board field (or keeps
// it for a broadcast) and sends it on a separate link to every board. Going
// up, it sums the boards' forces with a force_reduction_tree and ORs their
// busy flags into one registered flag. The link format and the tree are this
// design's choices; NBOARD defaults to 16, the low end of the paper's range,
// which together with two clusters gives the paper's prototype of about 500
// chips.
//
// Timing: a command reaches the boards' links 1 clock after it arrives on
// `down`; forces come back clog2(NBOARD) clocks after the boards return them;
// up.busy lags the boards' busy by one clock.
module grape6_cluster
  import grape6_pkg::*;
#(
  parameter int unsigned NBOARD = 16,
  parameter int unsigned NCHIP  = 16,
  parameter int unsigned NPIPE  = 16,
  parameter int unsigned NJ     = 3000
)(
  input  logic  clk,
  input  logic  rst_n,
  input  down_t down,
  output up_t   up
);

  down_t  dq;
  down_t  bd_down [NBOARD];
  up_t    bd_up   [NBOARD];
  logic   bv [NBOARD];
  force_t bf [NBOARD];
  logic   any_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dq <= '0;
    else        dq <= down;

  for (genvar b = 0; b < NBOARD; b++) begin : g_board
    always_comb begin
      bd_down[b]     = dq;
      bd_down[b].sel = dq.sel && (dq.cmd.bcast || dq.cmd.board == BD_ID_W'(b));
    end
    grape6_board #(.NCHIP(NCHIP), .NPIPE(NPIPE), .NJ(NJ)) u_board (
      .clk, .rst_n, .down(bd_down[b]), .up(bd_up[b])
    );
    assign bv[b] = bd_up[b].f_valid;
    assign bf[b] = bd_up[b].f;
  end

  force_reduction_tree #(.N(NBOARD)) u_tree (
    .clk, .rst_n, .in_valid(bv), .in_f(bf), .out_valid(up.f_valid), .sum(up.f)
  );

  always_comb begin
    any_busy = 1'b0;
    for (int b = 0; b < NBOARD; b++) any_busy |= bd_up[b].busy;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) up.busy <= 1'b0;
    else        up.busy <= any_busy;

endmodule
