// grape6_board: one GRAPE-6 processor board of sixteen force chips.
//
// The paper's hierarchy puts sixteen processor chips on a board. The board
// receives one command per clock from its cluster controller over a
// point-to-point link (one register stage here), narrows the "selected" flag
// by the command's chip field (or keeps it for a broadcast), and hands the
// command to all chips at once, so every chip sees the same i-particles and
// starts in the same clock. Coming back, the chips' partial forces for the
// requested i-particle are summed by a force_reduction_tree and the chips'
// busy flags are ORed into one registered flag. The link format and the
// board-level adder tree are this design's choices.
//
// Timing: a command reaches the chips 1 clock after it arrives on `down`; a
// force read returns on up.f 1 (chip) + clog2(NCHIP) (tree) clocks after the
// chips see it; up.busy lags the chips' busy by one clock.
module grape6_board
  import grape6_pkg::*;
#(
  parameter int unsigned NCHIP = 16,
  parameter int unsigned NPIPE = 16,
  parameter int unsigned NJ    = 3000
)(
  input  logic  clk,
  input  logic  rst_n,
  input  down_t down,
  output up_t   up
);

  down_t  dq;
  down_t  chip_down [NCHIP];
  up_t    chip_up   [NCHIP];
  logic   cv [NCHIP];
  force_t cf [NCHIP];
  logic   any_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dq <= '0;
    else        dq <= down;

  for (genvar c = 0; c < NCHIP; c++) begin : g_chip
    always_comb begin
      chip_down[c]     = dq;
      chip_down[c].sel = dq.sel && (dq.cmd.bcast || dq.cmd.chip == CH_ID_W'(c));
    end
    grape6_chip #(.NPIPE(NPIPE), .NJ(NJ)) u_chip (
      .clk, .rst_n, .down(chip_down[c]), .up(chip_up[c])
    );
    assign cv[c] = chip_up[c].f_valid;
    assign cf[c] = chip_up[c].f;
  end

  force_reduction_tree #(.N(NCHIP)) u_tree (
    .clk, .rst_n, .in_valid(cv), .in_f(cf), .out_valid(up.f_valid), .sum(up.f)
  );

  always_comb begin
    any_busy = 1'b0;
    for (int c = 0; c < NCHIP; c++) any_busy |= chip_up[c].busy;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) up.busy <= 1'b0;
    else        up.busy <= any_busy;

endmodule
