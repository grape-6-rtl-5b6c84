// grape6_chip: the custom GRAPE-6 force-calculation chip.
//
// Following the paper, one chip holds its share of the source (j) particles
// in on-chip SRAM (particle_memory) and has sixteen inverse-square pipelines
// (force_pipeline). Each pipeline holds a different target (i) particle; the
// j-particles are read from memory one per clock and broadcast to all
// pipelines at once, so a chip computes NPIPE interactions per clock. The
// command set, the sequencer and the readout are this design's choice.
//
// Commands arrive on `down` (grape6_pkg::down_t), one per clock:
//   WR_J    (if down.sel) store {pos, mass = scal} at j address addr
//   SET_NJ  (if down.sel) number of j-particles to stream = addr (clipped to NJ)
//   WR_I    load pos as the i-particle of pipeline addr
//   SET_EPS softening eps^2 = scal
//   START   clear all accumulators and stream j = 0 .. n_j-1 through the pipelines
//   RD_F    return the force of pipeline addr on up.f, with up.f_valid, one clock later
// up.busy is high from the clock after START until the last term is
// accumulated: exactly n_j + PIPE_LAT clocks (one memory read stage, six
// pipeline stages; the accumulators hold the result when busy falls).
// No command other than NOP may arrive while busy (asserted).
module grape6_chip
  import grape6_pkg::*;
#(
  parameter int unsigned NPIPE = 16,
  parameter int unsigned NJ    = 3000
)(
  input  logic  clk,
  input  logic  rst_n,
  input  down_t down,
  output up_t   up
);

  localparam int unsigned PW = (NPIPE > 1) ? $clog2(NPIPE) : 1;

  logic [ADDR_W-1:0] nj, jptr;
  logic [EPS_W-1:0]  eps2;
  logic              running;

  wire  is_op  = down.valid;
  wire  op_wrj = is_op && down.sel && down.cmd.op == OP_WR_J;
  wire  op_snj = is_op && down.sel && down.cmd.op == OP_SET_NJ;
  wire  op_wri = is_op && down.cmd.op == OP_WR_I;
  wire  op_eps = is_op && down.cmd.op == OP_SET_EPS;
  wire  op_go  = is_op && down.cmd.op == OP_START;
  wire  op_rd  = is_op && down.cmd.op == OP_RD_F;

  // ---------------- particle memory ----------------
  jpart_t wdata, rdata;
  logic   rvalid;
  assign wdata.pos  = down.cmd.pos;
  assign wdata.mass = down.cmd.scal[MASS_W-1:0];

  particle_memory #(.DEPTH(NJ), .WIDTH(JPART_W), .AW(ADDR_W)) u_mem (
    .clk, .rst_n,
    .we(op_wrj), .waddr(down.cmd.addr), .wdata(wdata),
    .re(running), .raddr(jptr), .rdata(rdata), .rvalid(rvalid)
  );

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      nj <= '0; eps2 <= '0; running <= 1'b0; jptr <= '0;
    end else begin
      if (op_snj) nj <= (32'(down.cmd.addr) > NJ) ? ADDR_W'(NJ) : down.cmd.addr;
      if (op_eps) eps2 <= down.cmd.scal[EPS_W-1:0];
      if (op_go) begin
        running <= (nj != '0);
        jptr    <= '0;
      end else if (running) begin
        jptr <= jptr + 1'b1;
        if (jptr == nj - 1'b1) running <= 1'b0;
      end
    end

  // ---------------- pipelines ----------------
  force_t acc      [NPIPE];
  logic   inflight [NPIPE];
  logic   any_inflight;

  for (genvar p = 0; p < NPIPE; p++) begin : g_pipe
    force_pipeline u_pipe (
      .clk, .rst_n,
      .load_i (op_wri && down.cmd.addr == ADDR_W'(p)),
      .i_pos  (down.cmd.pos),
      .eps2   (eps2),
      .clear  (op_go),
      .j_valid(rvalid),
      .j_pos  (rdata.pos),
      .j_mass (rdata.mass),
      .acc    (acc[p]),
      .inflight(inflight[p])
    );
  end

  always_comb begin
    any_inflight = 1'b0;
    for (int p = 0; p < NPIPE; p++) any_inflight |= inflight[p];
  end

  // ---------------- readout ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      up.f_valid <= 1'b0;
      up.f       <= '0;
    end else begin
      up.f_valid <= op_rd;
      if (op_rd) up.f <= (32'(down.cmd.addr) < NPIPE) ? acc[PW'(down.cmd.addr)] : '0;
    end

  assign up.busy = running | rvalid | any_inflight;

  a_idle_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    up.busy |-> !down.valid || down.cmd.op == OP_NOP)
    else $error("chip: command while busy");

endmodule
