// grape6_system: the GRAPE-6 special-purpose back end as seen by the host.
//
// Top level of the design. A front-end host issues commands through
// host_interface, which buffers them, routes them to the reconfigurable back
// end or to NCLUSTER clusters, and sums the forces coming back. Each cluster
// (grape6_cluster) is a controller with NBOARD boards; each board
// (grape6_board) has NCHIP force chips; each chip (grape6_chip) has NJ words
// of on-chip particle memory and NPIPE inverse-square pipelines. The paper's
// figures are 16 pipelines per chip, 16 chips per board, 16-32 boards per
// controller and, initially, two to four clusters per host, for a prototype
// of 250-500 chips. The defaults (2 clusters x 16 boards x 16 chips = 512
// chips, 8192 pipelines) are that prototype.
//
// A typical force step: write the j-particles of every chip (OP_WR_J,
// addressed by cluster/board/chip), set each chip's count (OP_SET_NJ) and the
// softening (OP_SET_EPS); then, for each block of NPIPE targets, broadcast
// the i-particles (OP_WR_I), OP_START, and read the NPIPE forces (OP_RD_F).
// Every chip computes the force of its own j-particles on the same NPIPE
// targets, and the network adds the partial forces. The reconfigurable back
// end itself is not part of this RTL: its command port (rcp_*) is brought
// out.
//
// Timing: one command per clock enters when h_ready. A force read accepted
// into an empty FIFO returns on f/f_valid 4 + clog2(NCHIP) + clog2(NBOARD) +
// max(1,clog2(NCLUSTER)) clocks later (13 at the defaults): three link
// registers, the chip's readout register and the three adder trees. Reads
// may follow each other every clock.
// A START occupies the machine for max over chips of n_j, plus PIPE_LAT,
// plus the network round trip.
module grape6_system
  import grape6_pkg::*;
#(
  parameter int unsigned NCLUSTER   = 2,
  parameter int unsigned NBOARD     = 16,
  parameter int unsigned NCHIP      = 16,
  parameter int unsigned NPIPE      = 16,
  parameter int unsigned NJ         = 3000,
  parameter int unsigned FIFO_DEPTH = 16
)(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   h_valid,
  input  cmd_t   h_cmd,
  output logic   h_ready,
  output logic   f_valid,
  output force_t f,
  output logic   busy,
  output logic   rcp_valid,
  output cmd_t   rcp_cmd,
  input  logic   rcp_ready,
  input  logic   rcp_busy
);

  down_t cl_down [NCLUSTER];
  up_t   cl_up   [NCLUSTER];

  host_interface #(.NCLUSTER(NCLUSTER), .FIFO_DEPTH(FIFO_DEPTH)) u_host (
    .clk, .rst_n,
    .h_valid, .h_cmd, .h_ready, .f_valid, .f, .busy,
    .cl_down, .cl_up,
    .rcp_valid, .rcp_cmd, .rcp_ready, .rcp_busy
  );

  for (genvar c = 0; c < NCLUSTER; c++) begin : g_cluster
    grape6_cluster #(.NBOARD(NBOARD), .NCHIP(NCHIP), .NPIPE(NPIPE), .NJ(NJ)) u_cluster (
      .clk, .rst_n, .down(cl_down[c]), .up(cl_up[c])
    );
  end

endmodule
