// particle_memory: the on-chip j-particle SRAM of one GRAPE-6 chip.
//
// The paper puts the particle data memory on the processor chip so that the
// pipelines get one particle per clock without an off-chip memory bottleneck:
// about 30% of the silicon as SRAM, at least 2 Mbit, about 600 bits per
// particle, so at least 3x10^3 particles per chip. This memory holds DEPTH
// particles of WIDTH bits. The default depth is the paper's 3000 particles;
// the record stored here (position and mass, JPART_W bits) is narrower than
// the paper's 600 bits because this design does not store the predictor
// terms (velocity, higher derivatives, time) that the paper's estimate allows
// for.
//
// Interface and timing: one write port (host loading, we/waddr/wdata) and
// one read port for the pipelines; rdata is registered and rvalid follows re
// by one clock. A read and a write to the same address in one cycle return
// the old data. Addresses at or beyond DEPTH are ignored (writes) or return
// the last word read (reads).
module particle_memory #(
  parameter int unsigned DEPTH = 3000,
  parameter int unsigned WIDTH = grape6_pkg::JPART_W,
  parameter int unsigned AW    = 16
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  output logic             rvalid
);

  localparam int unsigned MAW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we && 32'(waddr) < DEPTH) mem[waddr[MAW-1:0]] <= wdata;

  always_ff @(posedge clk)
    if (re && 32'(raddr) < DEPTH) rdata <= mem[raddr[MAW-1:0]];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;

endmodule
