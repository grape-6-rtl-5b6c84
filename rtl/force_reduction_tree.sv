// force_reduction_tree: pipelined adder tree of the GRAPE-6 result network.
//
// Every level of the machine (board, cluster controller, host interface)
// sums the partial forces of its children before passing them up, so the
// host reads one total per i-particle. The paper names a point-to-point
// network with tree topologies "under study"; a binary adder tree with a
// register after each level is this design's choice. Inputs are padded with
// zeros to the next power of two. Because forces are fixed-point, the sum
// is exact modulo 2^ACC_W whatever the order of additions.
//
// Timing: sum/out_valid appear LAT = max(1, clog2(N)) clocks after
// in_f/in_valid. All children answer in the same clock; out_valid is the OR
// of their valid flags, and an assertion checks they agree.
module force_reduction_tree
  import grape6_pkg::*;
#(
  parameter int unsigned N = 16
)(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid [N],
  input  force_t in_f     [N],
  output logic   out_valid,
  output force_t sum
);

  localparam int unsigned L  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP = 2**L;

  force_t lvl   [L+1][NP];
  logic   vld   [L+1];

  always_comb begin
    vld[0] = 1'b0;
    for (int i = 0; i < NP; i++) begin
      lvl[0][i] = (i < N) ? in_f[i] : '0;
      if (i < N) vld[0] |= in_valid[i];
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int unsigned W = NP >> (l + 1);
    for (genvar i = 0; i < NP; i++) begin : g_node
      if (i < W) begin : g_add
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) lvl[l+1][i] <= '0;
          else if (vld[l])
            for (int k = 0; k < 3; k++)
              lvl[l+1][i][k] <= lvl[l][2*i][k] + ((NP > 1) ? lvl[l][2*i+1][k] : '0);
      end else begin : g_pad
        assign lvl[l+1][i] = '0;
      end
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
  end

  assign out_valid = vld[L];
  assign sum       = lvl[L][0];

  logic all_same;
  always_comb begin
    all_same = 1'b1;
    for (int i = 0; i < N; i++) all_same &= (in_valid[i] == in_valid[0]);
  end
  a_children_agree: assert property (@(posedge clk) disable iff (!rst_n) all_same)
    else $error("reduction tree: children answered in different clocks");

endmodule
