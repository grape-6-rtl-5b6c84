// force_pipeline: one inverse-square force pipeline of the GRAPE-6 chip.
//
// The pipeline holds one target ("i") particle and, for every source ("j")
// particle streamed past it, adds the softened Newtonian acceleration
//     f += m_j * (x_j - x_i) / (|x_j - x_i|^2 + eps^2)^(3/2)
// to a fixed-point accumulator, one j-particle per clock. The paper gives the
// function (a fully pipelined inverse-square pipeline, sixteen of them per
// chip, design "essentially similar" to GRAPE-4); the arithmetic below is this
// design's own, chosen to be the simplest synthesizable way to do it:
//   S1  dx = x_j - x_i                       (exact, POS_W+1 bits)
//   S2  r2 = dx^2 + dy^2 + dz^2 + eps^2      (exact, 2*POS_W+3 bits)
//   S3  r2 = q * 2^(e - (TBL_IDX-2)) with e even, q in [2^(TBL_IDX-2), 2^TBL_IDX)
//   S4  t  = ROM[q] = (q / 2^(TBL_IDX-2))^(-3/2) * 2^TBL_FRAC  (table lookup)
//   S5  mt = m_j * t
//   S6  p  = dx * mt                         (per component)
//   S7  acc += p * 2^(ACC_FRAC - TBL_FRAC - 3e/2)   (arithmetic shift)
// so r^-3 = t * 2^(-TBL_FRAC) * 2^(-3e/2). The only approximation is the
// truncation of r2 to TBL_IDX-2 fraction bits (relative error of r^-3 below
// 1.5 * 2^-(TBL_IDX-2)) and the truncation of each term to the accumulator
// LSB. The table (grape6_pkg::RSQ3_ROM) is computed at elaboration from its
// formula, once for all pipelines.
//
// A pair with r2 = 0 (the particle meeting itself with eps = 0) contributes
// nothing. Accumulation wraps modulo 2^ACC_W; the host must pick units so that
// the final force and every single term fit in ACC_W bits.
//
// Interface and timing: load_i writes the i-particle; clear zeroes the
// accumulator (it has priority over an update in the same cycle); j_valid
// with j_pos/j_mass presents one j-particle. Its term is in acc PIPE_LAT (7)
// clocks later. inflight is high while any j-particle is inside.
module force_pipeline
  import grape6_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_i,
  input  vec3_t             i_pos,
  input  logic [EPS_W-1:0]  eps2,
  input  logic              clear,
  input  logic              j_valid,
  input  vec3_t             j_pos,
  input  logic [MASS_W-1:0] j_mass,
  output force_t            acc,
  output logic              inflight
);

  localparam int unsigned DX_W  = POS_W + 1;
  localparam int unsigned R2_W  = 2*POS_W + 3;
  localparam int unsigned E_W   = $clog2(R2_W);
  localparam int unsigned SH_W  = E_W + 1;
  localparam int unsigned MT_W  = MASS_W + TBL_W;
  localparam int unsigned P_W   = DX_W + MT_W + 1;
  localparam int unsigned LSH   = ACC_FRAC - TBL_FRAC;

  vec3_t            xi;

  // ---------------- i-particle register ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      xi <= '0;
    else if (load_i) xi <= i_pos;

  // ---------------- S1: coordinate differences ----------------
  logic                   v1;
  logic signed [DX_W-1:0] dx1 [3];
  logic [MASS_W-1:0]      m1;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= j_valid;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++)
      dx1[k] <= DX_W'(signed'(j_pos[k])) - DX_W'(signed'(xi[k]));
    m1 <= j_mass;
  end

  // ---------------- S2: squared distance ----------------
  function automatic logic [R2_W-1:0] sq(logic signed [DX_W-1:0] d);
    logic [DX_W-1:0] mag;
    mag = d[DX_W-1] ? DX_W'(-d) : DX_W'(d);
    return R2_W'(mag) * R2_W'(mag);
  endfunction

  logic                   v2;
  logic signed [DX_W-1:0] dx2 [3];
  logic [MASS_W-1:0]      m2;
  logic [R2_W-1:0]        r2_2;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  always_ff @(posedge clk) begin
    r2_2 <= sq(dx1[0]) + sq(dx1[1]) + sq(dx1[2]) + R2_W'(eps2);
    dx2 <= dx1;
    m2  <= m1;
  end

  // ---------------- S3: normalisation ----------------
  // e_even: the even exponent 2b of the highest bit pair {r2[2b+1], r2[2b]}
  // that holds a one, so that r2 / 2^e_even is in [1, 4).
  logic [E_W-1:0]              e_even;
  logic [R2_W:0]               r2_pad;
  logic [R2_W+TBL_IDX-3:0]     r2_ext;
  logic [TBL_IDX-1:0]          q_c;
  always_comb begin
    r2_pad = {1'b0, r2_2};
    e_even = '0;
    for (int b = 0; 2*b < R2_W; b++)
      if (r2_pad[2*b] || r2_pad[2*b+1]) e_even = E_W'(2*b);
    r2_ext = {r2_2, {(TBL_IDX-2){1'b0}}};
    q_c    = TBL_IDX'(r2_ext >> e_even);
  end

  logic                   v3, z3;
  logic signed [DX_W-1:0] dx3 [3];
  logic [MASS_W-1:0]      m3;
  logic [TBL_IDX-1:0]     q3;
  logic [SH_W-1:0]        sh3;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= v2;
  always_ff @(posedge clk) begin
    z3  <= (r2_2 == '0);
    q3  <= q_c;
    sh3 <= SH_W'(e_even) + SH_W'(e_even >> 1);  // 3e/2
    dx3 <= dx2;
    m3  <= m2;
  end

  // ---------------- S4: r^-3 mantissa lookup ----------------
  logic                   v4;
  logic signed [DX_W-1:0] dx4 [3];
  logic [MASS_W-1:0]      m4;
  logic [TBL_W-1:0]       t4;
  logic [SH_W-1:0]        sh4;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v4 <= 1'b0;
    else        v4 <= v3;
  always_ff @(posedge clk) begin
    t4  <= z3 ? '0 : RSQ3_ROM[q3];
    sh4 <= sh3;
    dx4 <= dx3;
    m4  <= m3;
  end

  // ---------------- S5: m * r^-3 ----------------
  logic                   v5;
  logic signed [DX_W-1:0] dx5 [3];
  logic [MT_W-1:0]        mt5;
  logic [SH_W-1:0]        sh5;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v5 <= 1'b0;
    else        v5 <= v4;
  always_ff @(posedge clk) begin
    mt5 <= MT_W'(m4) * MT_W'(t4);
    sh5 <= sh4;
    dx5 <= dx4;
  end

  // ---------------- S6: times dx ----------------
  logic                  v6;
  logic signed [P_W-1:0] p6 [3];
  logic [SH_W-1:0]       sh6;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v6 <= 1'b0;
    else        v6 <= v5;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++)
      p6[k] <= P_W'(dx5[k]) * signed'(P_W'(mt5));
    sh6 <= sh5;
  end

  // ---------------- S7: scale and accumulate ----------------
  logic signed [P_W+LSH-1:0] wide [3];
  acc_t                      term [3];
  always_comb
    for (int k = 0; k < 3; k++) begin
      wide[k] = signed'({p6[k], {LSH{1'b0}}}) >>> sh6;
      term[k] = ACC_W'(wide[k]);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  acc <= '0;
    else if (clear) acc <= '0;
    else if (v6)
      for (int k = 0; k < 3; k++) acc[k] <= acc[k] + term[k];

  assign inflight = v1 | v2 | v3 | v4 | v5 | v6;

endmodule
