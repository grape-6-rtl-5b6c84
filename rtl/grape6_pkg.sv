// grape6_pkg: types and constants shared by every level of the GRAPE-6
// force-engine hierarchy (pipeline, chip, board, cluster, host interface).
//
// Number formats. Positions are signed fixed-point integers of POS_W bits
// (one LSB is the length quantum chosen by the host). Masses are unsigned
// MASS_W-bit integers. The softening eps^2 is an unsigned EPS_W-bit integer
// in squared length quanta. Forces are accumulated as signed ACC_W-bit
// fixed-point numbers whose LSB is 2^-ACC_FRAC (mass quantum / length
// quantum^2). Fixed-point accumulation makes every partial sum exact modulo
// 2^ACC_W, so the reduction network may add partial forces in any order and
// the result is the same as long as the final sum fits. The paper does not
// give number formats; all of these widths are this design's choice.
//
// Network. Commands travel from the host down a tree (host interface ->
// cluster controller -> board -> chip) as a down_t record: valid, a "selected"
// flag that each level narrows by address, and the command itself. Results
// travel back up as an up_t record: a force word with its valid flag, summed
// at every level, and a busy flag ORed at every level.
package grape6_pkg;

  // ---------------- number formats (design choice) ----------------
  localparam int unsigned POS_W    = 32;  // position word
  localparam int unsigned MASS_W   = 24;  // mass word
  localparam int unsigned EPS_W    = 64;  // softening eps^2
  localparam int unsigned ACC_W    = 64;  // force accumulator
  localparam int unsigned ACC_FRAC = 32;  // fraction bits of the accumulator
  localparam int unsigned TBL_FRAC = 16;  // fraction bits of the r^-3 table
  localparam int unsigned TBL_IDX  = 12;  // table index bits (2 integer + 10 fraction)
  localparam int unsigned TBL_W    = TBL_FRAC + 1;

  // ---------------- address fields (sized for the paper's maxima) -------
  localparam int unsigned CL_ID_W  = 4;   // up to 16 clusters per host
  localparam int unsigned BD_ID_W  = 5;   // up to 32 boards per cluster
  localparam int unsigned CH_ID_W  = 4;   // 16 chips per board
  localparam int unsigned ADDR_W   = 16;  // j address, pipeline index or count

  // Force pipeline latency: j-particle in -> accumulator updated.
  localparam int unsigned PIPE_LAT = 7;

  typedef logic signed [POS_W-1:0] pos_t;
  typedef pos_t [2:0]               vec3_t;   // [0]=x [1]=y [2]=z
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef acc_t [2:0]               force_t;  // [0]=x [1]=y [2]=z

  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_WR_J    = 3'd1,  // write j-particle {pos, mass=scal} at addr of the selected chip(s)
    OP_WR_I    = 3'd2,  // load i-particle pos into pipeline addr of every chip
    OP_SET_NJ  = 3'd3,  // number of valid j-particles (addr) of the selected chip(s)
    OP_SET_EPS = 3'd4,  // softening eps^2 (scal), every chip
    OP_START   = 3'd5,  // clear accumulators and stream the j memory, every chip
    OP_RD_F    = 3'd6   // return the force of pipeline addr, summed over all chips
  } op_e;

  typedef struct packed {
    op_e                 op;
    logic                bcast;    // WR_J / SET_NJ: apply to every chip
    logic                rcp;      // destined for the reconfigurable back end
    logic [CL_ID_W-1:0]  cluster;
    logic [BD_ID_W-1:0]  board;
    logic [CH_ID_W-1:0]  chip;
    logic [ADDR_W-1:0]   addr;
    vec3_t               pos;
    logic [63:0]         scal;     // mass (WR_J) or eps^2 (SET_EPS)
  } cmd_t;

  // One hop of the command tree.
  typedef struct packed {
    logic valid;
    logic sel;      // the addressed ops (WR_J, SET_NJ) act only where sel is set
    cmd_t cmd;
  } down_t;

  // One hop of the result tree.
  typedef struct packed {
    logic   f_valid;
    force_t f;
    logic   busy;
  } up_t;

  // j-particle record as stored in the on-chip particle memory.
  typedef struct packed {
    vec3_t             pos;
    logic [MASS_W-1:0] mass;
  } jpart_t;

  localparam int unsigned JPART_W = $bits(jpart_t);

  // r^-3 mantissa table of the force pipeline. A squared distance normalised
  // to q / 2^(TBL_IDX-2) with q in [2^(TBL_IDX-2), 2^TBL_IDX), i.e. a value in
  // [1, 4), has (q / 2^(TBL_IDX-2))^(-3/2) in (1/8, 1]; the table holds it
  // with TBL_FRAC fraction bits:
  //   RSQ3_ROM[q] = round((q / 2^(TBL_IDX-2))^(-1.5) * 2^TBL_FRAC)
  // and 0 for the unused q < 2^(TBL_IDX-2).
  typedef logic [TBL_W-1:0] rsq3_rom_t [2**TBL_IDX];

  function automatic rsq3_rom_t make_rsq3_rom();
    rsq3_rom_t r;
    for (int q = 0; q < 2**TBL_IDX; q++) begin
      if (q < 2**(TBL_IDX-2)) r[q] = '0;
      else r[q] = TBL_W'($rtoi($pow(real'(q) / real'(2**(TBL_IDX-2)), -1.5)
                                * real'(2**TBL_FRAC) + 0.5));
    end
    return r;
  endfunction

  localparam rsq3_rom_t RSQ3_ROM = make_rsq3_rom();

endpackage
