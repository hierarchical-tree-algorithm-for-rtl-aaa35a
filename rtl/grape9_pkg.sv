// grape9_pkg: sizes and record types shared by the blocks of the GRAPE-9 FPGA.
//
// The sizes that the source gives are here as they are given: 98304 entries in the
// cell-index memory, 14 real force pipelines each serving 4 virtual pipelines (56
// i-particles at a time). The widths are this design's choice: particle indices are
// 24 bits, enough for the 10 million particles an 8 GB memory unit can hold; a cell's
// count is 24 bits too, so that one entry can cover any run of the memory.
//
// A j-particle record in the memory unit (a particle or a tree node stored as a
// pseudo-particle) holds position x, velocity v, half the acceleration a2 = a/2, a sixth
// of its time derivative j6 = (da/dt)/6, mass m and the time t of those values, all in
// the fp_pkg format. After prediction only position, velocity and mass are kept.
package grape9_pkg;
  import fp_pkg::*;

  localparam int unsigned NUM_CELLS  = 98304;
  localparam int unsigned CELL_AW    = $clog2(NUM_CELLS);
  localparam int unsigned IDX_W      = 24;
  localparam int unsigned CNT_W      = 24;
  localparam int unsigned NPIPE      = 14;
  localparam int unsigned NVIRT      = 4;
  localparam int unsigned NI         = NPIPE * NVIRT;

  // one entry of the cell-index memory: a run of consecutive memory-unit addresses
  typedef struct packed {
    logic [IDX_W-1:0] start;
    logic [CNT_W-1:0] n;
  } cell_entry_t;

  // j-particle as stored in the memory unit: x(3) v(3) a2(3) j6(3) m t
  typedef struct packed {
    fp_t [2:0] x;
    fp_t [2:0] v;
    fp_t [2:0] a2;
    fp_t [2:0] j6;
    fp_t       m;
    fp_t       t;
  } jparticle_t;

  localparam int unsigned JWORDS = $bits(jparticle_t) / 32;   // host words per record

  // j-particle after prediction, as broadcast to the force pipelines
  typedef struct packed {
    fp_t [2:0] x;
    fp_t [2:0] v;
    fp_t       m;
  } jpred_t;

  // i-particle held in a force pipeline (predicted on the host)
  typedef struct packed {
    fp_t [2:0] x;
    fp_t [2:0] v;
  } iparticle_t;

  // result for one i-particle: acceleration, its time derivative, potential
  typedef struct packed {
    fp_t [2:0] acc;
    fp_t [2:0] jerk;
    fp_t       pot;
  } force_t;

endpackage
