// oovr_pkg: types and constants shared by the OO-VR distribution engine,
// the distributed composition units and the SMP engine.
//
// A batch is the smallest unit the engine schedules: a group of objects the
// driver has merged because they share textures. The engine sees only its
// ID, its triangle count (the input of the time prediction) and the line
// range of its texture data (what the pre-allocation unit moves). The ID
// width (16 bits) follows the paper's storage budget; the other widths are
// this design's choice. Rates and time counters are unsigned fixed point
// with FRAC fraction bits.
package oovr_pkg;

  localparam int unsigned BID_W      = 16;  // batch ID width
  localparam int unsigned CNT_W      = 64;  // total / elapsed counter width
  localparam int unsigned REG_W      = 32;  // triangle / vertex / pixel register width
  localparam int unsigned FRAC       = 16;  // fraction bits of rates and counters
  localparam int unsigned ADDR_W     = 32;  // texture line address width
  localparam int unsigned LEN_W      = 16;  // texture length in lines
  localparam int unsigned INC_W      = 8;   // per-cycle vertex / pixel increments
  localparam int unsigned XY_W       = 12;  // screen coordinate width
  localparam int unsigned COLOR_W    = 32;  // RGBA8
  localparam int unsigned FBA_W      = 20;  // address inside one FB partition (pixels)

  typedef struct packed {
    logic [BID_W-1:0]  id;
    logic [REG_W-1:0]  ntri;      // number of triangles of the batch
    logic [ADDR_W-1:0] tex_addr;  // first texture line
    logic [LEN_W-1:0]  tex_lines; // number of texture lines
  } batch_desc_t;

  // Job for a pre-allocation unit.
  typedef struct packed {
    batch_desc_t desc;
    logic        prealloc;  // copy the texture data before launching
    logic        dup;       // copy only: leftover fine-grained work will follow
  } pa_job_t;

  // Colour output of one pixel in final-frame screen space.
  typedef struct packed {
    logic [XY_W-1:0]    x;
    logic [XY_W-1:0]    y;
    logic [COLOR_W-1:0] color;
  } pixel_t;

  // Triangle of the SMP engine: three vertices, signed X and Y.
  typedef struct packed {
    logic signed [15:0] x;
    logic signed [15:0] y;
  } vtx_t;

  typedef struct packed {
    vtx_t v2;
    vtx_t v1;
    vtx_t v0;
  } tri_t;

endpackage
