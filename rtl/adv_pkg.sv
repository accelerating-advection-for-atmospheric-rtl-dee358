// Shared types and constants of the PW advection kernel.
//
// The kernel streams grid values through a chain of dataflow stages (read,
// 3D shift buffer, replicate, advect, write). This package holds the message
// formats that travel between those stages and the run-time configuration
// record the host writes before starting the kernel.
//
// Index convention used everywhere: x is the slowest dimension of the grid in
// memory, then y, then z (the column), which is contiguous. A stencil is
// indexed [dx][dy][dz] with 0 = minus one, 1 = centre, 2 = plus one. All
// arithmetic is IEEE 754 double precision, as in the paper.
package adv_pkg;

  typedef logic [63:0] fp64_t;

  // Width of the index fields carried in tags and configuration.
  localparam int unsigned IDX_W  = 16;
  // External memory word: eight doubles (512 bits), addressed in words.
  localparam int unsigned MEM_W  = 512;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned WORD_DOUBLES = MEM_W / 64;

  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [MEM_W-1:0]  mem_word_t;

  // Field numbering, also the order of the three read and write ports.
  typedef enum logic [1:0] {FIELD_U = 2'd0, FIELD_V = 2'd1, FIELD_W = 2'd2} field_e;

  // Position tag of one grid value leaving the read stage.
  typedef struct packed {
    logic xy_ok;   // x >= 2 and y >= 2 within the chunk: the value completes
                   // the stencil of an interior centre (x-1, y-1)
    logic z_top;   // value is the top of its column (z == nz-1)
    logic last;    // final value of the whole run
    idx_t y;       // y within the chunk face, halo included (0 = left halo)
    idx_t z;       // level within the column
  } elem_tag_t;

  typedef struct packed {
    fp64_t     v;
    elem_tag_t tag;
  } elem_t;

  // 27-point stencil [dx][dy][dz].
  typedef logic [2:0][2:0][2:0][63:0] stencil_t;

  // Tag of a grid cell whose source term is computed.
  typedef struct packed {
    logic top;     // k == nz-1: the column top (upper terms dropped)
    logic bottom;  // k == 0: the ground level, source term defined as zero
    logic last;    // final cell of the run
    idx_t k;       // level of the centre cell
  } cell_tag_t;

  typedef struct packed {
    stencil_t  s;
    cell_tag_t tag;
  } stencil_msg_t;

  typedef struct packed {
    fp64_t     v;
    cell_tag_t tag;
  } result_t;

  // Run-time configuration (kernel arguments). Arrays in memory hold a
  // one-cell halo in x and y: value (x, y, z), x in 0..nx+1, y in 0..ny+1,
  // z in 0..nz-1, sits at double index (x*(ny+2) + y)*nz + z from its base.
  typedef struct packed {
    idx_t  nx;        // interior cells in x
    idx_t  ny;        // interior cells in y
    idx_t  nz;        // column height, a multiple of WORD_DOUBLES, >= 8
    idx_t  chunk_w;   // interior cells in y per chunk (<= buffer size - 2)
    addr_t base_u, base_v, base_w;     // word addresses of the inputs
    addr_t base_su, base_sv, base_sw;  // word addresses of the results
  } cfg_t;

endpackage
