// stencil_pkg: types and constants shared by the stencil accelerator.
//
// Mesh elements are IEEE-754 single-precision floats carried as raw 32-bit
// words (the evaluated designs are all single precision). The external memory
// bus is 512 bits wide, i.e. 16 floats per bus word; a bus burst is limited to
// 4 KB (64 words), the transfer size at which external memory reaches near-peak
// throughput. AXI-style burst lengths use the AXI encoding (beats - 1).
package stencil_pkg;
  typedef logic [31:0] f32_t;

  localparam int unsigned BUS_BITS      = 512;
  localparam int unsigned ELEMS_PER_WORD = BUS_BITS / 32;   // 16 floats
  localparam int unsigned MAX_BURST     = 64;               // 64 x 64 B = 4 KB
  localparam int unsigned ADDR_BITS     = 34;               // 16 GB byte address
  localparam int unsigned DIM_BITS      = 16;               // mesh extent counters
  localparam int unsigned CNT_BITS      = 32;               // beat/word counters

  typedef logic [BUS_BITS-1:0]   word_t;
  typedef logic [ADDR_BITS-1:0]  addr_t;
  typedef logic [DIM_BITS-1:0]   dim_t;

  localparam f32_t F32_HALF   = 32'h3F00_0000;  // 0.5
  localparam f32_t F32_EIGHTH = 32'h3E00_0000;  // 0.125
  localparam f32_t F32_QNAN   = 32'h7FC0_0000;

  // Run configuration of one kernel invocation, written by the host.
  typedef struct packed {
    addr_t       src_base;    // byte address of the input mesh (batch)
    addr_t       dst_base;    // byte address of the ping-pong partner buffer
    dim_t        width;       // mesh extent along x (elements), m
    dim_t        pitch_words; // row pitch in 512-bit words (x padded to 16)
    logic [31:0] rows;        // rows per mesh: n (2D) or n*l (3D)
    dim_t        height;      // 3D: rows per plane n; 2D: unused
    dim_t        planes;      // 3D: planes per mesh l; 2D: unused
    dim_t        batch;       // B meshes stacked in the last dimension
    dim_t        tile_words;  // 2D spatial blocking: tile width in words
    logic [31:0] passes;      // n_iter / p
  } run_cfg_t;
endpackage
