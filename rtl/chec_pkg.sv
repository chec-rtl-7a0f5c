// chec_pkg: sizes, camera geometry and link message types shared by the
// camera's digital electronics.
//
// The camera has 2048 pixels in 32 modules of 8x8 pixels. Each module holds
// four 16-channel sampling ASICs and four 16-channel trigger ASICs; a trigger
// patch is a 2x2 group of pixels, giving 16 patches per module and 512 in the
// camera. Modules sit on a 6x6 grid with its four corners left empty (rows of
// 4,6,6,6,6,4 modules), numbered row by row, left to right. Pixel rows 2a and
// 2a+1 of a module go to ASIC a, so ASIC a produces patch row a.
//
// All timing is counted in clk ticks, one tick being one nanosecond, i.e. one
// sample at the nominal 1 GSa/s. The sizes (32 modules, 64 pixels, 16
// channels per ASIC, 12-bit samples, 4096-cell storage, 32 ns blocks, 96 ns
// window) follow the paper; message layout and widths are this design's own.
package chec_pkg;

  localparam int unsigned N_MODULES        = 32;
  localparam int unsigned ASICS_PER_MODULE = 4;
  localparam int unsigned CH_PER_ASIC      = 16;
  localparam int unsigned PIX_PER_MODULE   = ASICS_PER_MODULE * CH_PER_ASIC;  // 64
  localparam int unsigned PATCH_PER_ASIC   = 4;
  localparam int unsigned PATCH_PER_MODULE = ASICS_PER_MODULE * PATCH_PER_ASIC; // 16
  localparam int unsigned ADC_BITS         = 12;
  localparam int unsigned STORAGE_DEPTH    = 4096;  // cells (ns) as configured
  localparam int unsigned CELL_BITS        = $clog2(STORAGE_DEPTH);
  localparam int unsigned BLOCK_NS         = 32;    // readout window granularity
  localparam int unsigned WINDOW_BLOCKS    = 3;     // 96 ns window
  localparam int unsigned GRID             = 6;     // module grid is 6x6
  localparam int unsigned PATCH_GRID       = GRID * 4; // 24x24 patch positions

  typedef logic [ADC_BITS-1:0] sample_t;
  typedef logic [31:0]         event_id_t;
  typedef logic [31:0]         timestamp_t;

  // Message carried by the serial readout / re-sync link.
  typedef enum logic [1:0] {
    MSG_NONE    = 2'd0,
    MSG_READOUT = 2'd1,  // read the window belonging to 'timestamp'
    MSG_RESYNC  = 2'd2   // load the module counter from 'timestamp'
  } msg_kind_e;

  typedef struct packed {
    msg_kind_e  kind;
    event_id_t  event_id;
    timestamp_t timestamp;
  } link_msg_t;

  localparam int unsigned MSG_BITS = $bits(link_msg_t);  // 66

  // Position of module m on the 6x6 grid (corners empty).
  function automatic int module_row(input int m);
    if (m < 4)       return 0;
    else if (m < 28) return 1 + (m - 4) / 6;
    else             return 5;
  endfunction

  function automatic int module_col(input int m);
    if (m < 4)       return 1 + m;
    else if (m < 28) return (m - 4) % 6;
    else             return 1 + (m - 28);
  endfunction

  // Patch q (0..15, row-major 4x4 inside the module) of module m on the
  // 24x24 camera patch grid.
  function automatic int patch_row(input int m, input int q);
    return module_row(m) * 4 + q / 4;
  endfunction

  function automatic int patch_col(input int m, input int q);
    return module_col(m) * 4 + q % 4;
  endfunction

  // Inverse: flat patch index (m*16+q) at grid position (r,c), -1 if none
  // or if the module is beyond n_modules.
  function automatic int patch_at(input int r, input int c, input int n_modules);
    for (int m = 0; m < n_modules; m++)
      if (module_row(m) == r / 4 && module_col(m) == c / 4)
        return m * 16 + (r % 4) * 4 + (c % 4);
    return -1;
  endfunction

  // Sampling-ASIC channel c of ASIC a maps to module pixel (row, col) and to
  // trigger patch output c%8/2 of the matching trigger ASIC.
  function automatic int pixel_row(input int a, input int c);
    return 2 * a + c / 8;
  endfunction

  function automatic int pixel_col(input int c);
    return c % 8;
  endfunction

endpackage
