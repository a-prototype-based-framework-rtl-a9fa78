// vespa_pkg: types and constants shared by the frequency-island and
// multi-replica accelerator-tile RTL.
//
// Frequencies are carried as 5-bit codes in 5 MHz units (code 2 = 10 MHz,
// code 20 = 100 MHz), matching the 5 MHz granularity of the islands' clock
// ranges. The DMA control word follows the usual ESP accelerator convention
// of a word index plus a length in words; the exact field widths are this
// design's choice.
package vespa_pkg;

  localparam int unsigned FREQ_W   = 5;   // frequency code width (5 MHz units)
  localparam int unsigned DATA_W   = 64;  // accelerator DMA data width
  localparam int unsigned APB_AW   = 8;   // register-bus address width
  localparam int unsigned APB_DW   = 32;  // register-bus data width
  localparam int unsigned CNT_W    = 32;  // monitoring counter width

  // Frequency islands of the evaluated 4x4 SoC.
  typedef enum logic [2:0] {
    ISL_ACC = 3'd0,   // A1 and A2 accelerator tiles
    ISL_NOC = 3'd1,   // NoC routers and memory tile
    ISL_TG  = 3'd2,   // traffic-generator tiles
    ISL_CPU = 3'd3,   // CPU tile
    ISL_IO  = 3'd4    // auxiliary I/O tile
  } island_e;

  localparam int unsigned N_ISLANDS = 5;

  // DMA request carried on rdCtrl / wrCtrl: start word index and word count.
  typedef struct packed {
    logic [31:0] index;
    logic [31:0] length;
  } dma_ctrl_t;

  localparam int unsigned CTRL_W = $bits(dma_ctrl_t);

  // Monitoring counter indices.
  typedef enum logic [1:0] {
    MON_EXEC = 2'd0,  // execution time (cycles between start and done)
    MON_IN   = 2'd1,  // incoming packets (read-data beats)
    MON_OUT  = 2'd2,  // outgoing packets (rdCtrl, wrCtrl and wrData beats)
    MON_RTT  = 2'd3   // accumulated read round-trip time (cycles)
  } mon_e;

  // Default tile-to-island map of the evaluated SoC, three bits per tile,
  // tile 0 in the low bits: tiles 0 and 1 (A1, A2) in ISL_ACC, all others
  // (the traffic generators) in ISL_TG. Sized for up to 64 tiles.
  localparam int unsigned MAX_TILES = 64;
  function automatic logic [MAX_TILES-1:0][2:0] default_tile_isl();
    logic [MAX_TILES-1:0][2:0] m;
    for (int t = 0; t < MAX_TILES; t++) m[t] = (t < 2) ? ISL_ACC : ISL_TG;
    return m;
  endfunction

endpackage
