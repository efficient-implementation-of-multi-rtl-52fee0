// conv3d_pkg: sizes, widths and helper types shared by the 3D ReRAM
// convolution tile.
//
// The crossbar is a horizontally integrated monolithic 3D ReRAM stack of
// NUM_LAYERS memristor layers. Voltage planes (WLs) and current planes (BLs)
// alternate and each plane is shared by the two layers next to it:
//   layer 2k   lies between voltage plane k   and current plane k
//   layer 2k+1 lies between current plane k   and voltage plane k+1
// so a stack of NUM_LAYERS layers has NUM_LAYERS/2+1 voltage planes and
// NUM_LAYERS/2 current planes. The 16-layer stack is the configuration the
// paper evaluates; every other size here (crossbar rows/columns, bit widths,
// buffer depth, engines per tile) is this design's own choice, because the
// paper does not give one.
package conv3d_pkg;

  // ---- 3D crossbar geometry -------------------------------------------
  parameter int unsigned NUM_LAYERS = 16;                 // paper: 16-layer 3D ReRAM
  parameter int unsigned NUM_VP     = NUM_LAYERS / 2 + 1; // voltage planes
  parameter int unsigned NUM_CP     = NUM_LAYERS / 2;     // current planes
  parameter int unsigned XB_ROWS    = 128;                // c: WLs per voltage plane (assumed)
  parameter int unsigned XB_COLS    = 128;                // n: BLs per current plane (assumed)
  parameter int unsigned MAX_POS    = NUM_LAYERS;         // kernel positions one pass can hold
  parameter int unsigned KPOS_BITS  = 8;                  // cfg_kpos width: kernels up to 255 positions (15x15)

  // ---- number formats ---------------------------------------------------
  parameter int unsigned PIX_BITS = 8;   // unsigned image pixel = DAC code (assumed)
  parameter int unsigned W_BITS   = 8;   // signed kernel weight (assumed)
  parameter int unsigned G_BITS   = 8;   // conductance level = |weight| (0..128)
  parameter int unsigned ADC_BITS = 16;  // signed ADC result, saturating (assumed)

  // ---- tile -------------------------------------------------------------
  parameter int unsigned NUM_PE    = 4;     // processing engines per tile (4 drawn in Fig. 4)
  parameter int unsigned BUF_DEPTH = 8192;  // eDRAM buffer words (assumed)
  parameter int unsigned ADDR_BITS = $clog2(BUF_DEPTH);

  // Current of one current plane / one accumulated group, wide enough to be exact.
  function automatic int unsigned cur_bits(int unsigned rows, int unsigned layers);
    return PIX_BITS + G_BITS + $clog2(2 * rows) + $clog2(layers) + 1;
  endfunction

  // Buffer word: the wider of an input column (rows x 8 bit) and an output
  // column (cols x ADC_BITS).
  function automatic int unsigned buf_bits(int unsigned rows, int unsigned cols, int unsigned adc);
    return (rows * PIX_BITS > cols * adc) ? rows * PIX_BITS : cols * adc;
  endfunction

  // Controller phases, exported for status/debug.
  typedef enum logic [3:0] {
    ST_IDLE,
    ST_CLEAR,
    ST_LOADW_REQ,
    ST_LOADW_WAIT,
    ST_PROG,
    ST_IMG_REQ,
    ST_IMG_WAIT,
    ST_ACC_REQ,
    ST_ACC_WAIT,
    ST_PE_RUN,
    ST_DONE
  } ctrl_state_e;

endpackage
