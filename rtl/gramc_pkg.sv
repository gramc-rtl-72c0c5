// gramc_pkg: types and constants shared by the GRAMC analog matrix computing system.
//
// The system is a digital controller around a group of reconfigurable analog matrix
// computing (AMC) macros. Sizes that the paper gives are the defaults here: 16 macros,
// 128 x 128 RRAM arrays, 16 conductance levels (4-bit cells) spanning 1-100 uS.
// The instruction format, the buffer word widths and the converter resolutions are not
// given in the paper and are this design's own choice.
package gramc_pkg;

  // Sizes from the paper.
  localparam int unsigned N_MACROS    = 16;   // "a group of 16 AMC macros"
  localparam int unsigned ARRAY_N     = 128;  // "The size of RRAM array is ... 128 x 128"
  localparam int unsigned LEVEL_BITS  = 4;    // "16-level (4-bit) conductance states"
  localparam int unsigned N_LEVELS    = 16;

  // Own choices (the paper does not give them).
  localparam int unsigned DAC_BITS    = 8;    // signed DAC input code
  localparam int unsigned ADC_BITS    = 12;   // signed ADC output code
  localparam int unsigned DATA_W      = 16;   // output-buffer / functional-unit word
  localparam int unsigned GBUF_W      = 8;    // global-buffer word (DAC code or ideal level)
  localparam int unsigned ADDR_W      = 16;   // buffer address
  localparam int unsigned MAX_PULSES  = 64;   // default write-pulse limit per cell
  localparam int unsigned SLICE_SHIFT = 4;    // bit slicing: MSB array holds the upper 4 bits

  // Computing functions of an AMC macro ("MVM, INV, PINV or EGV").
  typedef enum logic [1:0] {
    MODE_MVM  = 2'd0,
    MODE_INV  = 2'd1,
    MODE_PINV = 2'd2,
    MODE_EGV  = 2'd3
  } mode_e;

  // Instruction opcodes.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_CFG   = 4'd1,  // write the register array of a macro (mode, active region)
    OP_WV    = 4'd2,  // write-verify the active region of a macro from the global buffer
    OP_SOLVE = 4'd3,  // run the configured computation, results to the output buffer
    OP_FUNC  = 4'd4,  // digital functional module on output-buffer data
    OP_HALT  = 4'd15
  } opcode_e;

  // Operations of the digital functional module.
  typedef enum logic [2:0] {
    FOP_RELU  = 3'd0,  // activation
    FOP_MAXP  = 3'd1,  // max pooling over groups of POOL consecutive words
    FOP_SHADD = 3'd2,  // bit-slice recombination: (msb << SLICE_SHIFT) + lsb
    FOP_COPY  = 3'd3,
    FOP_ADD   = 3'd4,  // partial sums of a matrix split over two arrays
    FOP_SUB   = 3'd5   // differential pair: positive minus negative weight array
  } fop_e;

  // 64-bit instruction word.
  //   rows/cols : active region (1..128); for FUNC, rows is the element count
  //   src/dst   : buffer addresses; for WV, dst[7:0] is a pulse limit (0 = MAX_PULSES)
  typedef struct packed {
    opcode_e     op;     // [63:60]
    logic [3:0]  macro;  // [59:56]
    mode_e       mode;   // [55:54]
    logic [7:0]  rows;   // [53:46]
    logic [7:0]  cols;   // [45:38]
    logic [15:0] src;    // [37:22]
    logic [15:0] dst;    // [21:6]
    fop_e        fop;    // [5:3]
    logic [2:0]  rsvd;   // [2:0]
  } instr_t;

  // Contents of one macro's register array.
  typedef struct packed {
    mode_e      mode;
    logic [7:0] rows;   // active rows, 1..ARRAY_N
    logic [7:0] cols;   // active columns, 1..ARRAY_N
  } macro_cfg_t;

  // Write pulse issued to a cell.
  typedef struct packed {
    logic       set;    // 1: SET (step V_g, V_BL = V_set, V_SL = 0); 0: RESET (step V_SL)
    logic [7:0] step;   // amplitude step index of V_g (SET) or V_SL (RESET)
  } pulse_t;

endpackage
