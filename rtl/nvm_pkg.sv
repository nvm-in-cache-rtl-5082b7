// Shared types and constants of the 6T-2R NVM-in-cache PIM macro.
//
// The analog bias voltages of the array are abstracted to a few named levels.
// Wordlines and bitlines use lvl_t: ground (0 V), nominal (0.8 V) or the 2 V
// programming overdrive.  Powerlines (VDD1/VDD2 columns) use pl_t, which adds
// the reference level supplied by the weighted configuration circuit (WCC)
// during PIM sampling and a sense state used by the post-programming verify
// read.  The controller walks the array through bias phases (phase_t); every
// peripheral decodes the phase into its own line levels.
package nvm_pkg;

  // Array geometry: 128 rows x 128 four-bit words (= 128 x 512 bit-cells).
  localparam int unsigned ROWS_DEF   = 128;
  localparam int unsigned WORDS_DEF  = 128;
  localparam int unsigned WBITS      = 4;   // weight precision (bits per word)
  localparam int unsigned IA_BITS    = 4;   // input-activation precision
  localparam int unsigned ADC_BITS   = 6;   // SAR ADC resolution
  localparam int unsigned CUR_W      = 8;   // current count of one column, 0..128

  // Wordline / bitline level.
  typedef enum logic [1:0] {
    LV_GND = 2'd0,   // 0 V
    LV_NOM = 2'd1,   // nominal 0.8 V (an IA=1 pulse is also this level)
    LV_OD  = 2'd2    // 2 V overdrive used for RRAM programming
  } lvl_t;

  // Powerline (VDD1 / VDD2 column) state.
  typedef enum logic [2:0] {
    PL_GND   = 3'd0, // grounded (LRS programming)
    PL_NOM   = 3'd1, // nominal 0.8 V supply (hold, SRAM access)
    PL_REF   = 3'd2, // WCC reference voltage, current is collected (PIM)
    PL_OD    = 3'd3, // 2 V (HRS programming)
    PL_SENSE = 3'd4  // supply with current measured (verify read)
  } pl_t;

  typedef enum logic {
    SIDE_L = 1'b0,   // left half: WL1, BL, R_LEFT, VDD1, holds when Q=1
    SIDE_R = 1'b1    // right half: WL2, BLB, R_RIGHT, VDD2, holds when Q=0
  } side_t;

  // Bias phase driven by the controller.
  typedef enum logic [3:0] {
    PH_HOLD       = 4'd0,
    PH_SRAM_WR    = 4'd1,
    PH_SRAM_RD    = 4'd2,
    PH_PROG_HRS   = 4'd3,  // both RRAMs of the row to HRS (one 4 ns pulse)
    PH_PROG_LRS_L = 4'd4,  // R_LEFT to LRS where the weight bit is 1
    PH_PROG_LRS_R = 4'd5,  // R_RIGHT to LRS where the weight bit is 1
    PH_VERIFY     = 4'd6,  // verify read of R_LEFT (side L) or R_RIGHT (side R)
    PH_PIM_A      = 4'd7,  // 1.5 ns: WL low, BLx high, VDDx to WCC reference
    PH_PIM_B      = 4'd8,  // 1 ns: WLx = IA, V1=V2=0, current sampled on VDDx
    PH_PIM_C      = 4'd9,  // VDDx and Vx restored
    PH_PIM_D      = 4'd10  // the other V restored: back to SRAM hold
  } phase_t;

  typedef enum logic [1:0] {
    CMD_SRAM_WR = 2'd0,
    CMD_SRAM_RD = 2'd1,
    CMD_PROG    = 2'd2,
    CMD_PIM     = 2'd3
  } cmd_t;

  // Ideal 8:4:2:1 weight of word bit b; bit 0 is the word's first column (MSB).
  function automatic int unsigned wcc_weight(int unsigned b);
    return 1 << (WBITS - 1 - b);
  endfunction

endpackage
