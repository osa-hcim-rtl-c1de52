// osa_pkg -- constants and types shared by the hybrid saliency-aware CIM macro.
//
// The macro array is 64 rows x 144 columns of 6T SRAM. It is split into 8 hybrid
// MAC units (HMUs), one per output channel. Every HMU holds 144 hybrid CIM arrays
// (HCIMAs, one per column), and each HCIMA stores one 8-bit weight (or two 4-bit
// weights). DMAC, the digital partial sum of one 1-bit MAC, comes from the digital
// adder tree. AMAC, the analog partial sum, is a 3-bit SAR-ADC code. RS is the
// 3-bit normalized/quantized DMAC sent to the saliency evaluator (OSE). The OSE
// chooses the digital-to-analog boundary B_D/A from 6 candidate values.
// The numbers 8, 144, 3-bit AMAC, 3-bit RS, 6 candidates and the 4-order analog
// window follow the paper's description. The widths of the saliency register,
// of the accumulator and of the configuration fields are this design's choices.
package osa_pkg;

  // Array organisation
  localparam int unsigned N_HMU    = 8;    // hybrid MAC units (output channels)
  localparam int unsigned N_COL    = 144;  // HCIMAs (columns) per HMU
  localparam int unsigned N_ROW    = 8;    // SRAM bits per HCIMA
  localparam int unsigned ROW_AW   = $clog2(N_HMU * N_ROW); // 6-bit row address
  localparam int unsigned MAX_WB   = 8;    // maximum weight precision
  localparam int unsigned MAX_AB   = 8;    // maximum activation precision

  // Partial sums
  localparam int unsigned DMAC_W   = $clog2(N_COL + 1); // 8 bits hold 0..144
  localparam int unsigned AMAC_W   = 3;    // SAR-ADC resolution
  localparam int unsigned RS_W     = 3;    // N/Q output width
  localparam int unsigned ALVL_W   = 4;    // analog activation: 1..4 bits per cycle
  localparam int unsigned AWIN     = 4;    // analog window: B-4 <= k < B

  // Saliency evaluator
  localparam int unsigned NB       = 6;    // number of B_D/A candidates (B0..B5)
  localparam int unsigned BDA_W    = 4;    // B_D/A is an output order 0..14
  localparam int unsigned S_W      = 12;   // saliency accumulator width

  // Result accumulator: 8b x 8b x 144 needs 24 bits; 2 spare bits absorb the
  // over-range of the analog reconstruction.
  localparam int unsigned ACC_W    = 26;

  // Bit-index width (0..7) and shift width (0..14 plus analog offset)
  localparam int unsigned BIT_W    = 3;
  localparam int unsigned SH_W     = 5;

  typedef logic [DMAC_W-1:0] dmac_t;
  typedef logic [AMAC_W-1:0] amac_t;
  typedef logic [RS_W-1:0]   rs_t;
  typedef logic [BDA_W-1:0]  bda_t;
  typedef logic [S_W-1:0]    sal_t;
  typedef logic [ACC_W-1:0]  acc_t;
  typedef logic [ALVL_W-1:0] alvl_t;

  // Operating state of the macro
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_RW      = 3'd1,   // normal SRAM read/write (RWen high)
    ST_SAL     = 3'd2,   // saliency evaluation mode: highest-order 1-bit MACs
    ST_SAL_END = 3'd3,   // drain DMAC pipeline, OSE settles B_D/A
    ST_COMP    = 3'd4,   // computing mode: DCIM and ACIM concurrently
    ST_DRAIN   = 3'd5,   // wait for last DMAC/AMAC to reach the accumulator
    ST_DONE    = 3'd6
  } state_e;

  // Run-time configuration of one multi-bit MAC operation
  typedef struct packed {
    logic [3:0]  w_bits;     // weight precision, 4 or 8
    logic [3:0]  a_bits;     // activation precision, 4 or 8
    logic        w_half;     // 4-bit weights: 0 = rows 0..3, 1 = rows 4..7
    logic [1:0]  s_orders;   // number of highest output orders used by the OSE (1..3)
    logic [2:0]  nq_shift;   // N/Q right shift of DMAC before 3-bit saturation
  } op_cfg_t;

  // Tag that travels with a digital 1-bit MAC through the DAT register stage
  typedef struct packed {
    logic            valid;
    logic            sal;    // issued in saliency evaluation mode
    logic [SH_W-1:0] k;      // output order i+j
    logic [1:0]      order;  // k minus the lowest OSE order (OSE shift)
  } dtag_t;

endpackage
