// dnn_pkg: types and constants shared by the semantic-memory dynamic network.
//
// A ternary value (trit) is stored in the crossbar as a pair of memristors,
// one in the "first part" and one in the "second part" of the array. The
// encoding follows the memristor pairing used by the paper's hardware:
// both cells in the high-resistance state (HRS) mean 0, first cell in the
// low-resistance state (LRS) means +1, second cell in LRS means -1. The two
// bits of trit_e are {first cell LRS, second cell LRS}, so the encoding is
// also the programming pattern of the pair.
//
// layer_cfg_t is one entry of the per-layer configuration table held by the
// top level: the layer geometry, where its weights and semantic centres sit
// in the two crossbars, the digital activation settings and the early-exit
// threshold. The field widths are this design's choice.
package dnn_pkg;

  typedef enum logic [1:0] {
    TRIT_ZERO = 2'b00,
    TRIT_NEG  = 2'b01,
    TRIT_POS  = 2'b10
  } trit_e;

  // Word lines driven in parallel by the DAC/multiplexer front end.
  localparam int PAR_ROWS = 64;
  // Resolution of the source-line ADC.
  localparam int ADC_BITS = 14;
  // Width of the signed accumulators behind the ADC.
  localparam int ACC_W = 24;
  // Width of a crossbar column current in model units.
  localparam int CUR_W = 22;

  typedef struct packed {
    logic [7:0] c_in;          // input channels (rows used in the CIM)
    logic [7:0] c_out;         // output channels = search-vector length
    logic [8:0] cim_row_base;  // first CIM crossbar row of the weights
    logic [8:0] cim_col_base;  // first CIM column pair of the weights
    logic [8:0] cam_row_base;  // first CAM crossbar row of the centres
    logic       pool_en;       // 2:1 max pooling after activation
    logic [4:0] act_shift;     // requantisation right shift
    logic [8:0] threshold;     // cosine exit threshold, Q1.8
  } layer_cfg_t;

  function automatic logic signed [1:0] trit_val(trit_e t);
    case (t)
      TRIT_POS: return 2'sd1;
      TRIT_NEG: return -2'sd1;
      default:  return 2'sd0;
    endcase
  endfunction

endpackage
