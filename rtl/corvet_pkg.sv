// corvet_pkg: types and constants shared by the CORVET vector engine.
//
// Holds the default sizes of the engine (number of processing elements, word
// width, largest layer), the precision and activation-function encodings, the
// per-layer configuration record written by the host, the address layout of the
// parameter stream and the constant tables of the two CORDIC engines (Q.16).
//
// Follows the paper: 64 PEs (Neuron_0..Neuron_63), 4/8/16-bit precision, a
// 32-entry kernel bank per neuron and layer, the seven activation functions and
// the 3-bit function select sel_af[2:0]. This design's own choices: the encoding
// order of the functions and precisions, the number of layers (4), the Q7.8
// format of activations, and the layout of the configuration record.
package corvet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_PE_DEF  = 64;   // processing elements (neurons)
  localparam int unsigned DW        = 16;   // data word (largest precision)
  localparam int unsigned J_MAX_DEF = 32;   // inputs per neuron per layer
  localparam int unsigned L_MAX_DEF = 4;    // layers held in the kernel banks
  localparam int unsigned ACC_W     = 40;   // MAC accumulator width
  localparam int unsigned IT_W      = 5;    // iteration-count field width
  localparam int unsigned SH_W      = 5;    // output shift field width
  localparam int unsigned AF_FRAC   = 8;    // activations are Q7.8

  // ---------------------------------------------------------------- encodings
  typedef enum logic [1:0] {
    PREC_4  = 2'd0,
    PREC_8  = 2'd1,
    PREC_16 = 2'd2
  } precision_e;

  typedef enum logic [2:0] {
    AF_RELU    = 3'd0,
    AF_SIGMOID = 3'd1,
    AF_TANH    = 3'd2,
    AF_SOFTMAX = 3'd3,
    AF_GELU    = 3'd4,
    AF_SWISH   = 3'd5,
    AF_SELU    = 3'd6,
    AF_NONE    = 3'd7
  } af_sel_e;

  // Per-layer configuration register.
  typedef struct packed {
    logic [7:0]      n_neurons;  // N(l), 1..N_PE
    logic [6:0]      n_inputs;   // J(l), 1..J_MAX
    precision_e      prec;       // operand precision
    logic [IT_W-1:0] iters;      // CORDIC iterations per MAC (approx/accurate)
    logic [SH_W-1:0] out_shift;  // requantisation right shift of the accumulator
    logic            af_en;      // pass outputs through the multi-AF block
    af_sel_e         af_sel;     // activation function
  } layer_cfg_t;

  localparam int unsigned CFG_W = $bits(layer_cfg_t);

  // Paper operating points: cycles (= iterations) per MAC.
  function automatic logic [IT_W-1:0] paper_iters(precision_e p, logic accurate);
    case (p)
      PREC_4:  return 5'd4;
      PREC_8:  return accurate ? 5'd5 : 5'd4;
      default: return accurate ? 5'd9 : 5'd7;
    endcase
  endfunction

  function automatic int unsigned prec_bits(precision_e p);
    case (p)
      PREC_4:  return 4;
      PREC_8:  return 8;
      default: return 16;
    endcase
  endfunction

  // Sign-extend the low P bits of a data word.
  function automatic logic signed [DW-1:0] sext_prec(logic [DW-1:0] v, precision_e p);
    case (p)
      PREC_4:  return {{(DW-4){v[3]}}, v[3:0]};
      PREC_8:  return {{(DW-8){v[7]}}, v[7:0]};
      default: return v;
    endcase
  endfunction

  // Saturate a wide signed value to the signed range of precision p.
  function automatic logic [DW-1:0] sat_prec(logic signed [ACC_W-1:0] v, precision_e p);
    logic signed [ACC_W-1:0] hi, lo;
    case (p)
      PREC_4:  begin hi = 7;     lo = -8;     end
      PREC_8:  begin hi = 127;   lo = -128;   end
      default: begin hi = 32767; lo = -32768; end
    endcase
    if (v > hi) return hi[DW-1:0];
    if (v < lo) return lo[DW-1:0];
    return v[DW-1:0];
  endfunction

  // ---------------------------------------------------------------- CORDIC (Q.16)
  localparam int unsigned CF = 16;                 // fraction bits inside the AF unit
  localparam int unsigned CW = 48;                 // word width inside the AF unit
  localparam longint HYP_INV_GAIN = 79135;         // 1/K_h = 1.2074971 for shifts 1..16, 4 and 13 repeated
  localparam longint LN2_Q        = 45426;         // ln 2
  localparam longint INV_LN2_Q    = 94548;         // 1/ln 2
  localparam int unsigned HYP_STEPS = 18;          // 16 shifts + 2 repeats

  // Shift amount of hyperbolic step s (repeats at 4 and 13).
  function automatic int unsigned hyp_shift(int unsigned s);
    if (s < 4)  return s + 1;
    if (s < 14) return s;        // s=4 -> 4 (repeat) ... s=13 -> 13
    return s - 1;                // s=14 -> 13 (repeat) ... s=17 -> 16
  endfunction

  // atanh(2^-i) in Q.16 for i = 1..16 (the LUT of the Z path).
  function automatic logic [CW-1:0] atanh_lut(int unsigned i);
    case (i)
      1:  return 48'd35999;
      2:  return 48'd16739;
      3:  return 48'd8235;
      4:  return 48'd4101;
      5:  return 48'd2049;
      6:  return 48'd1024;
      7:  return 48'd512;
      8:  return 48'd256;
      9:  return 48'd128;
      10: return 48'd64;
      11: return 48'd32;
      12: return 48'd16;
      13: return 48'd8;
      14: return 48'd4;
      15: return 48'd2;
      default: return 48'd1;
    endcase
  endfunction

  // Activation-function constants, Q.16
  localparam longint GELU_T     = 111542;  // 1.702
  localparam longint SWISH_BETA = 65536;   // 1.0
  localparam longint SELU_LAMBDA = 68859;  // 1.0507
  localparam longint SELU_LA     = 115218; // lambda*alpha = 1.75809
  localparam longint X_CLAMP     = 524288; // |x| <= 8.0

endpackage
