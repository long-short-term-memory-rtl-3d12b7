// lstme_pkg -- shared types and helpers of the LSTM neuron equalizer.
//
// Every value that moves between blocks of the equalizer is a signed
// fixed-point number of DW bits with FW fractional bits (Q3.12 by default:
// range -8.0 .. +7.99976, resolution 1/4096). Products are formed at full
// width, accumulated in ACCW bits and brought back to DW bits by an
// arithmetic shift and saturation. The number format is this design's
// choice; the equalizer's algorithm does not fix one.
//
// The package also fixes the order of the four LSTM gates (input, forget,
// cell candidate "g", output -- the order in which the parameter store of the
// reference model lists its outputs Wi,bi,Ri,Wf,...,Ro) and the address map of
// the parameter load bus of lstme_top.
package lstme_pkg;

  localparam int DW   = 16;  // data word width
  localparam int FW   = 12;  // fractional bits
  localparam int ACCW = 40;  // dot-product accumulator width

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [2*DW-1:0] fx_prod_t;
  typedef logic signed [ACCW-1:0] fx_acc_t;

  localparam fx_t FX_MAX  = fx_t'(16'sh7FFF);
  localparam fx_t FX_MIN  = fx_t'(16'sh8000);
  localparam fx_t FX_ONE  = fx_t'(1 <<< FW);
  localparam fx_t FX_HALF = fx_t'(1 <<< (FW - 1));

  // Gate order inside a layer's parameter store.
  typedef enum logic [1:0] {
    GATE_I = 2'd0,  // input gate
    GATE_F = 2'd1,  // forget gate
    GATE_G = 2'd2,  // cell candidate
    GATE_O = 2'd3   // output gate
  } gate_e;
  localparam int N_GATES = 4;

  // Parameter load bus of lstme_top: addr[15:12] selects a region,
  // addr[11:0] is the word offset inside it.
  localparam int PADDR_W  = 16;
  localparam int POFF_W   = 12;
  localparam logic [3:0] REGION_FC  = 4'd14;  // fully connected neuron
  localparam logic [3:0] REGION_FIR = 4'd15;  // FIR post filter
  // regions 0 .. 13 are LSTM layers 0 .. 13

  // Saturate an accumulator value that is already at the Q(FW) scale.
  function automatic fx_t sat_acc(input fx_acc_t v);
    if (v > fx_acc_t'(FX_MAX)) return FX_MAX;
    if (v < fx_acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Full-width product of two Q(FW) values (scale 2^(2*FW)).
  function automatic fx_prod_t fx_mul_full(input fx_t a, input fx_t b);
    fx_prod_t ae, be;
    ae = fx_prod_t'(a);
    be = fx_prod_t'(b);
    return ae * be;
  endfunction

  // Q(FW) product, truncated toward minus infinity and saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    fx_acc_t p;
    p = fx_acc_t'(fx_mul_full(a, b));
    return sat_acc(p >>> FW);
  endfunction

  // Saturating Q(FW) addition.
  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return sat_acc(fx_acc_t'(a) + fx_acc_t'(b));
  endfunction

endpackage
