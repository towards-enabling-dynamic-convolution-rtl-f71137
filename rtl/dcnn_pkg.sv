// dcnn_pkg: constants, types and helper functions shared by the dynamic LeNet-5
// inference design.
//
// Number format. The host sends every value (image pixel, weight, bias) as a
// 32-bit signed integer equal to the real value times 2^FRAC. Inside, values
// are 16-bit signed fixed point with FRAC fraction bits (Q7.8). Products are
// Q15.16 and are summed in a 48-bit accumulator; a layer result is shifted back
// by FRAC, passed through ReLU where the layer has one, and saturated to 16 bits.
// The original work converts the streamed integers back to floating point; this
// design keeps them in fixed point instead.
//
// Geometry. The 28x28 input and the 6 filters of 5x5 in the first convolution
// come from the evaluated network. The remaining layers follow the common MNIST
// LeNet-5: conv 16x5x5, 2x2 max pooling after each convolution, and fully
// connected layers 256-120-84-10.
//
// static_param() gives the contents of on-chip (non-streamed) parameter
// memories. Trained values are not available, so a fixed hash of the layer
// number and word index stands in for them; it yields small values in
// [-24, 23] (about +/-0.09) so that activations stay in range.
package dcnn_pkg;

  localparam int DATA_W   = 16;
  localparam int FRAC     = 8;
  localparam int STREAM_W = 32;
  localparam int ACC_W    = 48;

  typedef logic signed [DATA_W-1:0]   data_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic signed [STREAM_W-1:0] word_t;

  // LeNet-5 geometry
  localparam int IMG_H  = 28;
  localparam int IMG_W  = 28;
  localparam int KSZ    = 5;
  localparam int C1_NF  = 6;
  localparam int C1_HO  = IMG_H - KSZ + 1;   // 24
  localparam int S2_HO  = C1_HO / 2;         // 12
  localparam int C3_NF  = 16;
  localparam int C3_HO  = S2_HO - KSZ + 1;   // 8
  localparam int S4_HO  = C3_HO / 2;         // 4
  localparam int F5_N   = 120;
  localparam int F6_N   = 84;
  localparam int F7_N   = 10;

  localparam int IMG_WORDS = IMG_H * IMG_W;

  // Layer numbers used for the on-chip parameter formula
  localparam int LID_C1 = 0;
  localparam int LID_C3 = 1;
  localparam int LID_F5 = 2;
  localparam int LID_F6 = 3;
  localparam int LID_F7 = 4;
  localparam int LID_BIAS = 8;   // added to the layer number for bias memories

  // Integer stream word -> internal fixed point, saturating.
  function automatic data_t int_to_fix(input word_t v);
    if (v > word_t'(32767))       return data_t'(16'sh7fff);
    else if (v < word_t'(-32768)) return data_t'(16'sh8000);
    else                          return data_t'(v[DATA_W-1:0]);
  endfunction

  // Accumulator (2*FRAC fraction bits) -> layer output: shift, ReLU, saturate.
  function automatic data_t acc_to_out(input acc_t a, input bit relu);
    acc_t s;
    s = a >>> FRAC;
    if (relu && s < 0)            return '0;
    else if (s > acc_t'(32767))   return data_t'(16'sh7fff);
    else if (s < acc_t'(-32768))  return data_t'(16'sh8000);
    else                          return data_t'(s[DATA_W-1:0]);
  endfunction

  // Stand-in for trained on-chip parameters.
  function automatic data_t static_param(input int layer, input int idx);
    logic [31:0] h;
    h = 32'(idx) * 32'd2654435761 + 32'(layer) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return data_t'(int'(h % 32'd48) - 24);
  endfunction

endpackage
