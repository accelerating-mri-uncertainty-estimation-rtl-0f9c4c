// uivim_pkg: types, sizes and fixed-point helpers shared by the uIVIM-NET
// accelerator.
//
// Numbers follow the evaluated configuration: 16-bit fixed point with 4
// integer bits (Q4.12, sign included in the integer bits), 4 sub-networks of
// 3 linear layers each (two hidden layers and a one-neuron encoder), 4
// samplings, 32 processing elements, voxels of up to 128 b-values, batches of
// 64 voxels and 20k voxels held on chip. The rounding rule (arithmetic shift,
// i.e. truncation toward minus infinity, then saturation) is this design's
// own choice.
package uivim_pkg;

  localparam int unsigned DATA_W    = 16;  // word width of data, weights, biases
  localparam int unsigned FRAC_W    = 12;  // fractional bits (4 integer bits)
  localparam int unsigned N_SUBNET  = 4;   // sub-networks: D, f, D*, S0
  localparam int unsigned N_LAYER   = 3;   // linear layers per sub-network
  localparam int unsigned LAYER_ENC = 2;   // index of the encoder layer

  typedef logic signed [DATA_W-1:0] fix_t;

  // Requantise a wide accumulator whose binary point sits at 2*FRAC_W back to
  // Q4.12, with saturation to the 16-bit range.
  function automatic fix_t requant(input logic signed [63:0] acc);
    logic signed [63:0] s;
    s = acc >>> FRAC_W;
    if (s > 64'sd32767)       return fix_t'(16'sh7fff);
    else if (s < -64'sd32768) return fix_t'(16'sh8000);
    else                      return fix_t'(s[DATA_W-1:0]);
  endfunction

  // Ceiling division for elaboration-time sizes.
  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Width of a counter or address that must hold 0 .. n-1 (at least 1 bit).
  function automatic int unsigned aw(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
