// mevit_pkg: types, constants and small arithmetic helpers shared by the
// ME-ViT processing element (ME-PE), its arithmetic units and the multi-PE top.
//
// Number formats used throughout (this design's own choices; the paper sizes
// its buffers in bytes and packs two 16-bit products per DSP, so operands are
// 8-bit, but it gives no fixed-point scaling):
//   activations  int8, 4 fractional bits
//   weights      int8, 7 fractional bits
//   products are accumulated in 32-bit two's complement and brought back to
//   int8 by an arithmetic right shift and saturation (see sat8).
package mevit_pkg;

  // Commands a host issues to one ME-PE. LP, MSA and MLP are the paper's three
  // modes; LOAD_F / LOAD_L fill the Feature / Layer buffers with the input
  // patches and position embedding, STORE streams the Layer buffer out.
  typedef enum logic [2:0] {
    CMD_LOAD_F = 3'd0,
    CMD_LOAD_L = 3'd1,
    CMD_LP     = 3'd2,
    CMD_MSA    = 3'd3,
    CMD_MLP    = 3'd4,
    CMD_STORE  = 3'd5
  } cmd_e;

  // Saturate a signed value to int8.
  function automatic logic signed [7:0] sat8(input logic signed [39:0] v);
    if (v > 40'sd127)       return 8'sd127;
    else if (v < -40'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // Saturate to the score range used by the Pseudo-Softmax, [-64, 63], so that
  // the exponent of a sum of up to 512 powers of two stays inside float32.
  function automatic logic signed [7:0] sat_score(input logic signed [39:0] v);
    if (v > 40'sd63)       return 8'sd63;
    else if (v < -40'sd64) return -8'sd64;
    else                   return v[7:0];
  endfunction

endpackage
