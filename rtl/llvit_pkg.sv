// llvit_pkg: sizes, types and model-constant functions shared by the LL-ViT
// accelerator RTL.
//
// The sizes are those of the I-ViT-T backbone the accelerator is built for
// (D = 192 latent channels, N = 197 tokens, 12 encoder layers) and of the
// LUT channel mixer's main configuration (8-bit thermometer code, LUT layers
// of 768 and 192 neurons, 4-bit encoded values, 32 x 32 systolic array).
// The number of heads (3) and the LUT fan-in (6) are not fixed by the
// channel-mixer description: 3 is the DeiT-T head count, 6 one FPGA LUT6.
//
// A trained model fixes the LUT connection map, the LUT truth tables and the
// thermometer thresholds at synthesis time (they become wiring and logic,
// not memory). Here they are produced by a deterministic hash, mix32(), so
// the RTL elaborates without a trained model: replace lut_conn(), lut_init()
// and thermo_threshold() with tables generated from a trained network.
package llvit_pkg;

  localparam int unsigned D_MODEL  = 192;  // latent dimension
  localparam int unsigned N_TOKENS = 197;  // 14*14 patches + class token
  localparam int unsigned N_LAYERS = 12;
  localparam int unsigned N_HEADS  = 3;
  localparam int unsigned SA_P     = 32;   // systolic array is SA_P x SA_P
  localparam int unsigned THERMO_B = 8;    // thermometer bits per channel
  localparam int unsigned LUT1_N   = 768;  // LUT neurons in layer 1
  localparam int unsigned LUT2_N   = 192;  // LUT neurons in layer 2 (last)
  localparam int unsigned LUT_K    = 6;    // inputs per LUT neuron (<= 6)
  localparam int unsigned ENC_W    = 4;    // encoded-value precision

  // Weight memories reachable through the load port of an encoder layer.
  typedef enum logic [3:0] {
    MEM_WQ  = 4'd0,   // D x D, addr = row*D + col, int8
    MEM_WK  = 4'd1,
    MEM_WV  = 4'd2,
    MEM_WO  = 4'd3,   // multi-head concat projection
    MEM_G1  = 4'd4,   // LayerNorm 1 gamma, addr = channel
    MEM_B1  = 4'd5,   // LayerNorm 1 beta
    MEM_G2  = 4'd6,   // LayerNorm 2 gamma
    MEM_B2  = 4'd7,   // LayerNorm 2 beta
    MEM_ENC = 4'd8    // encoded values W_ij, addr = j*D + i, int4 in bits 3:0
  } mem_sel_e;

  // 32-bit integer hash (xorshift-multiply), elaboration-time constant.
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] x;
    x = v ^ 32'h9E37_79B9;
    x = x ^ (x >> 16);
    x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15);
    x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Index of the previous-layer bit feeding input k of LUT n of layer `layer`.
  function automatic int unsigned lut_conn(input int unsigned layer, input int unsigned n,
                                           input int unsigned k, input int unsigned in_w);
    return int'(mix32((layer << 24) ^ (n << 4) ^ k) % in_w);
  endfunction

  // Truth table of LUT n of layer `layer`; bit a is the output for address a.
  function automatic logic [63:0] lut_init(input int unsigned layer, input int unsigned n);
    return {mix32((layer << 24) ^ (n << 1) ^ 32'h4000_0001),
            mix32((layer << 24) ^ (n << 1) ^ 32'h4000_0000)};
  endfunction

  // Threshold t (0..tb-1) of channel c: evenly spread over the int8 range
  // with a small per-channel offset; strictly increasing in t.
  function automatic int thermo_threshold(input int unsigned c, input int unsigned t,
                                          input int unsigned tb);
    int base, off;
    base = -128 + ((int'(t) + 1) * 256) / (int'(tb) + 1);
    off  = int'(mix32(c ^ 32'h0100_0000) % 7) - 3;
    return base + off;
  endfunction

  function automatic int sat(input longint v, input int unsigned w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

endpackage
