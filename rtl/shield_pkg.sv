// shield_pkg: types and constants shared by the segmented eDRAM workspace.
//
// A BF16 word is split into two segments: the 9 most significant bits
// (sign + 8-bit exponent), which always live in the standard-refresh bank,
// and the 7-bit mantissa, which lives in the relaxed-refresh bank for
// persistent K/V tensors and in the refresh-less bank for transient Q/O
// tensors. The field widths and the two refresh intervals (45 us and
// 1216 us) follow the published architecture; the clock frequency, the
// workspace split between KV and QO and the row size are choices of this
// implementation.
package shield_pkg;

  // BF16 field layout
  localparam int unsigned BF16_W  = 16;
  localparam int unsigned SE_W    = 9;   // sign + exponent, bits [15:7]
  localparam int unsigned MANT_W  = 7;   // mantissa, bits [6:0]

  // Refresh intervals in microseconds
  localparam int unsigned T_STD_US = 45;
  localparam int unsigned T_REL_US = 1216;

  // Clock assumed for the workspace (MHz); turns intervals into cycles
  localparam int unsigned CLK_MHZ_DEFAULT = 1000;

  // Default capacity: a 2 MB workspace = 1 Mi BF16 words, split evenly
  // between the persistent KV region and the transient QO region.
  localparam int unsigned KV_WORDS_DEFAULT  = 524288;
  localparam int unsigned QO_WORDS_DEFAULT  = 524288;
  localparam int unsigned ROW_WORDS_DEFAULT = 256;

  // Tensor that a request belongs to
  typedef enum logic [1:0] {
    TENSOR_Q = 2'd0,
    TENSOR_K = 2'd1,
    TENSOR_V = 2'd2,
    TENSOR_O = 2'd3
  } tensor_e;

  // K and V persist across the context window; Q and O live inside a layer
  function automatic logic is_persistent(tensor_e t);
    return (t == TENSOR_K) || (t == TENSOR_V);
  endfunction

endpackage
