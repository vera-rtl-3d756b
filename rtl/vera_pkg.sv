// vera_pkg: sizes, types and the external-memory layout shared by the VeRA+
// drift-compensation datapath.
//
// VeRA+ adds a small digital correction to every layer of a network whose
// backbone weights sit in a drifting RRAM array:
//   y = W(t) X  +  b_k ⊙ ( B_R ( d_k ⊙ ( A_R X ) ) )
// A_R (r x Cin) and B_R (Cout x r) are shared by all layers and all drift
// levels; only the two vectors b_k (Cout) and d_k (r) change per layer and
// per drift level k. The defaults describe the configuration the design was
// sized for: rank r = 1, 11 drift sets, ResNet-20 with W4A4 quantisation.
// The rank, the set count and the 4-bit weights/activations follow the
// paper; layer count and channel maxima are those of ResNet-20 on CIFAR-100;
// parameter width, output width and the memory map are this design's choice.
package vera_pkg;

  // ---- network / compensation sizes --------------------------------------
  localparam int unsigned RANK     = 1;    // low-rank dimension r
  localparam int unsigned NSETS    = 11;   // pre-trained (b_k, d_k) sets
  localparam int unsigned NLAYERS  = 20;   // 19 conv layers + 1 FC layer
  localparam int unsigned DIN_MAX  = 64;   // widest input channel count
  localparam int unsigned DOUT_MAX = 100;  // widest output count (FC, 100 classes)
  localparam int unsigned KK       = 9;    // kernel taps of a 3x3 convolution
  localparam int unsigned CTAP     = 4;    // centre tap: input of the 1x1 branch

  // ---- number formats -----------------------------------------------------
  localparam int unsigned AW  = 4;   // activation bits (unsigned, post-ReLU)
  localparam int unsigned WW  = 4;   // RRAM weight bits (signed)
  localparam int unsigned PW  = 8;   // compensation parameter bits (signed)
  localparam int unsigned YW  = 32;  // output accumulator bits (signed)
  localparam int unsigned TW  = 32;  // elapsed-time bits (seconds)
  localparam int unsigned EAW = 24;  // external-memory byte address bits
  localparam int unsigned SHIFT = 8; // right shift applied to the compensation term

  // ---- SRAM-IMC parameter regions -----------------------------------------
  typedef enum logic [1:0] {
    SEL_A    = 2'd0,   // A_max,   index r*DIN_MAX + i
    SEL_BMAT = 2'd1,   // B_max,   index j*RANK + r
    SEL_BVEC = 2'd2,   // b_k,     index layer*DOUT_MAX + j
    SEL_DVEC = 2'd3    // d_k,     index layer*RANK + r
  } psel_e;

  // ---- one layer operation ------------------------------------------------
  typedef struct packed {
    logic [7:0] layer;   // layer index (selects RRAM region and b/d vectors)
    logic [7:0] din;     // input channels of this layer (columns of A_max used)
    logic [7:0] dout;    // output channels of this layer (rows of B_max used)
    logic [3:0] in_idx;  // input-buffer entry holding X
    logic [3:0] out_idx; // output-buffer entry receiving y
  } cmd_t;

  // ---- external memory layout (bytes, one parameter per byte) -------------
  // [A_max][B_max][set 0: b of all layers, d of all layers][set 1]...
  function automatic int unsigned shared_words(int unsigned r, int unsigned din_max,
                                               int unsigned dout_max);
    return r*din_max + dout_max*r;
  endfunction

  function automatic int unsigned set_words(int unsigned r, int unsigned nlayers,
                                            int unsigned dout_max);
    return nlayers*dout_max + nlayers*r;
  endfunction

endpackage
