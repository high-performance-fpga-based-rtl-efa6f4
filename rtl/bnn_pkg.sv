// bnn_pkg: types and constants shared by the Monte Carlo Dropout BNN accelerator.
//
// Data are signed 8-bit integers (linear quantisation); products accumulate in
// 32 bits.  A network is described to the accelerator as a table of layer
// descriptors (layer_desc_t), one per layer, which the controller walks
// layer by layer.  The 8-bit data width is the paper's; the descriptor format,
// the accumulator width and the memory-map conventions are this design's own.
//
// Off-chip memory conventions (word = PC bytes = one memory-bus beat):
//   feature map : word (y*W + x)*CT + ct holds channels ct*PC .. ct*PC+PC-1
//   filter group: BN_BEATS words of batch-norm entries, then K*K*CT*PF words of
//                 weights, word ((ky*K + kx)*CT + ct)*PF + f = filter f's slice
//   BN entry    : 64 bits, [63:48] signed scale, [31:0] signed bias
package bnn_pkg;

  localparam int unsigned DW     = 8;   // data width (8-bit processing)
  localparam int unsigned ACC_W  = 32;  // accumulator width
  localparam int unsigned ADDR_W = 32;  // off-chip word address width
  localparam int unsigned BN_ENTRY_W = 64;

  // Destination of an off-chip read burst issued through the memory interface.
  typedef enum logic [1:0] {
    DST_IBUF = 2'd0,   // input buffer
    DST_WBUF = 2'd1,   // weight buffer
    DST_BN   = 2'd2,   // batch-norm parameter registers
    DST_RES  = 2'd3    // shortcut (residual) FIFO
  } dst_e;

  // One layer of the network.  Linear layers are 1x1 convolutions on a 1x1 map.
  typedef struct packed {
    logic [ADDR_W-1:0] in_addr;   // input feature map
    logic [ADDR_W-1:0] out_addr;  // output feature map (sample 0)
    logic [ADDR_W-1:0] w_addr;    // first filter group (BN entries + weights)
    logic [ADDR_W-1:0] res_addr;  // shortcut operand, laid out like the output
    logic [15:0]       h;         // input height
    logic [15:0]       w;         // input width
    logic [15:0]       ph;        // output height after pooling
    logic [15:0]       pw;        // output width after pooling
    logic [7:0]        ct;        // input channel tiles  C / PC
    logic [7:0]        fg;        // filter groups        F / PF
    logic [3:0]        k;         // kernel size
    logic [3:0]        stride;    // convolution stride
    logic [3:0]        pad;       // zero padding on each side
    logic [3:0]        pool;      // max-pool window side, 1 = no pooling
    logic [4:0]        bn_shift;  // right shift after the BN multiply
    logic              relu_en;
    logic              sc_en;     // add shortcut operand after pooling
  } layer_desc_t;

  function automatic logic signed [DW-1:0] sat8(input logic signed [ACC_W+16:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[DW-1:0];
  endfunction

endpackage
