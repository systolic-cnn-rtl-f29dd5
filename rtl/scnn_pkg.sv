// scnn_pkg: types and constants shared by the Systolic-CNN accelerator.
//
// The three architectural parameters default to the Arria 10 configuration:
// PE_NUM = 16 PEs in the 1-D systolic array, VEC_FAC = 16 channels per
// SIMD inner-product step and REUSE_FAC = 4 inner-product units per PE.
// All arithmetic is IEEE-754 single precision (fp32_t).  A layer is described
// to the hardware at run time by layer_cfg_t, which the host fills in once per
// layer; nothing in the hardware depends on the CNN model.
//
// Off-chip memory is seen as words of VEC_FAC fp32 values (512 bits at the
// defaults, one burst).  A feature map of C channels, H rows and W columns is
// stored channel-group major: word address = base + (g*H + y)*W + x, where
// g = channel / VEC_FAC and the word holds channels g*VEC_FAC .. +VEC_FAC-1.
// Weights of output channel o are NV = CG*K*K consecutive words, word
// v = (g*K + ky)*K + kx, starting at wt_base + o*NV.  These layouts, the
// configuration fields and the widths are this design's choices.
package scnn_pkg;

  localparam int unsigned PE_NUM_DEF    = 16;
  localparam int unsigned VEC_FAC_DEF   = 16;
  localparam int unsigned REUSE_FAC_DEF = 4;
  // Weight-cache depth per PE in words of VEC_FAC values (assumed; large
  // enough for AlexNet FC6, 9216 inputs = 576 words).
  localparam int unsigned WBUF_DEPTH_DEF = 1024;

  localparam int unsigned AW = 32;   // word address width

  typedef logic [31:0]   fp32_t;
  typedef logic [AW-1:0] addr_t;

  typedef enum logic [0:0] {
    OP_CONV = 1'b0,   // convolution or fully connected layer (+ELTWISE, ReLU)
    OP_POOL = 1'b1    // max or average pooling
  } op_e;

  typedef struct packed {
    op_e          op;
    logic [15:0]  in_w;       // IFM width  (row dimension, x)
    logic [15:0]  in_h;       // IFM height (column dimension, y)
    logic [15:0]  in_cg;      // IFM channel groups = ceil(C_in / VEC_FAC)
    logic [15:0]  out_w;      // OFM width
    logic [15:0]  out_h;      // OFM height
    logic [15:0]  out_c;      // OFM channels (conv) ; pool keeps in_cg
    logic [4:0]   k;          // kernel size c (conv) or pool window (pool)
    logic [3:0]   stride;
    logic [3:0]   pad;        // padding on each side (zeros for conv, skipped for pool)
    logic [7:0]   rw;         // outputs per block along x: reuse_fac, or batch size for FC
    logic         relu_en;
    logic         elt_en;     // add the residual map at res_base (ELTWISE)
    logic         pool_avg;   // pool: average instead of maximum
    fp32_t        pool_scale; // pool: 1/(window size) for averaging
    addr_t        ifm_base;
    addr_t        wt_base;
    addr_t        ofm_base;
    addr_t        res_base;
  } layer_cfg_t;

  // Control that travels with every IFM window through the systolic array.
  typedef struct packed {
    logic        valid;      // a window entry was shifted in this cycle
    logic        comp;       // the IP units accumulate this cycle
    logic        first;      // first accumulation of an output block
    logic        last;       // last accumulation of an output block
    logic [15:0] waddr;      // weight-cache word used this cycle
    logic [7:0]  nv;         // valid outputs of the block (with last)
  } win_ctrl_t;

endpackage
