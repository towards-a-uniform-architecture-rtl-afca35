// dcnn_pkg: types and constants shared by the deconvolution accelerator.
//
// Activations and weights are 16-bit signed fixed-point words (the data width
// used for every benchmark). Products and all partial sums are kept at ACC_W
// bits so that overlap additions, channel reductions and block accumulation
// never lose precision; the 32-bit accumulator width is a choice of this
// design. A result travelling from a PE to the output buffer carries a tag
// giving its coordinates inside the current output block.
package dcnn_pkg;

  localparam int unsigned DATA_W = 16;   // activation / weight width
  localparam int unsigned ACC_W  = 32;   // product and partial-sum width
  localparam int unsigned TAG_W  = 5;    // bits per output-block coordinate
  localparam int unsigned DIM_W  = 16;   // layer dimension fields
  localparam int unsigned ADDR_W = 32;   // external-memory word address

  // index width for x entries, at least one bit
  function automatic int unsigned cw(input int unsigned x);
    return (x > 1) ? $clog2(x) : 1;
  endfunction

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // coordinates of one result inside the output block (row, column, depth)
  typedef struct packed {
    logic [TAG_W-1:0] oh;
    logic [TAG_W-1:0] ow;
    logic [TAG_W-1:0] od;
  } tag_t;

  typedef struct packed {
    acc_t val;
    tag_t tag;
  } res_t;

  // one layer as the host describes it
  typedef struct packed {
    logic              mode3d;   // 1: 3D deconvolution, 0: 2D
    logic [1:0]        stride;   // S, 2 .. SMAX
    logic [DIM_W-1:0]  ih, iw, id;   // input map size (id = 1 for 2D)
    logic [DIM_W-1:0]  nc, mc;       // input / output channels
    logic [DIM_W-1:0]  pad;          // rows/cols/planes cut from the low edge
    logic [DIM_W-1:0]  oh, ow, od;   // kept output size (od = 1 for 2D)
    logic [ADDR_W-1:0] in_base, w_base, out_base;
  } layer_cfg_t;

  // external-memory request, one word per beat, responses return in order
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    acc_t              wdata;
  } mem_req_t;

endpackage
