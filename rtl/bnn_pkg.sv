// bnn_pkg -- types and constants shared by the binarized-network engine.
//
// The engine runs one network layer at a time from a small table of layer
// descriptors. A descriptor says which of the three PE operating modes the
// layer uses, how many output positions and channels it has, how a patch is
// streamed (steps per patch, words between consecutive patches) and where the
// layer's filters live in the filter memory.
//
// The mode encoding (first = 0, mid = 1, last = 2) is the select value printed
// on the PE multiplexers of the architecture drawing; the descriptor layout,
// the field widths and the fixed element widths below are this design's choice.
package bnn_pkg;

  // Width of every counter/size field of a layer descriptor.
  localparam int unsigned CNT_W = 16;
  // Full-precision input samples of the first layer (packed M/DATA_W per word).
  localparam int unsigned DATA_W = 16;
  // Full-precision weights of a last layer (16-bit, packed M/WGT_W per word).
  localparam int unsigned WGT_W = 16;
  // Width of the class scores captured from a final layer.
  localparam int unsigned SCORE_W = 32;

  // PE operating mode; values are the multiplexer selects of the PE datapath.
  typedef enum logic [1:0] {
    MODE_FIRST = 2'd0,  // full-precision data, binary filter: acc +/-= sample
    MODE_MID   = 2'd1,  // binary data, binary filter: acc += pcnt(xnor)
    MODE_LAST  = 2'd2   // binary data, 16-bit filter: acc +/-= weight
  } layer_mode_e;

  typedef struct packed {
    layer_mode_e       mode;
    logic              maxpool;     // OR-pool pairs of positions, enables pool skipping
    logic              final_layer; // capture accumulators as class scores, write no map
    logic [CNT_W-1:0]  n_pos;       // output positions before pooling
    logic [CNT_W-1:0]  n_steps;     // PE steps per patch (words in mid mode, elements otherwise)
    logic [CNT_W-1:0]  pos_stride;  // input words between the patches of two positions
    logic [CNT_W-1:0]  n_cout;      // output channels (filters)
    logic [CNT_W-1:0]  filt_base;   // filter-memory word address of filter 0
    logic [CNT_W-1:0]  filt_words;  // filter-memory words per filter
    logic [CNT_W-1:0]  in_bits;     // mid mode: valid low bits per input word, 0 = all M
    logic [CNT_W-1:0]  acc_init;    // signed start value of every accumulation
  } layer_desc_t;

endpackage
