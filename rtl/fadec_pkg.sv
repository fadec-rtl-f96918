// fadec_pkg: types and constants shared by the FADEC accelerator datapath.
//
// The accelerator computes quantised DNN layers with power-of-two scaling:
// weights are 8-bit, biases 32-bit, per-tensor scales 8-bit and activations
// 16-bit (these widths follow the paper's implementation). Activations live in
// the on-chip data memory in HWC order with channels packed four to a 64-bit
// word (a "channel group"); four lanes is also the degree of channel
// parallelism of the element-wise operators.
//
// The stage descriptor (stage_t) is this design's own format. Each descriptor
// tells the stage sequencer which arithmetic pipeline to run and with which
// tensor addresses, sizes and shift amounts; the list of descriptors replaces
// the model-specific FSM that a high-level synthesis flow would hard-wire.
package fadec_pkg;

  localparam int unsigned W_BITS   = 8;    // weight width
  localparam int unsigned B_BITS   = 32;   // bias width
  localparam int unsigned S_BITS   = 8;    // scale width
  localparam int unsigned A_BITS   = 16;   // activation width
  localparam int unsigned LANES    = 4;    // activations per memory word
  localparam int unsigned WORD_W   = LANES * A_BITS;  // 64-bit memory word
  localparam int unsigned DADDR_W  = 16;   // data memory word address
  localparam int unsigned PADDR_W  = 16;   // parameter memory word address (field width)
  localparam int unsigned DESC_W   = 256;  // stage descriptor width
  localparam int unsigned CG_W     = 10;   // channel-group count / index fields

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [DADDR_W-1:0] daddr_t;
  typedef logic [PADDR_W-1:0] paddr_t;
  typedef logic signed [A_BITS-1:0] act_t;
  typedef logic [CG_W-1:0]    cg_t;    // up to 1023 groups = 4092 channels

  typedef enum logic [3:0] {
    OP_END         = 4'd0,   // end of the stage list
    OP_CONV        = 4'd1,   // convolution (+ReLU / sigmoid)
    OP_ADD         = 4'd2,   // (a<<la)+(b<<lb), rshift, clip
    OP_RSHIFT      = 4'd3,   // rshift, clip (range alignment before concat)
    OP_UPSAMPLE    = 4'd4,   // nearest-neighbour x2
    OP_COPY        = 4'd5,   // channel-group copy: concatenation / slice
    OP_LSTM_CELL   = 4'd6,   // ConvLSTM cell-state update
    OP_LSTM_HIDDEN = 4'd7,   // ConvLSTM hidden-state output
    OP_EXTERN      = 4'd8,   // hand a process to the CPU and wait
    OP_DMA_LOAD    = 4'd9,   // DRAM -> on-chip memory
    OP_DMA_STORE   = 4'd10   // data memory -> DRAM
  } op_e;

  typedef enum logic [2:0] {
    CONV_1_1 = 3'd0, CONV_3_1 = 3'd1, CONV_3_2 = 3'd2, CONV_5_1 = 3'd3, CONV_5_2 = 3'd4
  } conv_sel_e;

  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_SIGMOID = 2'd2} act_e;

  // Stage descriptor. Field use per opcode is documented in the README.
  typedef struct packed {
    logic [17:0] spare;
    logic [7:0]  ext_op;     // OP_EXTERN: opcode handed to the CPU
    logic        dma_param;  // DMA: 1 = parameter memory, 0 = data memory
    logic [19:0] len;        // DMA: number of 64-bit words
    logic [31:0] dram_addr;  // DMA: DRAM byte address (8-byte aligned)
    logic signed [7:0] scale;// conv: per-tensor scale
    logic [4:0]  lb;         // add: left shift of operand b
    logic [4:0]  la;         // add: left shift of operand a
    logic [4:0]  sh3;        // LSTM: fractional bits of the ELU input
    logic [4:0]  sh2;        // LSTM cell: rshift after sigmoid
    logic [4:0]  sh1;        // sigmoid input rshift (to 4 fractional bits)
    logic [4:0]  sh0;        // final rshift r before clip
    cg_t         soff;       // copy: first source group
    cg_t         oc_num;     // conv: output groups computed; copy: groups copied
    cg_t         oc_first;   // conv: first output group; copy: first destination group
    cg_t         cout_g;     // channel groups per pixel of the destination tensor
    cg_t         cin_g;      // channel groups per pixel of the source tensor
    logic [7:0]  w;          // source width
    logic [7:0]  h;          // source height
    logic [15:0] paddr;      // conv: parameter base (biases, then weights)
    logic [15:0] dst;        // destination word address
    logic [15:0] src1;       // second source word address
    logic [15:0] src0;       // first source word address
    act_e        act;        // conv activation
    conv_sel_e   conv_sel;   // conv: which (kernel, stride) pipeline
    op_e         op;
  } stage_t;

  // Memory port bundles (read latency is one cycle).
  typedef struct packed {
    logic   en;
    daddr_t addr;
  } drd_t;

  typedef struct packed {
    logic             en;
    logic [LANES-1:0] lane_en;
    daddr_t           addr;
    word_t            data;
  } dwr_t;

  function automatic act_t lane(input word_t w, input int unsigned i);
    return act_t'(w[i*A_BITS +: A_BITS]);
  endfunction

endpackage
