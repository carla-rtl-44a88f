// carla_pkg: types and constants shared by the CARLA convolution accelerator.
//
// Word lengths follow the reported implementation: 16-bit weights and features,
// 24-bit accumulators and partial results. The per-element control tag that
// travels down the input pipeline next to each datum, the configuration record
// of one convolutional layer and the DRAM port records are this design's own
// choices; the paper does not describe its control encoding.
package carla_pkg;

  localparam int DW      = 16;   // weight / feature / output word
  localparam int AW      = 24;   // accumulator and partial-result word
  localparam int TAG_AW  = 10;   // SRAM address carried in a tag (3 banks x 224 words)
  localparam int DRAM_AW = 32;   // word address into off-chip DRAM

  // Operating modes (Sections III-A, III-B, III-C).
  typedef enum logic [1:0] {
    MODE_3X3       = 2'd0,   // serial accumulation, features in the pipeline
    MODE_1X1       = 2'd1,   // independent PEs, features in PE registers
    MODE_1X1_SMALL = 2'd2    // independent PEs, weights in PE registers
  } mode_e;

  // Selection of the adder's second operand (MUX A0/A1/A2).
  typedef enum logic [1:0] {
    ASEL_ZERO = 2'd0,
    ASEL_PREV = 2'd1,   // ACC register of the previous PE (serial accumulation)
    ASEL_SRAM = 2'd2    // partial result read back from the S SRAM
  } asel_e;

  // Source of the word entering pipeline register PR0.
  typedef enum logic [2:0] {
    SRC_ZERO = 3'd0,    // bubble or pad row
    SRC_IN0  = 3'd1,    // Input #0 from DRAM
    SRC_FB0  = 3'd2,    // feedback taps 0..5 (see carla_input_pipe)
    SRC_FB1  = 3'd3,
    SRC_FB2  = 3'd4,
    SRC_FB3  = 3'd5,
    SRC_FB4  = 3'd6,
    SRC_FB5  = 3'd7
  } src_e;

  // Control tag travelling with each pipeline word.
  typedef struct packed {
    logic              zero_m0;   // MUX M0: replace PE #0 product by zero
    logic              zero_m2;   // MUX M2: replace PE #2 product by zero
    logic              out_valid; // the output addressed below is a real one
    logic              first;     // first contribution: adder takes zero, not S
    logic              last;      // last contribution: result goes to the P SRAM
    logic [TAG_AW-1:0] addr;      // S/P SRAM address of that output
  } tag_t;

  // One convolutional layer, set by the host before start.
  typedef struct packed {
    mode_e              mode;
    logic [7:0]         il;       // in-fmap length IL (square maps)
    logic [11:0]        ic;       // input channels IC
    logic [11:0]        k;        // filters K
    logic [7:0]         rows;     // 3x3: output rows per sub-out-fmap
    logic               s2;       // 1x1 modes: filter stride 2 (OL = ceil(IL/2))
    logic [DRAM_AW-1:0] in_base;  // in-fmap  x_c(r,col) at in_base + (c*IL + r)*IL + col
    logic [DRAM_AW-1:0] w_base;   // filters  w_c^k(j,i)  at w_base + ((k*IC + c)*FL + j)*FL + i
    logic [DRAM_AW-1:0] out_base; // out-fmap y_k(r,col)  at out_base + (k*OL + r)*OL + col
  } layer_cfg_t;

  typedef struct packed {
    logic               valid;
    logic [DRAM_AW-1:0] addr;
  } dram_rd_req_t;

  typedef struct packed {
    logic               valid;
    logic [DRAM_AW-1:0] addr;
    logic [DW-1:0]      data;
  } dram_wr_t;

  // Narrowing of a 24-bit result into the 16-bit P SRAM word: saturation.
  function automatic logic [DW-1:0] sat_dw(input logic [AW-1:0] v);
    logic signed [AW-1:0] s;
    s = signed'(v);
    if (s > AW'(signed'(16'sh7fff)))       return 16'h7fff;
    else if (s < AW'(signed'(-16'sh8000))) return 16'h8000;
    else                                   return v[DW-1:0];
  endfunction

endpackage
