// carla_input_pipe: pipelined input registers with feedback paths.
//
// NST registers PR0..PR(NST-1) (65 = U+1 in the main configuration) carry the
// word that every CU multiplies by its PE registers: input features in the
// 3x3 and small-map 1x1 modes, filter weights in the 1x1 mode. Each word moves
// one register per clock with en high, so CU #n sees the stream n clocks after
// CU #0. The word leaving the last register enters a delay chain of five
// segments (19, 84, 14, 16 and 26 registers, as printed in the paper's figure).
// The input multiplexer at PR0 chooses Input #0, zero, or one of six feedback
// taps: the last pipeline register and the end of each chain segment. A word
// fed back through tap t re-enters PR0 exactly TAP_DELAY[t] clocks after it
// first did: 65, 84, 168, 182, 198 or 224 with the default sizes. The 3x3
// dataflow uses this to replay input rows shared by consecutive filter rows
// instead of fetching them again from DRAM.
//
// A control tag (tag_t) moves with each word through PR0..PR(NST-1); it does
// not enter the delay chain, the controller sends a fresh one with each word.
// tag_nxt[n] is the tag that PRn will hold after the next clock, used by the
// CUs to issue SRAM reads one cycle ahead.
//
// The segment lengths are the figure's; where the taps sit is read from the
// drawing as one tap per segment end, which is this design's interpretation.
module carla_input_pipe
  import carla_pkg::*;
#(
  parameter int NST = 65,
  parameter int SEG0 = 19,
  parameter int SEG1 = 84,
  parameter int SEG2 = 14,
  parameter int SEG3 = 16,
  parameter int SEG4 = 26
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  src_e               src,
  input  logic [DW-1:0]      in0,
  input  tag_t               tag_in,
  output logic [NST-1:0][DW-1:0] pr,
  output tag_t               tag_q   [NST],
  output tag_t               tag_nxt [NST]
);

  localparam int C1 = SEG0;
  localparam int C2 = C1 + SEG1;
  localparam int C3 = C2 + SEG2;
  localparam int C4 = C3 + SEG3;
  localparam int C5 = C4 + SEG4;   // total chain length

  logic [C5-1:0][DW-1:0] fb;
  logic [DW-1:0]         d0;

  always_comb begin
    unique case (src)
      SRC_IN0: d0 = in0;
      SRC_FB0: d0 = pr[NST-1];
      SRC_FB1: d0 = fb[C1-1];
      SRC_FB2: d0 = fb[C2-1];
      SRC_FB3: d0 = fb[C3-1];
      SRC_FB4: d0 = fb[C4-1];
      SRC_FB5: d0 = fb[C5-1];
      default: d0 = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr <= '0;
      fb <= '0;
    end else if (en) begin
      pr <= {pr[NST-2:0], d0};
      fb <= {fb[C5-2:0], pr[NST-1]};
    end
  end

  always_comb begin
    for (int n = 0; n < NST; n++) begin
      if (!en)        tag_nxt[n] = tag_q[n];
      else if (n == 0) tag_nxt[n] = tag_in;
      else            tag_nxt[n] = tag_q[(n == 0) ? 0 : n-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NST; n++) tag_q[n] <= '0;
    end else begin
      for (int n = 0; n < NST; n++) tag_q[n] <= tag_nxt[n];
    end
  end

endmodule
