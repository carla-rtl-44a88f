// carla_pe: one processing element of a CARLA convolution unit.
//
// The PE holds one operand in its register R (a filter weight in the 3x3 and
// small-map 1x1 modes, an input feature in the 1x1 mode) and multiplies it by
// the word on the shared pipeline input PRn every cycle. MUX M (M0 in PE #0,
// M2 in PE #2, present when HAS_ZERO_MUX=1) can replace the product by zero;
// this is how zero padding at in-fmap row ends costs no clock cycles. MUX A
// selects the adder's other operand: zero, the ACC register of the previous PE
// (serial accumulation for 3x3 filters) or a partial result read from the S
// SRAM. The sum is offered combinationally on `sum` (to the SRAM write muxes)
// and captured in ACC when `en` is high.
//
// Timing: R loads on any clock with `ld` high, independent of `en`, so a CU
// can be refilled during a pipeline stall. ACC updates on clocks with `en`.
// The structure is the one drawn in the paper; the 16x16 product is added in
// 24-bit two's complement arithmetic and wraps on overflow, which is this
// design's choice (the paper gives only the word lengths).
module carla_pe
  import carla_pkg::*;
#(
  parameter bit HAS_ZERO_MUX = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,        // pipeline advances: capture ACC
  input  logic          ld,        // load R from ld_data
  input  logic [DW-1:0] ld_data,
  input  logic [DW-1:0] x,         // shared multiplier operand PRn
  input  logic          zero,      // MUX M: force product to zero
  input  asel_e         asel,      // MUX A select
  input  logic [AW-1:0] prev_acc,  // ACC of the previous PE
  input  logic [AW-1:0] s_rd,      // partial result from S SRAM
  output logic [AW-1:0] sum,
  output logic [AW-1:0] acc,
  output logic [DW-1:0] r
);

  logic signed [2*DW-1:0] prod;
  logic        [AW-1:0]   m_out;
  logic        [AW-1:0]   addend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  r <= '0;
    else if (ld) r <= ld_data;
  end

  always_comb begin
    prod  = signed'(r) * signed'(x);
    m_out = (HAS_ZERO_MUX && zero) ? '0 : prod[AW-1:0];
    unique case (asel)
      ASEL_PREV: addend = prev_acc;
      ASEL_SRAM: addend = s_rd;
      default:   addend = '0;
    endcase
    sum = addend + m_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
  end

endmodule
