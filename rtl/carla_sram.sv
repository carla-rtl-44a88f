// carla_sram: one on-chip SRAM bank of a CARLA convolution unit.
//
// Each PE owns a pair of banks: a wide S bank (24-bit words) that keeps partial
// results while a sub-out-fmap is being computed, and a narrow P bank (16-bit
// words) that receives the final output features and is read out to DRAM while
// the next sub-out-fmap is computed. Both are this module with different WIDTH.
// The paper sizes each bank at 224 words. Port structure is this design's
// choice: one write port and one synchronous read port (data one clock after
// re), read-during-write to the same address returns the old word.
module carla_sram #(
  parameter int WIDTH = 24,
  parameter int DEPTH = 224,
  localparam int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [ABITS-1:0] waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [ABITS-1:0] raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
