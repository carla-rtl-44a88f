// carla_cu: convolution unit (CU) of the CARLA accelerator.
//
// A CU holds NPE processing elements (3 in CUs #0..#63, 4 in the last CU) and
// one S/P SRAM pair per PE. Every PE multiplies its register R by the same
// word x, taken from this CU's pipeline register PRn. The unit works in two
// configurations:
//
//  * 3x3 (serial accumulation, MODE_3X3): R0..R2 hold one filter row. PE #0
//    starts an output with x*R0 plus the partial result read from S (MUX A0
//    picks bank S0, S1 or S2 by address) or zero; the sum moves through ACC0
//    and ACC1, gaining x*R1 and x*R2 on the next two words, and PE #2's sum is
//    written two cycles after PE #0 started it. MUX B0/B1 let PE #2 write any
//    of the banks, so a sub-out-fmap may span NPE*DEPTH addresses. M0 and M2
//    zero the products that fall on zero padding at row ends.
//  * 1x1 (MODE_1X1, MODE_1X1_SMALL): every PE works alone. PE #i adds its
//    product to S_i[addr] (or to zero for the first channel) and writes the
//    result back in the same cycle.
//
// When the tag marks the last contribution to an output, the result is
// narrowed to 16 bits by saturation and written to the P bank instead of S.
// P banks are read out through the p_* port, one word per clock, data one
// clock after p_re.
//
// Timing: the S read for the word that will be in PRn next cycle is issued
// from tag_nxt, so the read data meets the word at PE #0. ACC registers and
// the write pipeline move only on clocks with en high; R loads on ld alone.
// `active` low suppresses all SRAM writes (the last CU in 3x3 mode).
// The datapath follows Fig. 2-4 of the paper; the tag-driven control, the
// synchronous SRAM timing and the saturating narrowing are this design's.
module carla_cu
  import carla_pkg::*;
#(
  parameter int NPE   = 3,
  parameter int DEPTH = 224,
  localparam int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int BBITS = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  mode_e                mode,
  input  logic                 active,
  input  logic                 ld,
  input  logic [NPE-1:0][DW-1:0] ld_data,
  input  logic [DW-1:0]        x,
  input  tag_t                 tag,      // tag of the word now in PRn
  input  tag_t                 tag_nxt,  // tag of the word entering PRn
  input  logic                 p_re,
  input  logic [BBITS-1:0]     p_bank,
  input  logic [ABITS-1:0]     p_addr,
  output logic [DW-1:0]        p_rdata
);

  logic serial;
  assign serial = (mode == MODE_3X3);

  // ---------------------------------------------------------------- S reads
  logic [BBITS-1:0] rd_bank_nxt, rd_bank_q;
  logic [ABITS-1:0] rd_idx_nxt;
  logic [NPE-1:0][AW-1:0] s_rdata;

  always_comb begin
    if (serial) begin
      rd_bank_nxt = BBITS'(32'(tag_nxt.addr) / DEPTH);
      rd_idx_nxt  = ABITS'(32'(tag_nxt.addr) % DEPTH);
    end else begin
      rd_bank_nxt = '0;
      rd_idx_nxt  = ABITS'(tag_nxt.addr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_bank_q <= '0;
    else        rd_bank_q <= rd_bank_nxt;
  end

  // ------------------------------------------- write stage for serial mode
  // Output started by PE #0 is written by PE #2 two words later.
  tag_t d1, d2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
    end else if (en) begin
      d1 <= tag;
      d2 <= d1;
    end
  end

  // ---------------------------------------------------------------- PEs
  logic [NPE-1:0][AW-1:0] sum, acc;
  logic [NPE-1:0][DW-1:0] r;
  asel_e                  asel [NPE];
  logic  [NPE-1:0]        zero;
  logic  [NPE-1:0][AW-1:0] s_in, prev;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      zero[i] = 1'b0;
      prev[i] = (i == 0) ? '0 : acc[(i == 0) ? 0 : i-1];
      s_in[i] = s_rdata[i];
      if (tag.first || !tag.out_valid) asel[i] = ASEL_ZERO;
      else                             asel[i] = ASEL_SRAM;
    end
    if (serial) begin
      zero[0] = tag.zero_m0;
      if (NPE > 2) zero[2] = tag.zero_m2;
      s_in[0] = s_rdata[rd_bank_q];           // MUX A0 inputs S0..S2
      for (int i = 1; i < NPE; i++)
        asel[i] = (i < 3) ? ASEL_PREV : ASEL_ZERO;
    end
  end

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    carla_pe #(.HAS_ZERO_MUX(i == 0 || i == 2)) u_pe (
      .clk, .rst_n, .en,
      .ld       (ld),
      .ld_data  (ld_data[i]),
      .x        (x),
      .zero     (zero[i]),
      .asel     (asel[i]),
      .prev_acc (prev[i]),
      .s_rd     (s_in[i]),
      .sum      (sum[i]),
      .acc      (acc[i]),
      .r        (r[i])
    );
  end

  // ---------------------------------------------- write muxes B0/B1 and SRAMs
  logic [BBITS-1:0] wr_bank_serial;
  logic [ABITS-1:0] wr_idx_serial;
  assign wr_bank_serial = BBITS'(32'(d2.addr) / DEPTH);
  assign wr_idx_serial  = ABITS'(32'(d2.addr) % DEPTH);

  logic [NPE-1:0]            s_we, p_we;
  logic [NPE-1:0][ABITS-1:0] w_idx;
  logic [NPE-1:0][AW-1:0]    w_data;
  logic [NPE-1:0][DW-1:0]    p_rd;
  logic [BBITS-1:0]          p_bank_q;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      if (serial) begin
        // B mux: bank i takes PE #2's sum
        w_data[i] = sum[(NPE > 2) ? 2 : NPE-1];
        w_idx[i]  = wr_idx_serial;
        s_we[i]   = en && active && d2.out_valid && !d2.last && (wr_bank_serial == BBITS'(i));
        p_we[i]   = en && active && d2.out_valid &&  d2.last && (wr_bank_serial == BBITS'(i));
      end else begin
        w_data[i] = sum[i];
        w_idx[i]  = ABITS'(tag.addr);
        s_we[i]   = en && active && tag.out_valid && !tag.last;
        p_we[i]   = en && active && tag.out_valid &&  tag.last;
      end
    end
  end

  for (genvar i = 0; i < NPE; i++) begin : g_bank
    carla_sram #(.WIDTH(AW), .DEPTH(DEPTH)) u_s (
      .clk,
      .we    (s_we[i]),
      .waddr (w_idx[i]),
      .wdata (w_data[i]),
      .re    (1'b1),
      .raddr (rd_idx_nxt),
      .rdata (s_rdata[i])
    );
    carla_sram #(.WIDTH(DW), .DEPTH(DEPTH)) u_p (
      .clk,
      .we    (p_we[i]),
      .waddr (w_idx[i]),
      .wdata (sat_dw(w_data[i])),
      .re    (p_re && p_bank == BBITS'(i)),
      .raddr (p_addr),
      .rdata (p_rd[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    p_bank_q <= '0;
    else if (p_re) p_bank_q <= p_bank;
  end
  assign p_rdata = p_rd[p_bank_q];

endmodule
