// carla_ctrl: controller of the CARLA convolution accelerator.
//
// The controller runs one convolutional layer from a layer_cfg_t record:
// 3x3 filters with stride 1, or 1x1 filters with stride 1 or 2. It produces, every clock, one element for the input pipeline and at
// most one CU register load, fetches the words they need from DRAM over the
// four read buses, and copies finished sub-out-fmaps from the P SRAMs to DRAM.
//
// Element generation, by mode:
//  * MODE_3X3 (Sec. III-A). Loop order: filter group (U filters, one per CU),
//    sub-out-fmap (`rows` output rows), input channel, filter row j (a "pass"),
//    input row, column. A pass streams the input rows that filter row j needs;
//    zero-pad rows are skipped. Each element carries the M0 flag on the last
//    column and the M2 flag on the first, and the SRAM address, first and last
//    flags of the output that PE #0 starts with it, which is the output whose
//    centre is the next element of the stream (one element of lookahead). An
//    input row already streamed in the previous pass of the same channel is
//    taken from the pipeline's feedback tap whose delay equals the distance
//    between its two uses, if one does; otherwise it is fetched again. At the
//    start of each pass the weights of filter row j are loaded into CU #n, n
//    clocks after the first element, three words per clock on Inputs #1..#3.
//    A pass shorter than U elements is padded with zero rows that write
//    nothing, so that these loads never overlap.
//  * MODE_1X1 (Sec. III-B). Loop order: filter group, group of U*N+1 output
//    positions, input channel, step s = 0..U. Steps 0..U-1 send weight k = s of
//    the group into the pipeline and load three features into CU #s; step U
//    sends a bubble (the stall) and loads four features into the last CU over
//    all four buses. U+1 clocks per channel.
//  * MODE_1X1_SMALL (Sec. III-C). Loop order: group of 3U filters, input
//    channel, position. The IL*IL features of a channel flow through the
//    pipeline, padded with bubbles to U clocks, while each CU #n (n < U) is
//    loaded with the channel's weights of filters 3n..3n+2 of the group.
//
// Double buffering of results (paired SRAMs): when the last element of a
// sub-out-fmap has been sent, the controller waits until it has left the
// pipeline and then reads the P SRAMs out, one word per clock, onto the DRAM
// write port while the next sub-out-fmap is computed. Final results are only
// written during the last input channel, so the controller holds (sends
// bubbles) before starting the last channel of a sub-out-fmap while the
// previous one is still being read out.
//
// Timing: DRAM reads have a fixed latency of one clock; every control output
// to the pipeline and CUs (pipe_src, pipe_tag, ld_valid, ld_cu) is registered
// so that it meets its data. The p_* read port returns data one clock later;
// the DRAM write follows on the next clock.
//
// What the paper gives: the dataflows, loop structure, load schedule, stall
// cycle and feedback reuse. This design's own: the tag encoding, the address
// layout in DRAM, the lookahead, the zero-row padding of short passes, the
// automatic tap choice, the one-word-per-clock read-out and the hold.
// Stride 2 is handled for 1x1 layers only (the ResNet transition layers), by
// fetching the features of every second row and column; the output positions
// and everything after the fetch are those of a stride-1 layer of size OL.
// Not implemented: stride-2 3x3 layers and the 7x7 (split filter) schedule of
// Sec. III-D.
module carla_ctrl
  import carla_pkg::*;
#(
  parameter int U     = 64,    // CUs with NPE PEs; one more CU has NPE+1 PEs
  parameter int NPE   = 3,
  parameter int DEPTH = 224,
  parameter int SEG0  = 19,
  parameter int SEG1  = 84,
  parameter int SEG2  = 14,
  parameter int SEG3  = 16,
  parameter int SEG4  = 26,
  localparam int NCU   = U + 1,
  localparam int CUBITS = $clog2(NCU),
  localparam int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int BBITS = $clog2(NPE + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 busy,
  output logic                 done,
  // DRAM reads, data returns on the next clock
  output dram_rd_req_t         rd_req [4],
  // pipeline and CU control, aligned with the DRAM data
  output logic                 pipe_en,
  output src_e                 pipe_src,
  output tag_t                 pipe_tag,
  output logic                 ld_valid,
  output logic [CUBITS-1:0]    ld_cu,
  // P SRAM read-out
  output logic                 p_re,
  output logic [CUBITS-1:0]    p_cu,
  output logic [BBITS-1:0]     p_bank,
  output logic [ABITS-1:0]     p_addr,
  input  logic [DW-1:0]        p_rdata,
  output dram_wr_t             wr
);

  localparam int NPOS = U * NPE + NPE + 1;   // output positions per 1x1 sub-out-fmap
  localparam int FLUSH = NCU + 4;            // clocks for an element to leave the CUs
  localparam int TAPS = 6;
  localparam int TAP_D [TAPS] = '{NCU, NCU + SEG0, NCU + SEG0 + SEG1,
                                  NCU + SEG0 + SEG1 + SEG2,
                                  NCU + SEG0 + SEG1 + SEG2 + SEG3,
                                  NCU + SEG0 + SEG1 + SEG2 + SEG3 + SEG4};

  // ------------------------------------------------------------ descriptors
  typedef struct packed {
    logic               elem;      // a real element (not a bubble)
    src_e               src;
    logic [DRAM_AW-1:0] in0_addr;
    logic               zero_m0;
    logic               zero_m2;
    logic               o_valid;   // own output (1x1 modes) / centred output (3x3)
    logic               o_first;
    logic               o_last;
    logic [TAG_AW-1:0]  o_addr;
    logic               pass_start;
    logic [11:0]        p_kb;      // pass info for the load sequencer
    logic [11:0]        p_c;
    logic [1:0]         p_j;
    logic               ld;        // 1x1: load attached to this element
    logic [CUBITS-1:0]  ld_cu;
    logic [3:0]         ld_bus;
    logic [3:0][DRAM_AW-1:0] ld_addr;
    logic               job_end;   // last element of a sub-out-fmap
  } desc_t;

  mode_e mode;
  assign mode = cfg.mode;

  // W: in-fmap row length. OLW, F: out-fmap row length and size; they differ
  // from W and W*W only for stride-2 1x1 layers (OL = ceil(IL/2)).
  logic [7:0]  W, OLW;
  logic [15:0] F;
  assign W   = cfg.il;
  assign OLW = (cfg.s2 && cfg.mode != MODE_3X3) ? 8'((9'(cfg.il) + 9'd1) >> 1) : cfg.il;
  assign F   = 16'(OLW) * 16'(OLW);

  // DRAM address of the in-fmap feature of channel ch under output position
  // pos of a 1x1 layer: x_ch(S*r, S*col) with r, col the row and column of pos.
  function automatic logic [DRAM_AW-1:0] x_addr(input logic [11:0] ch, input logic [15:0] pos);
    logic [15:0] r, cl;
    r  = pos / 16'(OLW);
    cl = pos % 16'(OLW);
    if (cfg.s2) begin
      r  = r << 1;
      cl = cl << 1;
    end
    return cfg.in_base + (DRAM_AW'(ch) * DRAM_AW'(W) + DRAM_AW'(r)) * DRAM_AW'(W) + DRAM_AW'(cl);
  endfunction

  // generator counters
  logic        run, gen_done;
  logic [11:0] kb;        // first filter of the group
  logic [15:0] ob;        // 3x3: first output row o0; 1x1: first position
  logic [11:0] c;
  logic [1:0]  j;
  logic [7:0]  rr;
  logic [7:0]  col;
  logic [15:0] pl;        // elements sent in this pass / step s / position e
  logic [15:0] prev_len;
  logic [7:0]  prev_rlo, prev_rhi;

  // ---------------------------------------------------- 3x3 pass geometry
  logic [7:0]  rp, rlo, rhi, nreal, r;
  logic        real_row;
  logic [15:0] fb_dist;
  logic        fb_ok;
  src_e        fb_src;
  logic [7:0]  orow;
  logic [7:0]  oabs;

  always_comb begin
    logic [15:0] rem;
    logic [15:0] lo, hi;
    rem   = 16'(W) - ob;
    rp    = (rem < 16'(cfg.rows)) ? rem[7:0] : cfg.rows;
    lo    = ob + 16'(j);
    rlo   = (lo == 0) ? 8'd0 : 8'(lo - 1);
    hi    = ob + 16'(j) + 16'(rp) - 16'd2;
    rhi   = (hi > 16'(W) - 1) ? W - 8'd1 : hi[7:0];
    nreal = rhi - rlo + 8'd1;
    real_row = (rr < nreal);
    r     = rlo + rr;
    fb_dist  = prev_len + (16'(prev_rlo) - 16'(rlo)) * 16'(W);
    fb_ok  = 1'b0;
    fb_src = SRC_IN0;
    if (j != 0) begin
      for (int t = 0; t < TAPS; t++) begin
        if (fb_dist == 16'(TAP_D[t]) && !fb_ok) begin
          fb_ok  = 1'b1;
          fb_src = src_e'(3'(int'(SRC_FB0) + t));
        end
      end
    end
    oabs = r + 8'd1 - 8'(j);
    orow = oabs - ob[7:0];
  end

  // ------------------------------------------------ next element (generator)
  desc_t g;
  logic  hold;
  logic  g_row_end, g_pass_end, g_chan_end, g_job_end, g_all_end, g_chan_start;
  logic [15:0] period;

  always_comb begin
    logic [15:0] pos;
    logic [11:0] kk;
    g = '0;
    g.src = SRC_ZERO;
    g.zero_m0 = 1'b1;
    g.zero_m2 = 1'b1;
    g_row_end = 1'b0; g_pass_end = 1'b0; g_chan_end = 1'b0;
    g_job_end = 1'b0; g_all_end = 1'b0; g_chan_start = 1'b0;
    period = (F > 16'(U)) ? F : 16'(U);
    pos = '0;
    kk  = '0;
    unique case (mode)
      MODE_3X3: begin
        g.elem     = 1'b1;
        g.zero_m0  = (col == W - 8'd1);
        g.zero_m2  = (col == 8'd0);
        g.pass_start = (rr == 0) && (col == 0);
        g.p_kb = kb; g.p_c = c; g.p_j = j;
        if (real_row) begin
          if (fb_ok && r <= prev_rhi) g.src = fb_src;
          else begin
            g.src = SRC_IN0;
            g.in0_addr = cfg.in_base + (DRAM_AW'(c) * DRAM_AW'(W) + DRAM_AW'(r)) * DRAM_AW'(W)
                         + DRAM_AW'(col);
          end
          g.o_valid = 1'b1;
          g.o_addr  = TAG_AW'(16'(orow) * 16'(W) + 16'(col));
          g.o_first = (c == 0) && (j == ((oabs == 0) ? 2'd1 : 2'd0));
          g.o_last  = (c == cfg.ic - 1) && (j == ((16'(oabs) == 16'(W) - 1) ? 2'd1 : 2'd2));
        end
        g_row_end    = (col == W - 8'd1);
        g_pass_end   = g_row_end && (rr + 8'd1 >= nreal) && (pl + 16'd1 >= 16'(U));
        g_chan_end   = g_pass_end && (j == 2'd2);
        g_job_end    = g_chan_end && (c == cfg.ic - 1);
        g_all_end    = g_job_end && (ob + 16'(cfg.rows) >= 16'(W)) && (kb + 12'(U) >= cfg.k);
        g_chan_start = (j == 0) && (rr == 0) && (col == 0);
      end
      MODE_1X1: begin
        g.elem = 1'b1;
        g.zero_m0 = 1'b0;
        g.zero_m2 = 1'b0;
        g.ld = 1'b1;
        if (pl < 16'(U)) begin
          kk = kb + 12'(pl);
          g.ld_cu = CUBITS'(pl);
          if (kk < cfg.k) begin
            g.src = SRC_IN0;
            g.in0_addr = cfg.w_base + DRAM_AW'(kk) * DRAM_AW'(cfg.ic) + DRAM_AW'(c);
            g.o_valid = 1'b1;
          end
          g.o_addr  = TAG_AW'(pl);
          g.o_first = (c == 0);
          g.o_last  = (c == cfg.ic - 1);
          for (int i = 0; i < NPE; i++) begin
            pos = ob + pl * 16'(NPE) + 16'(i);
            g.ld_bus[i+1]  = (pos < F);
            g.ld_addr[i+1] = x_addr(c, pos);
          end
        end else begin
          // stall: no weight enters, the last CU is filled on all four buses
          g.ld_cu = CUBITS'(U);
          for (int i = 0; i < NPE + 1; i++) begin
            pos = ob + 16'(U * NPE) + 16'(i);
            g.ld_bus[(i + 1) % 4] = (pos < F);
            g.ld_addr[(i + 1) % 4] = x_addr(c, pos);
          end
        end
        g_chan_end   = (pl == 16'(U));
        g_job_end    = g_chan_end && (c == cfg.ic - 1);
        g_all_end    = g_job_end && (ob + 16'(NPOS) >= F) && (kb + 12'(U) >= cfg.k);
        g_chan_start = (pl == 0);
      end
      MODE_1X1_SMALL: begin
        g.elem = 1'b1;
        g.zero_m0 = 1'b0;
        g.zero_m2 = 1'b0;
        g.pass_start = (pl == 0);
        g.p_kb = kb; g.p_c = c; g.p_j = '0;
        if (pl < F) begin
          g.src = SRC_IN0;
          g.in0_addr = x_addr(c, pl);
          g.o_valid = 1'b1;
        end
        g.o_addr  = TAG_AW'(pl);
        g.o_first = (c == 0);
        g.o_last  = (c == cfg.ic - 1);
        g_chan_end   = (pl + 16'd1 == period);
        g_job_end    = g_chan_end && (c == cfg.ic - 1);
        g_all_end    = g_job_end && (kb + 12'(U * NPE) >= cfg.k);
        g_chan_start = (pl == 0);
      end
      default: ;
    endcase
    g.job_end = g_job_end;
  end

  // hold before the last channel while the previous results are read out
  logic drain_wait, drain_run;
  logic job_q;   // a job ended and its read-out has not started yet
  assign hold = g_chan_start && (c == cfg.ic - 1) && (job_q || drain_wait || drain_run);

  logic take;   // generator element is consumed this clock
  assign take = run && !gen_done && !hold;

  desc_t bubble;
  always_comb begin
    bubble = '0;
    bubble.src = SRC_ZERO;
    bubble.zero_m0 = 1'b1;
    bubble.zero_m2 = 1'b1;
  end

  desc_t nxt;
  assign nxt = take ? g : bubble;

  // ---------------------------------------------------- counter advance
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; gen_done <= 1'b0;
      kb <= '0; ob <= '0; c <= '0; j <= '0; rr <= '0; col <= '0; pl <= '0;
      prev_len <= '0; prev_rlo <= '0; prev_rhi <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; gen_done <= 1'b0;
      kb <= '0; ob <= '0; c <= '0; j <= '0; rr <= '0; col <= '0; pl <= '0;
    end else if (take) begin
      unique case (mode)
        MODE_3X3: begin
          pl  <= pl + 16'd1;
          col <= col + 8'd1;
          if (g_row_end) begin
            col <= '0;
            rr  <= rr + 8'd1;
          end
          if (g_pass_end) begin
            rr <= '0;
            pl <= '0;
            prev_len <= pl + 16'd1;
            prev_rlo <= rlo;
            prev_rhi <= rhi;
            j <= j + 2'd1;
          end
          if (g_chan_end) begin
            j <= '0;
            c <= c + 12'd1;
          end
          if (g_job_end) begin
            c  <= '0;
            ob <= ob + 16'(cfg.rows);
            if (ob + 16'(cfg.rows) >= 16'(W)) begin
              ob <= '0;
              kb <= kb + 12'(U);
            end
          end
        end
        MODE_1X1: begin
          pl <= pl + 16'd1;
          if (g_chan_end) begin
            pl <= '0;
            c  <= c + 12'd1;
          end
          if (g_job_end) begin
            c  <= '0;
            ob <= ob + 16'(NPOS);
            if (ob + 16'(NPOS) >= F) begin
              ob <= '0;
              kb <= kb + 12'(U);
            end
          end
        end
        default: begin
          pl <= pl + 16'd1;
          if (g_chan_end) begin
            pl <= '0;
            c  <= c + 12'd1;
          end
          if (g_job_end) begin
            c  <= '0;
            kb <= kb + 12'(U * NPE);
          end
        end
      endcase
      if (g_all_end) gen_done <= 1'b1;
    end else if (run && gen_done && !drain_wait && !drain_run && !job_q) begin
      run <= 1'b0;
    end
  end

  // ---------------------------------------------------- emit stage
  desc_t cur;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              cur <= bubble;
    else if (start && !busy) cur <= bubble;
    else if (run)            cur <= nxt;
  end

  // 3x3 load sequencer: CU #n gets its filter row n clocks after the pass start
  logic              seq_on;
  logic [CUBITS-1:0] seq_n;
  logic [11:0]       seq_kb, seq_c;
  logic [1:0]        seq_j;

  logic              e_ld;
  logic [CUBITS-1:0] e_ld_cu;
  logic [11:0]       e_kb, e_c;
  logic [1:0]        e_j;

  always_comb begin
    e_ld = 1'b0; e_ld_cu = '0; e_kb = seq_kb; e_c = seq_c; e_j = seq_j;
    if (cur.pass_start) begin
      e_ld = 1'b1; e_ld_cu = '0; e_kb = cur.p_kb; e_c = cur.p_c; e_j = cur.p_j;
    end else if (seq_on) begin
      e_ld = 1'b1; e_ld_cu = seq_n;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_on <= 1'b0; seq_n <= '0; seq_kb <= '0; seq_c <= '0; seq_j <= '0;
    end else if (cur.pass_start && U > 1) begin
      seq_on <= 1'b1; seq_n <= CUBITS'(1);
      seq_kb <= cur.p_kb; seq_c <= cur.p_c; seq_j <= cur.p_j;
    end else if (seq_on) begin
      seq_n <= seq_n + CUBITS'(1);
      if (seq_n == CUBITS'(U - 1)) seq_on <= 1'b0;
    end
  end

  // DRAM read requests of the emitted element and load
  always_comb begin
    logic [11:0] kk;
    kk = '0;
    for (int b = 0; b < 4; b++) rd_req[b] = '0;
    rd_req[0].valid = run && (cur.src == SRC_IN0);
    rd_req[0].addr  = cur.in0_addr;
    if (mode == MODE_1X1) begin
      if (cur.ld) begin
        for (int b = 0; b < 4; b++) begin
          if (cur.ld_bus[b]) begin
            rd_req[b].valid = 1'b1;
            rd_req[b].addr  = cur.ld_addr[b];
          end
        end
      end
    end else if (e_ld) begin
      for (int i = 0; i < NPE; i++) begin
        if (mode == MODE_3X3) begin
          kk = e_kb + 12'(e_ld_cu);
          rd_req[i+1].valid = (kk < cfg.k);
          rd_req[i+1].addr  = cfg.w_base
                            + ((DRAM_AW'(kk) * DRAM_AW'(cfg.ic) + DRAM_AW'(e_c)) * 3
                               + DRAM_AW'(e_j)) * 3 + DRAM_AW'(i);
        end else begin
          kk = e_kb + 12'(e_ld_cu) * 12'(NPE) + 12'(i);
          rd_req[i+1].valid = (kk < cfg.k);
          rd_req[i+1].addr  = cfg.w_base + DRAM_AW'(kk) * DRAM_AW'(cfg.ic) + DRAM_AW'(e_c);
        end
      end
    end
  end

  // tag of the emitted element: 3x3 takes the output centred on the next one
  tag_t e_tag;
  always_comb begin
    e_tag.zero_m0 = cur.zero_m0;
    e_tag.zero_m2 = cur.zero_m2;
    if (mode == MODE_3X3) begin
      e_tag.out_valid = nxt.o_valid && run;
      e_tag.first     = nxt.o_first;
      e_tag.last      = nxt.o_last;
      e_tag.addr      = nxt.o_addr;
    end else begin
      e_tag.out_valid = cur.o_valid;
      e_tag.first     = cur.o_first;
      e_tag.last      = cur.o_last;
      e_tag.addr      = cur.o_addr;
    end
  end

  // aligned stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_en <= 1'b0; pipe_src <= SRC_ZERO; pipe_tag <= '0;
      ld_valid <= 1'b0; ld_cu <= '0;
    end else begin
      pipe_en  <= run;
      pipe_src <= cur.src;
      pipe_tag <= e_tag;
      if (mode == MODE_1X1) begin
        ld_valid <= run && cur.ld;
        ld_cu    <= cur.ld_cu;
      end else begin
        ld_valid <= run && e_ld;
        ld_cu    <= e_ld_cu;
      end
    end
  end

  // ---------------------------------------------------- result read-out
  // job record latched when the last element of a sub-out-fmap is emitted
  logic [11:0] jb_kb;
  logic [15:0] jb_ob;
  logic [7:0]  jb_rp;
  logic [7:0]  flush_cnt;
  logic [CUBITS-1:0] dn;     // CU
  logic [BBITS-1:0]  di;     // PE / bank (1x1 modes)
  logic [15:0]       da;     // word within the sub-out-fmap of a CU or PE
  logic [15:0]       da_max;
  logic [BBITS-1:0]  di_max;
  logic [CUBITS-1:0] dn_max;
  logic [11:0]       kg;

  always_comb begin
    kg = (cfg.k - jb_kb > 12'(U)) ? 12'(U) : cfg.k - jb_kb;
    unique case (mode)
      MODE_3X3: begin
        dn_max = CUBITS'(kg - 12'd1);
        di_max = '0;
        da_max = 16'(jb_rp) * 16'(W) - 16'd1;
      end
      MODE_1X1: begin
        dn_max = CUBITS'(U);
        di_max = (dn == CUBITS'(U)) ? BBITS'(NPE) : BBITS'(NPE - 1);
        da_max = 16'(kg) - 16'd1;
      end
      default: begin
        dn_max = CUBITS'(U - 1);
        di_max = BBITS'(NPE - 1);
        da_max = F - 16'd1;
      end
    endcase
  end

  logic              wr_v;
  logic [DRAM_AW-1:0] wr_a;
  logic              d_valid;
  logic [DRAM_AW-1:0] d_addr;

  always_comb begin
    logic [15:0] pos;
    logic [11:0] kk;
    d_valid = drain_run;
    d_addr  = '0;
    p_cu    = dn;
    p_bank  = di;
    p_addr  = ABITS'(da);
    pos = '0;
    kk  = '0;
    unique case (mode)
      MODE_3X3: begin
        p_bank = BBITS'(32'(da) / DEPTH);
        p_addr = ABITS'(32'(da) % DEPTH);
        kk = jb_kb + 12'(dn);
        d_addr = cfg.out_base + (DRAM_AW'(kk) * DRAM_AW'(W) + DRAM_AW'(jb_ob)) * DRAM_AW'(W)
                 + DRAM_AW'(da);
      end
      MODE_1X1: begin
        pos = jb_ob + 16'(dn) * 16'(NPE) + 16'(di);
        kk  = jb_kb + 12'(da);
        d_valid = drain_run && (pos < F);
        d_addr  = cfg.out_base + DRAM_AW'(kk) * DRAM_AW'(F) + DRAM_AW'(pos);
      end
      default: begin
        kk = jb_kb + 12'(dn) * 12'(NPE) + 12'(di);
        d_valid = drain_run && (kk < cfg.k);
        d_addr  = cfg.out_base + DRAM_AW'(kk) * DRAM_AW'(F) + DRAM_AW'(da);
      end
    endcase
    p_re = drain_run;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job_q <= 1'b0; drain_wait <= 1'b0; drain_run <= 1'b0; flush_cnt <= '0;
      jb_kb <= '0; jb_ob <= '0; jb_rp <= '0; dn <= '0; di <= '0; da <= '0;
      wr_v <= 1'b0; wr_a <= '0;
    end else begin
      wr_v <= d_valid;
      wr_a <= d_addr;
      if (take && g.job_end) begin
        job_q <= 1'b1;
        jb_kb <= kb; jb_ob <= ob; jb_rp <= rp;
      end
      if (job_q && !drain_wait && !drain_run) begin
        job_q      <= 1'b0;
        drain_wait <= 1'b1;
        flush_cnt  <= 8'(FLUSH);
      end
      if (drain_wait) begin
        flush_cnt <= flush_cnt - 8'd1;
        if (flush_cnt == 0) begin
          drain_wait <= 1'b0;
          drain_run  <= 1'b1;
          dn <= '0; di <= '0; da <= '0;
        end
      end
      if (drain_run) begin
        da <= da + 16'd1;
        if (da == da_max) begin
          da <= '0;
          di <= di + BBITS'(1);
          if (di == di_max) begin
            di <= '0;
            dn <= dn + CUBITS'(1);
            if (dn == dn_max) drain_run <= 1'b0;
          end
        end
      end
    end
  end

  assign wr.valid = wr_v;
  assign wr.addr  = wr_a;
  assign wr.data  = p_rdata;

  // ---------------------------------------------------- status
  logic run_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) run_q <= 1'b0;
    else        run_q <= run;
  end
  assign busy = run || run_q;
  assign done = run_q && !run;

  // a job can end only after the previous one has been taken up by the read-out
  a_job_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      (take && g.job_end) |-> !job_q);

endmodule
