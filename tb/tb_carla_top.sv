// tb_carla_top: end-to-end test of the CARLA accelerator at its default size
// (U = 64, N = 3, 224-word SRAMs).
//
// A behavioural off-chip memory answers the four read buses with one clock of
// latency and takes the output writes. For each layer the testbench fills the
// memory with random small features and weights, computes the expected output
// feature maps itself (direct convolution, zero padding 1 for 3x3 filters),
// runs the accelerator and compares every output word; it also checks that
// every output was written exactly once. Layers run:
//   L1  3x3, 14x14x2, 66 filters, 14 rows per sub-out-fmap: two filter groups,
//       row reuse through feedback tap 3 (182 clocks), hold for read-out.
//   L2  3x3, 8x8x3, 5 filters: passes shorter than U, padded with zero rows.
//   L3  3x3, 56x56x1, 2 filters, 4 rows: 14 sub-out-fmaps, feedback tap 2 (168).
//   L4  1x1, 16x16x3, 70 filters: two position groups, two filter groups.
//   L5  1x1 small-map mode, 7x7x4, 200 filters.
//   L6  1x1, stride 2, 29x29x2 -> 15x15, 65 filters: two position groups,
//       odd map size.
//   L7  1x1 small-map mode, stride 2, 14x14x3 -> 7x7, 20 filters.
// Per layer it checks the clock count of element generation against the
// paper's equations (2), (7) and (10), and the number of DRAM reads against
// equations (3) and (9) and the design's weight-fetch count. It counts how
// often each mechanism occurred (feedback reuse, M0/M2 zero substitution,
// the 1x1 stall cycle, zero-row padding, hold, read-out overlapping
// computation, each mode) and fails any that never did.
module tb_carla_top;
  import carla_pkg::*;

  localparam int U = 64;
  localparam int MEMSZ = 32'h30000;
  localparam logic [31:0] IN_BASE  = 32'h00000;
  localparam logic [31:0] W_BASE   = 32'h08000;
  localparam logic [31:0] OUT_BASE = 32'h10000;
  localparam int OUTSZ = 32'h20000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  dram_rd_req_t rd_req [4];
  logic [3:0][DW-1:0] rd_data;
  dram_wr_t wr;

  always #5 clk = ~clk;

  carla_top dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .rd_req, .rd_data, .wr
  );

  // ------------------------------------------------ off-chip memory model
  logic [DW-1:0] mem [MEMSZ];
  logic [DW-1:0] expv [OUTSZ];
  int            wcnt [OUTSZ];
  int checks = 0, failures = 0;
  int n_rd0 = 0, n_rdw = 0, n_gen = 0;

  always @(posedge clk) begin
    for (int b = 0; b < 4; b++)
      rd_data[b] <= rd_req[b].valid ? mem[rd_req[b].addr] : 16'hdead;
    if (rst_n && wr.valid) begin
      mem[wr.addr] <= wr.data;
      if (wr.addr >= OUT_BASE && wr.addr < OUT_BASE + OUTSZ)
        wcnt[wr.addr - OUT_BASE] <= wcnt[wr.addr - OUT_BASE] + 1;
      else begin
        failures++;
        $display("write outside the output area: %h", wr.addr);
      end
    end
  end

  // ------------------------------------------------ mechanism counters
  int m_fb = 0, m_m0 = 0, m_m2 = 0, m_stall = 0, m_pad = 0, m_hold = 0, m_overlap = 0;
  int m_3x3 = 0, m_1x1 = 0, m_small = 0, m_s2 = 0;
  always @(posedge clk) begin
    if (dut.u_ctrl.run) begin
      if (dut.pipe_en && dut.pipe_src >= SRC_FB0) m_fb++;
      if (cfg.mode == MODE_3X3 && dut.pipe_en && dut.pipe_tag.zero_m0 && dut.pipe_src != SRC_ZERO) m_m0++;
      if (cfg.mode == MODE_3X3 && dut.pipe_en && dut.pipe_tag.zero_m2 && dut.pipe_src != SRC_ZERO) m_m2++;
      if (cfg.mode == MODE_1X1 && dut.ld_valid && dut.ld_cu == 7'(U)) m_stall++;
      if (cfg.mode == MODE_3X3 && dut.u_ctrl.take && !dut.u_ctrl.real_row) m_pad++;
      if (dut.u_ctrl.hold && !dut.u_ctrl.gen_done) m_hold++;
      if (dut.u_ctrl.take && wr.valid) m_overlap++;
      if (dut.u_ctrl.take) n_gen++;
      for (int b = 0; b < 4; b++)
        if (rd_req[b].valid) begin
          if (rd_req[b].addr < W_BASE) n_rd0++;
          else n_rdw++;
        end
    end
  end

  function automatic int sx(input logic [DW-1:0] v);
    return int'(signed'(v));
  endfunction

  function automatic logic [DW-1:0] rnd();
    return DW'(int'($urandom_range(0, 14)) - 7);
  endfunction

  function automatic logic [DW-1:0] sat16(input int v);
    if (v > 32767)  return 16'h7fff;
    if (v < -32768) return 16'h8000;
    return DW'(v);
  endfunction

  task automatic check(input string what, input int got, input int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d, expected %0d", what, got, want);
    end
  endtask

  task automatic run_layer(input string name, input mode_e mode, input int il, input int ic,
                           input int k, input int rows, input int st = 1);
    int fl, f, g, p, gen_want, rd0_want, rdw_want, ol;
    int t0;
    fl = (mode == MODE_3X3) ? 3 : 1;
    ol = (il + st - 1) / st;
    f  = ol * ol;
    for (int a = 0; a < ic * il * il; a++) mem[IN_BASE + a] = rnd();
    for (int a = 0; a < k * ic * fl * fl; a++) mem[W_BASE + a] = rnd();
    for (int a = 0; a < k * f; a++) begin
      mem[OUT_BASE + a] = 16'h5a5a;
      wcnt[a] = 0;
    end
    // reference convolution
    for (int kk = 0; kk < k; kk++)
      for (int m = 0; m < ol; m++)
        for (int n = 0; n < ol; n++) begin
          int acc;
          acc = 0;
          for (int cc = 0; cc < ic; cc++)
            for (int jj = 0; jj < fl; jj++)
              for (int ii = 0; ii < fl; ii++) begin
                int rr, cl;
                rr = st * m + jj - (fl / 2);
                cl = st * n + ii - (fl / 2);
                if (rr >= 0 && rr < il && cl >= 0 && cl < il)
                  acc += sx(mem[IN_BASE + (cc * il + rr) * il + cl])
                       * sx(mem[W_BASE + ((kk * ic + cc) * fl + jj) * fl + ii]);
              end
          expv[kk * f + m * ol + n] = sat16(acc);
        end

    cfg.mode = mode;
    cfg.il = 8'(il); cfg.ic = 12'(ic); cfg.k = 12'(k); cfg.rows = 8'(rows);
    cfg.s2 = (st == 2);
    cfg.in_base = IN_BASE; cfg.w_base = W_BASE; cfg.out_base = OUT_BASE;
    n_rd0 = 0; n_rdw = 0; n_gen = 0;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = 0;
    while (!done) begin
      @(posedge clk);
      t0++;
    end
    repeat (3) @(posedge clk);

    for (int a = 0; a < k * f; a++) begin
      checks++;
      if (mem[OUT_BASE + a] !== expv[a] || wcnt[a] != 1) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s out[%0d] (k=%0d pos=%0d): got %0d written %0d times, expected %0d",
                   name, a, a / f, a % f, sx(mem[OUT_BASE + a]), wcnt[a], sx(expv[a]));
      end
    end

    // cycle and DRAM access counts
    g = (mode == MODE_1X1_SMALL) ? (k + 3 * U - 1) / (3 * U) : (k + U - 1) / U;
    if (mode == MODE_3X3) begin
      p = (ol + rows - 1) / rows;
      gen_want = 0;
      // eq. (2) per sub-out-fmap, plus zero rows that pad passes to U clocks
      for (int pp = 0; pp < p; pp++) begin
        int o0, rp;
        o0 = pp * rows;
        rp = (ol - o0 < rows) ? ol - o0 : rows;
        for (int jj = 0; jj < 3; jj++) begin
          int lo, hi, nr, len;
          lo = (o0 + jj - 1 < 0) ? 0 : o0 + jj - 1;
          hi = (o0 + jj + rp - 2 > il - 1) ? il - 1 : o0 + jj + rp - 2;
          nr = hi - lo + 1;
          len = nr * il;
          while (len < U) len += il;
          gen_want += len * ic * g;
        end
      end
      if (name == "L1" || name == "L3") begin
        check({name, " clocks eq.(2)"}, n_gen, (3 * ol * ol - 2 * ol) * ic * g);
        check({name, " in-fmap reads eq.(3)"}, n_rd0, (il + 2 * p - 2) * il * ic * g);
      end else
        check({name, " clocks incl. padding"}, n_gen, gen_want);
      rdw_want = 0;
      for (int gg = 0; gg < g; gg++)
        rdw_want += 3 * ((k - gg * U > U) ? U : k - gg * U) * 3 * ic * p;
      check({name, " weight reads"}, n_rdw, rdw_want);
    end else if (mode == MODE_1X1) begin
      p = (f + 3 * U + 3) / (3 * U + 4);
      check({name, " clocks eq.(7)"}, n_gen, (U + 1) * ic * p * g);
      check({name, " in-fmap reads eq.(9)"}, n_rd0, f * ic * g);
      check({name, " weight reads eq.(8) with K"}, n_rdw, k * ic * p);
    end else begin
      check({name, " clocks eq.(10)"}, n_gen, U * ic * g);
      check({name, " weight reads eq.(11)"}, n_rdw, k * ic);
      check({name, " in-fmap reads eq.(12)"}, n_rd0, f * ic * g);
    end
    $display("%s done in %0d clocks", name, t0);
  endtask

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    run_layer("L1", MODE_3X3, 14, 2, 66, 14);       m_3x3++;
    run_layer("L2", MODE_3X3, 8, 3, 5, 8);          m_3x3++;
    run_layer("L3", MODE_3X3, 56, 1, 2, 4);         m_3x3++;
    run_layer("L4", MODE_1X1, 16, 3, 70, 0);        m_1x1++;
    run_layer("L5", MODE_1X1_SMALL, 7, 4, 200, 0);  m_small++;
    run_layer("L6", MODE_1X1, 29, 2, 65, 0, 2);     m_1x1++; m_s2++;
    run_layer("L7", MODE_1X1_SMALL, 14, 3, 20, 0, 2); m_small++; m_s2++;

    $display("mechanisms: feedback=%0d m0=%0d m2=%0d stall=%0d pad=%0d hold=%0d overlap=%0d",
             m_fb, m_m0, m_m2, m_stall, m_pad, m_hold, m_overlap);
    check("feedback reuse happened", int'(m_fb > 0), 1);
    check("M0 zero substitution happened", int'(m_m0 > 0), 1);
    check("M2 zero substitution happened", int'(m_m2 > 0), 1);
    check("1x1 stall cycle happened", int'(m_stall > 0), 1);
    check("short-pass zero rows happened", int'(m_pad > 0), 1);
    check("hold for read-out happened", int'(m_hold > 0), 1);
    check("read-out overlapped computation", int'(m_overlap > 0), 1);
    check("stride-2 layers ran", int'(m_s2 > 0), 1);
    check("all three modes ran", int'(m_3x3 > 0 && m_1x1 > 0 && m_small > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
