// tb_carla_cu: directed random test of a convolution unit in both
// configurations.
//
// Serial (3x3) configuration, CU of 3 PEs with 4-word banks so that one row
// of 6 outputs spans banks S0 and S1: two passes over a 6-word row, each with
// its own filter row. The first pass starts every output from zero and leaves
// partial results in S; the second adds to them and leaves the final results
// in P. Words are sent as the controller sends them: a zero word before the
// row starts output 0, M2 zeroes the first word's third product, M0 the last
// word's first product, a zero word after the row lets PE #2 finish the last
// output. Expected: for every output column o,
//   P[o] = sum over passes of x[o-1]*w0 + x[o]*w1 + x[o+1]*w2 (x outside = 0).
//
// Independent configuration, CU of 4 PEs: two channels, each loading four
// features into R0..R3 and then streaming four weights (with a stalled clock
// in between, which must not write). Expected P_i[k] = sum_c x_c[i]*w_c[k].
//
// Both are repeated for NTRIAL random trials; every second trial uses values
// large enough that results exceed 16 bits, so the saturating narrowing to
// the P bank is checked as well (expected values are saturated the same way).
module tb_carla_cu;
  import carla_pkg::*;
  localparam int DEPTH = 4;
  localparam int W = 6;
  localparam int NTRIAL = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  typedef struct {
    logic          en;
    logic          ld;
    logic [3:0][DW-1:0] ld_data;
    logic [DW-1:0] x;
    tag_t          tag;
  } step_t;

  // ---------------------------------------------------------- two CUs
  mode_e mode3, mode4;
  logic en3, en4, ld3, ld4;
  logic [2:0][DW-1:0] ldd3;
  logic [3:0][DW-1:0] ldd4;
  logic [DW-1:0] x3, x4, prd3, prd4;
  tag_t t3, t3n, t4, t4n;
  logic pre3, pre4;
  logic [1:0] pb3, pb4;
  logic [1:0] pa3, pa4;

  carla_cu #(.NPE(3), .DEPTH(DEPTH)) cu3 (
    .clk, .rst_n, .en(en3), .mode(mode3), .active(1'b1), .ld(ld3), .ld_data(ldd3),
    .x(x3), .tag(t3), .tag_nxt(t3n), .p_re(pre3), .p_bank(pb3), .p_addr(pa3), .p_rdata(prd3));
  carla_cu #(.NPE(4), .DEPTH(DEPTH)) cu4 (
    .clk, .rst_n, .en(en4), .mode(mode4), .active(1'b1), .ld(ld4), .ld_data(ldd4),
    .x(x4), .tag(t4), .tag_nxt(t4n), .p_re(pre4), .p_bank(pb4), .p_addr(pa4), .p_rdata(prd4));

  step_t seq [$];

  function automatic tag_t mk(input bit zm0, input bit zm2, input bit v, input bit f,
                              input bit l, input int a);
    tag_t t;
    t.zero_m0 = zm0; t.zero_m2 = zm2; t.out_valid = v; t.first = f; t.last = l;
    t.addr = TAG_AW'(a);
    return t;
  endfunction

  function automatic step_t st(input logic [DW-1:0] x, input tag_t t);
    step_t s;
    s.en = 1'b1; s.ld = 1'b0; s.ld_data = '0; s.x = x; s.tag = t;
    return s;
  endfunction

  function automatic int sx(input logic [DW-1:0] v);
    return int'(signed'(v));
  endfunction

  // expected narrowing of a result to 16 bits (saturation)
  int n_sat = 0;
  function automatic int sat(input int v);
    if (v > 32767 || v < -32768) n_sat++;
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] xs [2][W];
    logic [DW-1:0] ws [2][3];
    int            want [W];
    logic [DW-1:0] fx [2][4];
    logic [DW-1:0] fw [2][4];
    step_t s;

    mode3 = MODE_3X3; mode4 = MODE_1X1;
    en3 = 0; en4 = 0; ld3 = 0; ld4 = 0; ldd3 = '0; ldd4 = '0; x3 = 0; x4 = 0;
    t3 = '0; t3n = '0; t4 = '0; t4n = '0; pre3 = 0; pre4 = 0; pb3 = 0; pb4 = 0; pa3 = 0; pa4 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int trial = 0; trial < NTRIAL; trial++) begin
    int amp;
    amp = (trial % 2 == 1) ? 400 : 100;

    // ------------------------------------------------ serial configuration
    for (int p = 0; p < 2; p++) begin
      for (int c = 0; c < W; c++) xs[p][c] = DW'(int'($urandom_range(0, 2 * amp)) - amp);
      for (int i = 0; i < 3; i++) ws[p][i] = DW'(int'($urandom_range(0, 2 * amp)) - amp);
    end
    for (int o = 0; o < W; o++) begin
      want[o] = 0;
      for (int p = 0; p < 2; p++)
        for (int i = 0; i < 3; i++)
          if (o - 1 + i >= 0 && o - 1 + i < W) want[o] += sx(xs[p][o - 1 + i]) * sx(ws[p][i]);
      want[o] = sat(want[o]);
    end
    seq.delete();
    for (int p = 0; p < 2; p++) begin
      s = st('0, mk(1, 1, 0, 0, 0, 0));
      s.ld = 1'b1;
      for (int i = 0; i < 3; i++) s.ld_data[i] = ws[p][i];
      seq.push_back(s);                                    // idle word, loads filter row
      seq.push_back(st('0, mk(1, 1, 1, p == 0, p == 1, 0)));  // starts output 0
      for (int c = 0; c < W; c++)
        seq.push_back(st(xs[p][c], mk(c == W - 1, c == 0, c < W - 1, p == 0, p == 1, c + 1)));
      seq.push_back(st('0, mk(1, 1, 0, 0, 0, 0)));         // PE #2 finishes output W-1
      seq.push_back(st('0, mk(1, 1, 0, 0, 0, 0)));
      seq.push_back(st('0, mk(1, 1, 0, 0, 0, 0)));
    end
    for (int t = 0; t < seq.size(); t++) begin
      @(negedge clk);
      en3 = seq[t].en; ld3 = seq[t].ld; ldd3 = seq[t].ld_data[2:0];
      x3 = seq[t].x; t3 = seq[t].tag;
      t3n = (t + 1 < seq.size()) ? seq[t + 1].tag : seq[t].tag;
    end
    @(negedge clk);
    en3 = 0; ld3 = 0;
    for (int o = 0; o < W; o++) begin
      pre3 = 1; pb3 = 2'(o / DEPTH); pa3 = 2'(o % DEPTH);
      @(negedge clk);
      pre3 = 0;
      checks++;
      if (sx(prd3) != want[o]) begin
        failures++;
        $display("FAIL serial output %0d: got %0d expected %0d", o, sx(prd3), want[o]);
      end
    end

    // ------------------------------------------------ independent configuration
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < 4; i++) begin
        fx[c][i] = DW'(int'($urandom_range(0, 2 * amp)) - amp);
        fw[c][i] = DW'(int'($urandom_range(0, 2 * amp)) - amp);
      end
    seq.delete();
    for (int c = 0; c < 2; c++) begin
      for (int k = 0; k < 4; k++) begin
        if (k == 1) begin
          s = st(fw[c][k], mk(0, 0, 1, c == 0, c == 1, k));
          s.en = 1'b0;                                     // stalled clock: no write
          seq.push_back(s);
        end
        if (k == 0) begin
          // R loads at the end of the clock before the channel's first weight
          if (c == 0) seq.push_back(st('0, mk(0, 0, 0, 0, 0, 0)));
          seq[seq.size() - 1].ld = 1'b1;
          for (int i = 0; i < 4; i++) seq[seq.size() - 1].ld_data[i] = fx[c][i];
        end
        seq.push_back(st(fw[c][k], mk(0, 0, 1, c == 0, c == 1, k)));
      end
    end
    for (int t = 0; t < seq.size(); t++) begin
      @(negedge clk);
      en4 = seq[t].en; ld4 = seq[t].ld; ldd4 = seq[t].ld_data;
      x4 = seq[t].x; t4 = seq[t].tag;
      t4n = (t + 1 < seq.size()) ? seq[t + 1].tag : seq[t].tag;
    end
    @(negedge clk);
    en4 = 0; ld4 = 0;
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) begin
        int w;
        w = sat(sx(fx[0][i]) * sx(fw[0][k]) + sx(fx[1][i]) * sx(fw[1][k]));
        pre4 = 1; pb4 = 2'(i); pa4 = 2'(k);
        @(negedge clk);
        pre4 = 0;
        checks++;
        if (sx(prd4) != w) begin
          failures++;
          $display("FAIL 1x1 PE %0d filter %0d: got %0d expected %0d", i, k, sx(prd4), w);
        end
      end
    end
    // the large-value trials must have reached the saturation limits
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("FAIL no result saturated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
