// tb_carla_ctrl: test of the controller alone, at a reduced size (U = 4 CUs
// of 3 PEs plus one of 4, 8-word banks, first feedback segment of 7 registers
// so that tap 1 delays by 12 clocks).
//
// The datapath is replaced by a model of the P SRAM read port that returns a
// word made from the CU, bank and address it is asked for. For a 3x3 layer
// (6x6x2, 5 filters, 3 rows per sub-out-fmap) and a 1x1 layer (5x5x2, 6
// filters) the testbench checks: the number of generated elements against the
// paper's equations (2) and (7); the in-fmap DRAM reads against equation (3)
// (feedback reuse of shared rows) and (9); one stall per channel in 1x1 mode,
// loading the last CU over all four buses; that each output gets exactly one
// first and one last contribution in its tags; and that each output feature
// is written to DRAM exactly once, at its address, with the word read from
// the P bank where the design keeps it.
module tb_carla_ctrl;
  import carla_pkg::*;
  localparam int U = 4, NPE = 3, DEPTH = 8;
  localparam int NCU = U + 1;
  localparam logic [31:0] IN_BASE = 32'h0, W_BASE = 32'h1000, OUT_BASE = 32'h2000;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  dram_rd_req_t rd_req [4];
  logic pipe_en;
  src_e pipe_src;
  tag_t pipe_tag;
  logic ld_valid;
  logic [2:0] ld_cu;
  logic p_re;
  logic [2:0] p_cu;
  logic [1:0] p_bank;
  logic [2:0] p_addr;
  logic [DW-1:0] p_rdata;
  dram_wr_t wr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  carla_ctrl #(.U(U), .NPE(NPE), .DEPTH(DEPTH), .SEG0(7)) dut (.*);

  function automatic logic [DW-1:0] pword(input int cu, input int bank, input int addr);
    return DW'(cu * 256 + bank * 16 + addr);
  endfunction

  always_ff @(posedge clk)
    if (p_re) p_rdata <= pword(int'(p_cu), int'(p_bank), int'(p_addr));

  int n_gen, n_in, n_stall, n_first [int], n_last [int], wcount [int];
  logic [DW-1:0] wdata [int];
  always @(posedge clk) begin
    if (dut.run && dut.take) n_gen++;
    for (int b = 0; b < 4; b++)
      if (rd_req[b].valid && rd_req[b].addr < W_BASE) n_in++;
    if (cfg.mode == MODE_1X1 && ld_valid && ld_cu == 3'(U)) n_stall++;
    if (pipe_en && pipe_tag.out_valid) begin
      if (pipe_tag.first) n_first[int'(pipe_tag.addr)]++;
      if (pipe_tag.last)  n_last[int'(pipe_tag.addr)]++;
    end
    if (wr.valid) begin
      wcount[int'(wr.addr - OUT_BASE)]++;
      wdata[int'(wr.addr - OUT_BASE)] = wr.data;
    end
  end

  task automatic check(input string what, input int got, input int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, want);
    end
  endtask

  task automatic run(input mode_e mode, input int il, input int ic, input int k, input int rows);
    cfg.mode = mode; cfg.il = 8'(il); cfg.ic = 12'(ic); cfg.k = 12'(k); cfg.rows = 8'(rows);
    cfg.in_base = IN_BASE; cfg.w_base = W_BASE; cfg.out_base = OUT_BASE;
    n_gen = 0; n_in = 0; n_stall = 0;
    n_first.delete(); n_last.delete(); wcount.delete(); wdata.delete();
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f, g, p;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;

    // ------------------------------------------------ 3x3: 6x6x2, K=5, rows=3
    run(MODE_3X3, 6, 2, 5, 3);
    g = 2; p = 2; f = 36;
    check("3x3 clocks eq.(2)", n_gen, (3 * 36 - 2 * 6) * 2 * g);
    check("3x3 in-fmap reads eq.(3)", n_in, (6 + 2 * p - 2) * 6 * 2 * g);
    // tags: per filter group and sub-out-fmap, each of its 18 addresses once
    for (int a = 0; a < 18; a++) begin
      check($sformatf("3x3 first tags at %0d", a), n_first.exists(a) ? n_first[a] : 0, g * p);
      check($sformatf("3x3 last tags at %0d", a), n_last.exists(a) ? n_last[a] : 0, g * p);
    end
    for (int kk = 0; kk < 5; kk++)
      for (int pos = 0; pos < f; pos++) begin
        int a, cu, o;
        a = kk * f + pos;
        cu = kk % U;
        o = pos % 18;                         // word within the sub-out-fmap
        check($sformatf("3x3 write count k=%0d pos=%0d", kk, pos),
              wcount.exists(a) ? wcount[a] : 0, 1);
        if (wdata.exists(a))
          check($sformatf("3x3 data k=%0d pos=%0d", kk, pos), int'(wdata[a]),
                int'(pword(cu, o / DEPTH, o % DEPTH)));
      end

    // ------------------------------------------------ 1x1: 5x5x2, K=6
    run(MODE_1X1, 5, 2, 6, 0);
    g = 2; f = 25; p = 2;                     // 16 positions per sub-out-fmap
    check("1x1 clocks eq.(7)", n_gen, (U + 1) * 2 * p * g);
    check("1x1 in-fmap reads eq.(9)", n_in, f * 2 * g);
    check("1x1 stalls", n_stall, 2 * p * g);
    for (int kk = 0; kk < 6; kk++)
      for (int pos = 0; pos < f; pos++) begin
        int a, q, cu, bank;
        a = kk * f + pos;
        q = pos % 16;
        cu = (q >= U * NPE) ? U : q / NPE;
        bank = (q >= U * NPE) ? q - U * NPE : q % NPE;
        check($sformatf("1x1 write count k=%0d pos=%0d", kk, pos),
              wcount.exists(a) ? wcount[a] : 0, 1);
        if (wdata.exists(a))
          check($sformatf("1x1 data k=%0d pos=%0d", kk, pos), int'(wdata[a]),
                int'(pword(cu, bank, kk % U)));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
