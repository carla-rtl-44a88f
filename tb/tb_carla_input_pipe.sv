// tb_carla_input_pipe: random test of the input pipeline and its feedback taps.
//
// Each clock, with random advance enable, the testbench picks Input #0, zero
// or one of the six feedback taps as the source of PR0. A reference history
// of the words that entered PR0 gives the expected content of every pipeline
// register (the word that entered n advances ago) and the expected feedback
// word (the one that entered TAP_D advances ago, with TAP_D = 65, 84, 168,
// 182, 198, 224). Tags are checked to move with their words.
module tb_carla_input_pipe;
  import carla_pkg::*;
  localparam int NST = 65;
  localparam int TAP_D [6] = '{65, 84, 168, 182, 198, 224};

  logic clk = 1'b0, rst_n = 1'b0;
  logic en;
  src_e src;
  logic [DW-1:0] in0;
  tag_t tag_in;
  logic [NST-1:0][DW-1:0] pr;
  tag_t tag_q [NST];
  tag_t tag_nxt [NST];
  int checks = 0, failures = 0;
  int n_fb = 0;

  always #5 clk = ~clk;

  carla_input_pipe #(.NST(NST)) dut (.*);

  logic [DW-1:0] hist [$];
  tag_t          thist [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] h(input int back);
    // word that entered PR0 `back` advances before the newest one
    int i;
    i = hist.size() - 1 - back;
    return (i < 0) ? '0 : hist[i];
  endfunction

  initial begin
    logic [DW-1:0] want_d0;
    en = 0; src = SRC_ZERO; in0 = 0; tag_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      // registers against the history
      for (int n = 0; n < NST; n++) begin
        int i;
        i = thist.size() - 1 - n;
        checks++;
        if (pr[n] !== h(n)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d pr[%0d]=%h expected %h", t, n, pr[n], h(n));
        end
        if (i >= 0) begin
          checks++;
          if (tag_q[n] !== thist[i]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d tag_q[%0d]", t, n);
          end
        end
      end
      en = ($urandom_range(0, 9) != 0);
      in0 = DW'($urandom);
      tag_in = tag_t'($urandom);
      case ($urandom_range(0, 3))
        0, 1: src = SRC_IN0;
        2:    src = SRC_ZERO;
        default: src = src_e'(3'($urandom_range(int'(SRC_FB0), int'(SRC_FB5))));
      endcase
      if (src == SRC_IN0)       want_d0 = in0;
      else if (src == SRC_ZERO) want_d0 = '0;
      else begin
        want_d0 = h(TAP_D[int'(src) - int'(SRC_FB0)] - 1);
        n_fb++;
      end
      #1;
      if (en) begin
        checks++;
        if (tag_nxt[0] !== tag_in) failures++;
      end
      @(posedge clk);
      if (en) begin
        hist.push_back(want_d0);
        thist.push_back(tag_in);
      end
    end
    checks++;
    if (n_fb == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
