// tb_carla_pe: random test of one processing element.
//
// Drives random register loads, multiplier operands, zero-substitution flags
// and addend selections, and compares the combinational sum and the ACC
// register against a reference computed here: sum = addend + (zero ? 0 : R*x)
// in 24-bit two's complement. Checks that R loads only with ld and ACC only
// with en.
module tb_carla_pe;
  import carla_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, ld, zero;
  logic [DW-1:0] ld_data, x, r;
  asel_e asel;
  logic [AW-1:0] prev_acc, s_rd, sum, acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  carla_pe #(.HAS_ZERO_MUX(1'b1)) dut (.*);

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, want);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] rm;
    logic [AW-1:0] accm, want;
    longint p;
    en = 0; ld = 0; zero = 0; ld_data = 0; x = 0; asel = ASEL_ZERO; prev_acc = 0; s_rd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rm = '0; accm = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en = 1'($urandom); ld = 1'($urandom); zero = 1'($urandom_range(0, 3) == 0);
      ld_data = DW'($urandom); x = DW'($urandom);
      asel = asel_e'($urandom_range(0, 2));
      prev_acc = AW'($urandom); s_rd = AW'($urandom);
      #1;
      p = longint'(signed'(rm)) * longint'(signed'(x));
      want = (zero ? AW'(0) : AW'(p)) +
             (asel == ASEL_PREV ? prev_acc : asel == ASEL_SRAM ? s_rd : AW'(0));
      check("sum", sum, want);
      check("r", r, rm);
      check("acc", acc, accm);
      @(posedge clk);
      if (ld) rm = ld_data;
      if (en) accm = want;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
