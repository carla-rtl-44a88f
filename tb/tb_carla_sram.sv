// tb_carla_sram: random test of one SRAM bank against a reference array.
//
// Random writes and reads on the two ports, including reads of the address
// being written in the same clock (old data expected). Read data is checked
// one clock after the read, and held while re is low; checking starts with
// the first read, since the output register has no reset.
module tb_carla_sram;
  localparam int WIDTH = 24, DEPTH = 224;
  logic clk = 1'b0;
  logic we, re;
  logic [7:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  carla_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] want;
    logic             rd_pend;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill every word first so that every read is defined
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    rd_pend = 0; want = '0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      if (rd_pend) begin
        checks++;
        if (rdata !== want) begin
          failures++;
          $display("FAIL t=%0d rdata %h expected %h", t, rdata, want);
        end
      end
      we = 1'($urandom); re = 1'($urandom);
      waddr = 8'($urandom_range(0, DEPTH - 1));
      raddr = ($urandom_range(0, 3) == 0) ? waddr : 8'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      if (re) begin
        want = model[raddr];
        rd_pend = 1;
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
