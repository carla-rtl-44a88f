// carla_top: the CARLA convolution accelerator.
//
// CARLA computes the convolutional layers of a CNN with U+1 cascaded
// convolution units (CUs) fed from one pipeline of U+1 registers. With the
// default U=64 and N=3 there are 64 CUs of three PEs and a last CU of four
// PEs, 196 PEs in all, each with a 224-word S/P SRAM pair. Four read buses
// come from off-chip DRAM: Input #0 enters the pipeline (features in 3x3
// mode, weights in 1x1 mode); Inputs #1..#3 reach the registers of every CU.
// The last CU also takes Input #0 into its fourth PE register. Results leave
// through one DRAM write port.
//
// Interface: the host sets `cfg` (layer_cfg_t), pulses `start`, and waits for
// `done`; `busy` is high in between. rd_req[b] is a word read on bus b, whose
// data the memory returns on rd_data[b] one clock later. `wr` writes one
// output feature per clock. DRAM itself is not part of this design.
//
// Layers supported: 3x3 filters with stride 1 and zero padding 1; 1x1
// filters with stride 1 or 2, in either 1x1 dataflow. 7x7 filters are not.
// Structure follows the paper's Fig. 2; the DRAM port protocol is this
// design's choice.
module carla_top
  import carla_pkg::*;
#(
  parameter int U     = 64,
  parameter int NPE   = 3,
  parameter int DEPTH = 224,
  parameter int SEG0  = 19,
  parameter int SEG1  = 84,
  parameter int SEG2  = 14,
  parameter int SEG3  = 16,
  parameter int SEG4  = 26,
  localparam int NCU    = U + 1,
  localparam int CUBITS = $clog2(NCU),
  localparam int ABITS  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int BBITS  = $clog2(NPE + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  output dram_rd_req_t    rd_req  [4],
  input  logic [3:0][DW-1:0] rd_data,
  output dram_wr_t        wr
);

  logic              pipe_en;
  src_e              pipe_src;
  tag_t              pipe_tag;
  logic              ld_valid;
  logic [CUBITS-1:0] ld_cu;
  logic              p_re;
  logic [CUBITS-1:0] p_cu, p_cu_q;
  logic [BBITS-1:0]  p_bank;
  logic [ABITS-1:0]  p_addr;
  logic [DW-1:0]     p_rdata;

  carla_ctrl #(
    .U(U), .NPE(NPE), .DEPTH(DEPTH),
    .SEG0(SEG0), .SEG1(SEG1), .SEG2(SEG2), .SEG3(SEG3), .SEG4(SEG4)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .rd_req, .pipe_en, .pipe_src, .pipe_tag, .ld_valid, .ld_cu,
    .p_re, .p_cu, .p_bank, .p_addr, .p_rdata, .wr
  );

  logic [NCU-1:0][DW-1:0] pr;
  tag_t                   tag_q   [NCU];
  tag_t                   tag_nxt [NCU];

  carla_input_pipe #(
    .NST(NCU), .SEG0(SEG0), .SEG1(SEG1), .SEG2(SEG2), .SEG3(SEG3), .SEG4(SEG4)
  ) u_pipe (
    .clk, .rst_n,
    .en      (pipe_en),
    .src     (pipe_src),
    .in0     (rd_data[0]),
    .tag_in  (pipe_tag),
    .pr      (pr),
    .tag_q   (tag_q),
    .tag_nxt (tag_nxt)
  );

  logic [NCU-1:0][DW-1:0] cu_p_rdata;

  for (genvar n = 0; n < NCU; n++) begin : g_cu
    localparam int NP = (n == U) ? NPE + 1 : NPE;
    logic [NP-1:0][DW-1:0] ld_data;
    always_comb begin
      for (int i = 0; i < NP; i++) ld_data[i] = rd_data[(i + 1) % 4];
    end
    carla_cu #(.NPE(NP), .DEPTH(DEPTH)) u_cu (
      .clk, .rst_n,
      .en      (pipe_en),
      .mode    (cfg.mode),
      .active  ((n < U) || (cfg.mode == MODE_1X1)),
      .ld      (ld_valid && (ld_cu == CUBITS'(n))),
      .ld_data (ld_data),
      .x       (pr[n]),
      .tag     (tag_q[n]),
      .tag_nxt (tag_nxt[n]),
      .p_re    (p_re && (p_cu == CUBITS'(n))),
      .p_bank  (p_bank[$clog2(NP)-1:0]),
      .p_addr  (p_addr),
      .p_rdata (cu_p_rdata[n])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    p_cu_q <= '0;
    else if (p_re) p_cu_q <= p_cu;
  end
  assign p_rdata = cu_p_rdata[p_cu_q];

endmodule
