// loren_top: LOREN, a convolutional neural receiver for OFDM whose code rate
// can be switched at run time by choosing a low-rank adapter.
//
// The network maps one received resource grid (T OFDM symbols x F
// subcarriers, CIN0 input features per cell) to COUT_F log-likelihood
// ratios per cell (4 for 16-QAM):
//   input CONV2D 3x3 (CIN0 -> C)
//   4 x residual block (LayerNorm, CONV2D, LayerNorm, CONV2D, + skip)
//   output CONV2D 3x3 (C -> COUT_F)
// The base weights are frozen and shared by all code rates. The convs whose
// bit is set in LOREN_MASK (bit 2*b+i = conv i of residual block b) are
// LORENCONV2D layers: they add a rank-RANK 1x1 update (ALPHA/RANK) B A of
// the code rate cr_sel, whose A/B pairs for all NUM_CR code rates sit in a
// small adapter SRAM next to the layer. The default puts adapters on the
// two convs of the last residual block, rank 4, alpha 1.
//
// Every layer has its own weight SRAMs (four 4096x144 per residual conv,
// eight 4096x224 per LayerNorm, one 896x144 for input+output conv, one
// 3072x16 adapter SRAM per LORENCONV2D). Activations live in three
// T*F x C*16 single-port buffers that rotate roles (loren_ctrl).
//
// Use: with the receiver idle, load weights through the wl_* bus
// (wl_stage 0 = input/output conv, 1..4 = residual block 1..4, targets in
// loren_pkg) and the received grid through in_we/in_addr/in_data (cell
// t*F + f, into buffer 0). Pulse start with cr_sel set. LLRs stream out on
// llr_valid/llr_addr/llr_data while the output conv runs; done pulses at the
// end of the frame. At the default size a frame takes about 66 M cycles
// (0.33 s at the paper's 200 MHz): each residual conv 1792 x 4108 cycles,
// plus 1792 x 1027 where an adapter is present, each LayerNorm about
// 1792 x 132. A code-rate change costs no cycles (it only moves the adapter
// SRAM base address). The layer order and sizes follow the paper; the
// schedule, buffers and load bus are this design's.
//
// Lint note: rst_n is the asynchronous reset of every flop; it also appears
// in the 'disable iff' of the simulation-only assertions, which a linter may
// report as a reset used both synchronously and asynchronously. No logic
// uses it synchronously.
module loren_top
  import loren_pkg::*;
#(
  parameter int unsigned T          = 14,
  parameter int unsigned F          = 128,
  parameter int unsigned C          = 128,
  parameter int unsigned CIN0       = 3,
  parameter int unsigned COUT_F     = 4,
  parameter int unsigned NBANK      = 4,
  parameter int unsigned NUM_CR     = 3,
  parameter int unsigned RANK       = 4,
  parameter int unsigned ALPHA      = 1,
  parameter logic [7:0]  LOREN_MASK = 8'b1100_0000,
  parameter int unsigned EPS        = 64,
  localparam int unsigned NPOS      = T * F,
  localparam int unsigned PAW       = $clog2(NPOS),
  localparam int unsigned BW        = C * DW,
  localparam int unsigned CRW       = (NUM_CR > 1) ? $clog2(NUM_CR) : 1,
  localparam int unsigned NBLK      = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // frame control
  input  logic                 start,
  input  logic [CRW-1:0]       cr_sel,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          frames,
  output logic [15:0]          cr_switches,
  // received samples
  input  logic                 in_we,
  input  logic [PAW-1:0]       in_addr,
  input  logic [CIN0*DW-1:0]   in_data,
  // weight load bus
  input  logic                 wl_en,
  input  logic [2:0]           wl_stage,
  input  logic [2:0]           wl_target,
  input  logic [2:0]           wl_bank,
  input  logic [15:0]          wl_addr,
  input  logic [223:0]         wl_data,
  // demodulated output (LLRs)
  output logic                 llr_valid,
  output logic [PAW-1:0]       llr_addr,
  output logic [COUT_F*DW-1:0] llr_data
);

  localparam int unsigned NSTAGE = NBLK + 2;
  localparam int unsigned IO_IN  = CIN0 * C;       // kernel words of the input conv
  localparam int unsigned IO_OUT = C * COUT_F;     // kernel words of the output conv
  localparam int unsigned IODEPTH= IO_IN + IO_OUT; // 896 at the default size
  localparam int unsigned IOAW   = $clog2(IODEPTH);
  localparam int unsigned SW     = $clog2(NSTAGE);

  // ---------------- sequencer ----------------
  logic [CRW-1:0]    cr_q;
  logic [SW-1:0]     stage;
  logic [NSTAGE-1:0] stage_start, stage_done;
  logic [1:0]        rs, ra, rb;

  loren_ctrl #(.NSTAGE(NSTAGE), .NUM_CR(NUM_CR)) u_ctrl (
    .clk, .rst_n, .start, .cr_in(cr_sel), .busy, .done, .cr_q, .stage,
    .stage_start, .stage_done, .rs, .ra, .rb, .frames, .cr_switches);

  // ---------------- activation buffers ----------------
  logic           buf_en    [3];
  logic           buf_we    [3];
  logic [PAW-1:0] buf_addr  [3];
  logic [BW-1:0]  buf_wdata [3];
  logic [BW-1:0]  buf_rdata [3];

  for (genvar i = 0; i < 3; i++) begin : g_buf
    sram_sp #(.DEPTH(NPOS), .WIDTH(BW)) u_buf (
      .clk, .en(buf_en[i]), .we(buf_we[i]), .addr(buf_addr[i]),
      .wdata(buf_wdata[i]), .rdata(buf_rdata[i]));
  end

  // ---------------- input / output conv and their shared SRAM ----------------
  logic                       io_en, io_we;
  logic [IOAW-1:0]            io_addr;
  logic [KW-1:0]              io_rdata [1];
  logic                       ci_w_en, co_w_en;
  logic [$clog2(IO_IN)-1:0]   ci_w_addr;
  logic [$clog2(IO_OUT)-1:0]  co_w_addr;
  logic                       ci_in_en, co_in_en, ci_out_en, co_out_en;
  logic [PAW-1:0]             ci_in_addr, co_in_addr, ci_out_addr, co_out_addr;
  logic [BW-1:0]              ci_out_wdata, co_out_wdata;
  logic                       io_ld;
  logic                       ci_busy, co_busy;

  assign io_ld   = wl_en && (wl_stage == 3'd0) && (wl_target == WT_IO_KERNEL);
  assign io_en   = io_ld || ci_w_en || co_w_en;
  assign io_we   = io_ld;
  assign io_addr = io_ld   ? IOAW'(wl_addr)
                 : ci_w_en ? IOAW'(ci_w_addr)
                 :           IOAW'(IO_IN + int'(co_w_addr));

  sram_sp #(.DEPTH(IODEPTH), .WIDTH(KW)) u_io_sram (
    .clk, .en(io_en), .we(io_we), .addr(io_addr), .wdata(wl_data[KW-1:0]), .rdata(io_rdata[0]));

  conv2d_engine #(.T(T), .F(F), .CIN(CIN0), .COUT(C), .CBUF(C), .NBANK(1),
                  .SKIP(1'b0), .LOREN(1'b0), .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)) u_conv_in (
    .clk, .rst_n, .start(stage_start[0]), .cr(cr_q), .done(stage_done[0]), .busy(ci_busy),
    .in_en(ci_in_en), .in_addr(ci_in_addr), .in_rdata(buf_rdata[0]),
    .skip_en(), .skip_addr(), .skip_rdata('0),
    .out_en(ci_out_en), .out_addr(ci_out_addr), .out_wdata(ci_out_wdata),
    .w_en(ci_w_en), .w_addr(ci_w_addr), .w_rdata(io_rdata),
    .a_en(), .a_addr(), .a_rdata('0),
    .bias_we(wl_en && wl_stage == 3'd0 && wl_target == WT_IO_BIASIN),
    .bias_addr($clog2(C)'(wl_addr)), .bias_wdata(data_t'(wl_data[DW-1:0])));

  conv2d_engine #(.T(T), .F(F), .CIN(C), .COUT(COUT_F), .CBUF(C), .NBANK(1),
                  .SKIP(1'b0), .LOREN(1'b0), .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)) u_conv_out (
    .clk, .rst_n, .start(stage_start[NSTAGE-1]), .cr(cr_q), .done(stage_done[NSTAGE-1]), .busy(co_busy),
    .in_en(co_in_en), .in_addr(co_in_addr), .in_rdata(buf_rdata[rs]),
    .skip_en(), .skip_addr(), .skip_rdata('0),
    .out_en(co_out_en), .out_addr(co_out_addr), .out_wdata(co_out_wdata),
    .w_en(co_w_en), .w_addr(co_w_addr), .w_rdata(io_rdata),
    .a_en(), .a_addr(), .a_rdata('0),
    .bias_we(wl_en && wl_stage == 3'd0 && wl_target == WT_IO_BIASOUT),
    .bias_addr($clog2(COUT_F)'(wl_addr)), .bias_wdata(data_t'(wl_data[DW-1:0])));

  assign llr_valid = co_out_en;
  assign llr_addr  = co_out_addr;
  assign llr_data  = co_out_wdata[COUT_F*DW-1:0];

  // ---------------- residual blocks ----------------
  logic           rb_x_en  [NBLK], rb_a_en [NBLK], rb_a_we [NBLK], rb_b_en [NBLK], rb_b_we [NBLK];
  logic [PAW-1:0] rb_x_addr[NBLK], rb_a_addr[NBLK], rb_b_addr[NBLK];
  logic [BW-1:0]  rb_a_wdata[NBLK], rb_b_wdata[NBLK];
  logic           rb_busy  [NBLK];

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    res_block #(.T(T), .F(F), .C(C), .NBANK(NBANK),
                .LOREN1(LOREN_MASK[2*b]), .LOREN2(LOREN_MASK[2*b+1]),
                .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR), .EPS(EPS)) u_blk (
      .clk, .rst_n, .start(stage_start[b+1]), .cr(cr_q), .done(stage_done[b+1]), .busy(rb_busy[b]),
      .x_en(rb_x_en[b]), .x_addr(rb_x_addr[b]), .x_rdata(buf_rdata[rs]),
      .a_en(rb_a_en[b]), .a_we(rb_a_we[b]), .a_addr(rb_a_addr[b]), .a_wdata(rb_a_wdata[b]),
      .a_rdata(buf_rdata[ra]),
      .b_en(rb_b_en[b]), .b_we(rb_b_we[b]), .b_addr(rb_b_addr[b]), .b_wdata(rb_b_wdata[b]),
      .b_rdata(buf_rdata[rb]),
      .wl_en(wl_en && int'(wl_stage) == b + 1), .wl_target(wtarget_e'(wl_target)),
      .wl_bank, .wl_addr, .wl_data);
  end

  // ---------------- buffer port multiplexing ----------------
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      buf_en[i] = 1'b0; buf_we[i] = 1'b0; buf_addr[i] = '0; buf_wdata[i] = '0;
    end
    if (!busy) begin
      // host loads the received grid into buffer 0
      buf_en[0]    = in_we;
      buf_we[0]    = 1'b1;
      buf_addr[0]  = in_addr;
      buf_wdata[0] = BW'(in_data);
    end else if (int'(stage) == 0) begin
      buf_en[rs] = ci_in_en;  buf_addr[rs] = ci_in_addr;
      buf_en[rb] = ci_out_en; buf_we[rb] = 1'b1; buf_addr[rb] = ci_out_addr; buf_wdata[rb] = ci_out_wdata;
    end else if (int'(stage) == NSTAGE - 1) begin
      buf_en[rs] = co_in_en;  buf_addr[rs] = co_in_addr;
    end else begin
      for (int b = 0; b < NBLK; b++) begin
        if (int'(stage) == b + 1) begin
          buf_en[rs] = rb_x_en[b]; buf_addr[rs] = rb_x_addr[b];
          buf_en[ra] = rb_a_en[b]; buf_we[ra] = rb_a_we[b]; buf_addr[ra] = rb_a_addr[b]; buf_wdata[ra] = rb_a_wdata[b];
          buf_en[rb] = rb_b_en[b]; buf_we[rb] = rb_b_we[b]; buf_addr[rb] = rb_b_addr[b]; buf_wdata[rb] = rb_b_wdata[b];
        end
      end
    end
  end

`ifndef SYNTHESIS
  assert property (@(posedge clk) disable iff (!rst_n) in_we |-> !busy)
    else $error("loren_top: input load while busy");
  assert property (@(posedge clk) disable iff (!rst_n) wl_en |-> !busy)
    else $error("loren_top: weight load while busy");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("loren_top: start while busy");
`endif

endmodule
