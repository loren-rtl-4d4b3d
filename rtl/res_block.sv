// res_block: one residual block of the receiver with its weight memories:
//   LayerNorm -> CONV2D 3x3 -> LayerNorm -> CONV2D 3x3 -> + block input.
//
// The block works on three activation buffers owned by the caller: X holds
// the block input (read by the first LayerNorm and, as the skip operand, by
// the second conv), A and B are scratch. Data flow:
//   LN1: X -> A,  CONV1: A -> B,  LN2: B -> A,  CONV2: A (+ X) -> B,
// so the block output ends in B. The four layers run one after another,
// each started when the previous one reports done.
//
// Each conv owns NBANK kernel SRAMs (4096 x 144 at the default size, four
// per layer, read in parallel) and a bias register file. Each LayerNorm owns
// 2*LN_BANKS SRAMs of F*C/LN_BANKS words x 14*16 bits: banks 0..3 gamma,
// banks 4..7 beta (eight 4096 x 224 SRAMs per layer at the default size).
// A conv with LOREN1/LOREN2 set is a LORENCONV2D layer and owns an adapter
// SRAM of NUM_CR*RANK*2C words x 16 bits holding A and B of every code rate.
// Memory geometries follow the paper's table of SRAMs; the gamma/beta
// split, adapter layout and load bus are this design's.
//
// Weight loading: while the block is idle, wl_en writes wl_data into the
// memory chosen by wl_target / wl_bank at wl_addr (see loren_pkg).
module res_block
  import loren_pkg::*;
#(
  parameter int unsigned T       = 14,
  parameter int unsigned F       = 128,
  parameter int unsigned C       = 128,
  parameter int unsigned NBANK   = 4,
  parameter int unsigned LN_BANKS= 4,
  parameter bit          LOREN1  = 1'b0,
  parameter bit          LOREN2  = 1'b1,
  parameter int unsigned RANK    = 4,
  parameter int unsigned ALPHA   = 1,
  parameter int unsigned NUM_CR  = 3,
  parameter int unsigned EPS     = 64,
  localparam int unsigned NPOS   = T * F,
  localparam int unsigned PAW    = $clog2(NPOS),
  localparam int unsigned BW     = C * DW,
  localparam int unsigned CRW    = (NUM_CR > 1) ? $clog2(NUM_CR) : 1,
  localparam int unsigned LWD    = T * DW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [CRW-1:0]  cr,
  output logic            done,
  output logic            busy,
  // buffer X: block input (read only)
  output logic            x_en,
  output logic [PAW-1:0]  x_addr,
  input  logic [BW-1:0]   x_rdata,
  // buffer A
  output logic            a_en,
  output logic            a_we,
  output logic [PAW-1:0]  a_addr,
  output logic [BW-1:0]   a_wdata,
  input  logic [BW-1:0]   a_rdata,
  // buffer B (block output)
  output logic            b_en,
  output logic            b_we,
  output logic [PAW-1:0]  b_addr,
  output logic [BW-1:0]   b_wdata,
  input  logic [BW-1:0]   b_rdata,
  // weight load bus
  input  logic            wl_en,
  input  wtarget_e        wl_target,
  input  logic [2:0]      wl_bank,
  input  logic [15:0]     wl_addr,
  input  logic [223:0]    wl_data
);

  localparam int unsigned NW     = C * C / NBANK;
  localparam int unsigned WAW    = $clog2(NW);
  localparam int unsigned LDEPTH = F * C / LN_BANKS;
  localparam int unsigned LAW    = $clog2(LDEPTH);
  localparam int unsigned GAW    = $clog2(F * C);
  localparam int unsigned ADEPTH = NUM_CR * RANK * 2 * C;
  localparam int unsigned AAW    = $clog2(ADEPTH);

  typedef enum logic [2:0] {P_IDLE, P_LN1, P_C1, P_LN2, P_C2} phase_e;
  phase_e phase;

  logic ln_start [2], ln_done [2], ln_busy [2];
  logic cv_start [2], cv_done [2], cv_busy [2];

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; done <= 1'b0;
      ln_start[0] <= 1'b0; ln_start[1] <= 1'b0; cv_start[0] <= 1'b0; cv_start[1] <= 1'b0;
    end else begin
      done <= 1'b0;
      ln_start[0] <= 1'b0; ln_start[1] <= 1'b0; cv_start[0] <= 1'b0; cv_start[1] <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin phase <= P_LN1; ln_start[0] <= 1'b1; end
        P_LN1:  if (ln_done[0]) begin phase <= P_C1;  cv_start[0] <= 1'b1; end
        P_C1:   if (cv_done[0]) begin phase <= P_LN2; ln_start[1] <= 1'b1; end
        P_LN2:  if (ln_done[1]) begin phase <= P_C2;  cv_start[1] <= 1'b1; end
        P_C2:   if (cv_done[1]) begin phase <= P_IDLE; done <= 1'b1; end
        default: phase <= P_IDLE;
      endcase
    end
  end
  assign busy = (phase != P_IDLE);

  // ---------------- layer-norm engines and their SRAMs ----------------
  logic           lni_en   [2];
  logic [PAW-1:0] lni_addr [2];
  logic           lno_en   [2];
  logic [PAW-1:0] lno_addr [2];
  logic [BW-1:0]  lno_wdata[2];
  logic [BW-1:0]  lni_rdata[2];
  logic           gb_en    [2];
  logic [GAW-1:0] gb_addr  [2];
  logic [LWD-1:0] g_rdata  [2];
  logic [LWD-1:0] be_rdata [2];

  for (genvar l = 0; l < 2; l++) begin : g_ln
    logic [LWD-1:0] bank_rdata [2*LN_BANKS];
    logic [$clog2(LN_BANKS)-1:0] rbank_d;
    wtarget_e tgt;
    assign tgt = (l == 0) ? WT_LN1 : WT_LN2;

    layernorm_engine #(.T(T), .F(F), .C(C), .EPS(EPS)) u_ln (
      .clk, .rst_n, .start(ln_start[l]), .done(ln_done[l]), .busy(ln_busy[l]),
      .in_en(lni_en[l]), .in_addr(lni_addr[l]), .in_rdata(lni_rdata[l]),
      .out_en(lno_en[l]), .out_addr(lno_addr[l]), .out_wdata(lno_wdata[l]),
      .gb_en(gb_en[l]), .gb_addr(gb_addr[l]),
      .gamma_rdata(g_rdata[l]), .beta_rdata(be_rdata[l]));

    for (genvar b = 0; b < 2*LN_BANKS; b++) begin : g_bank
      logic ld, sel;
      assign ld  = wl_en && (wl_target == tgt) && (int'(wl_bank) == b);
      assign sel = gb_en[l] && (int'(gb_addr[l]) / LDEPTH == b % LN_BANKS);
      sram_sp #(.DEPTH(LDEPTH), .WIDTH(LWD)) u_sram (
        .clk, .en(ld || sel), .we(ld),
        .addr(ld ? LAW'(wl_addr) : LAW'(int'(gb_addr[l]) % LDEPTH)),
        .wdata(wl_data[LWD-1:0]), .rdata(bank_rdata[b]));
    end

    always_ff @(posedge clk)
      if (gb_en[l]) rbank_d <= $clog2(LN_BANKS)'(int'(gb_addr[l]) / LDEPTH);
    assign g_rdata[l]  = bank_rdata[int'(rbank_d)];
    assign be_rdata[l] = bank_rdata[LN_BANKS + int'(rbank_d)];
  end

  // ---------------- conv engines and their SRAMs ----------------
  logic           cvi_en   [2];
  logic [PAW-1:0] cvi_addr [2];
  logic [BW-1:0]  cvi_rdata[2];
  logic           cvs_en   [2];
  logic [PAW-1:0] cvs_addr [2];
  logic           cvo_en   [2];
  logic [PAW-1:0] cvo_addr [2];
  logic [BW-1:0]  cvo_wdata[2];

  for (genvar l = 0; l < 2; l++) begin : g_cv
    logic             w_en;
    logic [WAW-1:0]   w_addr;
    logic [KW-1:0]    w_rdata [NBANK];
    logic             ad_en;
    logic [AAW-1:0]   ad_addr;
    data_t            ad_rdata;
    logic             bias_we;
    wtarget_e         tgt_w, tgt_b, tgt_a;
    assign tgt_w = (l == 0) ? WT_CONV1  : WT_CONV2;
    assign tgt_b = (l == 0) ? WT_BIAS1  : WT_BIAS2;
    assign tgt_a = (l == 0) ? WT_ADAPT1 : WT_ADAPT2;
    assign bias_we = wl_en && (wl_target == tgt_b);

    conv2d_engine #(
      .T(T), .F(F), .CIN(C), .COUT(C), .CBUF(C), .NBANK(NBANK),
      .SKIP(l == 1), .LOREN((l == 0) ? LOREN1 : LOREN2),
      .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)
    ) u_conv (
      .clk, .rst_n, .start(cv_start[l]), .cr, .done(cv_done[l]), .busy(cv_busy[l]),
      .in_en(cvi_en[l]), .in_addr(cvi_addr[l]), .in_rdata(cvi_rdata[l]),
      .skip_en(cvs_en[l]), .skip_addr(cvs_addr[l]), .skip_rdata(x_rdata),
      .out_en(cvo_en[l]), .out_addr(cvo_addr[l]), .out_wdata(cvo_wdata[l]),
      .w_en, .w_addr, .w_rdata,
      .a_en(ad_en), .a_addr(ad_addr), .a_rdata(ad_rdata),
      .bias_we, .bias_addr($clog2(C)'(wl_addr)), .bias_wdata(data_t'(wl_data[DW-1:0])));

    for (genvar b = 0; b < NBANK; b++) begin : g_bank
      logic ld;
      assign ld = wl_en && (wl_target == tgt_w) && (int'(wl_bank) == b);
      sram_sp #(.DEPTH(NW), .WIDTH(KW)) u_sram (
        .clk, .en(ld || w_en), .we(ld), .addr(ld ? WAW'(wl_addr) : w_addr),
        .wdata(wl_data[KW-1:0]), .rdata(w_rdata[b]));
    end

    if ((l == 0) ? LOREN1 : LOREN2) begin : g_adapt
      logic ld;
      logic [DW-1:0] rd;
      assign ld = wl_en && (wl_target == tgt_a);
      sram_sp #(.DEPTH(ADEPTH), .WIDTH(DW)) u_sram (
        .clk, .en(ld || ad_en), .we(ld), .addr(ld ? AAW'(wl_addr) : ad_addr),
        .wdata(wl_data[DW-1:0]), .rdata(rd));
      assign ad_rdata = data_t'(rd);
    end else begin : g_noadapt
      assign ad_rdata = '0;
    end
  end

  // ---------------- buffer port multiplexing ----------------
  // X: LN1 input, CONV2 skip
  always_comb begin
    x_en   = (phase == P_LN1) ? lni_en[0] : cvs_en[1];
    x_addr = (phase == P_LN1) ? lni_addr[0] : cvs_addr[1];
  end
  assign lni_rdata[0] = x_rdata;
  // A: LN1 output, CONV1 input, LN2 output, CONV2 input
  always_comb begin
    a_en = 1'b0; a_we = 1'b0; a_addr = '0; a_wdata = '0;
    unique case (phase)
      P_LN1: begin a_en = lno_en[0]; a_we = 1'b1; a_addr = lno_addr[0]; a_wdata = lno_wdata[0]; end
      P_C1:  begin a_en = cvi_en[0]; a_addr = cvi_addr[0]; end
      P_LN2: begin a_en = lno_en[1]; a_we = 1'b1; a_addr = lno_addr[1]; a_wdata = lno_wdata[1]; end
      P_C2:  begin a_en = cvi_en[1]; a_addr = cvi_addr[1]; end
      default: ;
    endcase
  end
  assign cvi_rdata[0] = a_rdata;
  assign cvi_rdata[1] = a_rdata;
  // B: CONV1 output, LN2 input, CONV2 output
  always_comb begin
    b_en = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    unique case (phase)
      P_C1:  begin b_en = cvo_en[0]; b_we = 1'b1; b_addr = cvo_addr[0]; b_wdata = cvo_wdata[0]; end
      P_LN2: begin b_en = lni_en[1]; b_addr = lni_addr[1]; end
      P_C2:  begin b_en = cvo_en[1]; b_we = 1'b1; b_addr = cvo_addr[1]; b_wdata = cvo_wdata[1]; end
      default: ;
    endcase
  end
  assign lni_rdata[1] = b_rdata;

`ifndef SYNTHESIS
  // Weights may only be loaded while the block is idle.
  assert property (@(posedge clk) disable iff (!rst_n) wl_en |-> !busy)
    else $error("res_block: weight load while busy");
`endif

endmodule
