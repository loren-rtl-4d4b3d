// conv2d_engine: one CONV2D 3x3 layer of the receiver, or a LORENCONV2D
// layer when LOREN=1.
//
// The layer maps a T x F grid (OFDM symbols x subcarriers) of CIN-channel
// feature vectors to COUT channels with a 3x3 kernel, 'same' zero padding
// at the grid edges, and a bias per output channel. With SKIP=1 the block
// input read from a second buffer is added after the convolution (the skip
// connection closing a residual block). With LOREN=1 the low-rank
// adapter's delta for the selected code rate is added before rounding.
//
// Work is done one grid cell at a time, in raster order (symbol-major):
//   1. fill: the 3x3 neighbourhood (9 buffer words of CBUF channels) is read
//      into a window register; cells outside the grid read as zero; the skip
//      word is read at the same time.
//   2. adapt (LOREN only): loren_adapter computes delta from the centre cell.
//   3. convolve: the NBANK kernel SRAMs are read once through, one word from
//      each per cycle, so NBANK kernels (9 taps each) are applied per cycle.
//      Word a of bank s holds the kernel of input channel a % CIN and output
//      channel (a / CIN) * NBANK + s. After the last input channel of a group
//      of NBANK outputs, each output is finished:
//        y = sat16( (acc + bias<<FRAC + delta) >>> FRAC + skip ).
//   4. write: the output word (CBUF channels, unused ones zero) is written.
// A cell takes 10 + COUT*CIN/NBANK + 2 cycles (+ the adapter's
// CIN*RANK + COUT*RANK + 3). With NBANK = 4 the four 4096 x 144 SRAMs of one
// 128 x 128 layer are each read once per cell, the parallel organisation of
// the paper's weight memory; the cell-serial schedule is this design's.
//
// Interface: start pulse (cr sampled) -> done pulse after the whole grid.
// Buffer and weight ports are single-port SRAM masters with one-cycle read
// latency. Bias values are written through bias_we/bias_addr/bias_wdata.
module conv2d_engine
  import loren_pkg::*;
#(
  parameter int unsigned T      = 14,
  parameter int unsigned F      = 128,
  parameter int unsigned CIN    = 128,
  parameter int unsigned COUT   = 128,
  parameter int unsigned CBUF   = 128,   // channels per activation buffer word
  parameter int unsigned NBANK  = 4,
  parameter bit          SKIP   = 1'b0,
  parameter bit          LOREN  = 1'b0,
  parameter int unsigned RANK   = 4,
  parameter int unsigned ALPHA  = 1,
  parameter int unsigned NUM_CR = 3,
  localparam int unsigned NPOS  = T * F,
  localparam int unsigned PAW   = $clog2(NPOS),
  localparam int unsigned NW    = COUT * CIN / NBANK,
  localparam int unsigned WAW   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned ADEPTH= NUM_CR * RANK * (CIN + COUT),
  localparam int unsigned AAW   = $clog2(ADEPTH),
  localparam int unsigned CRW   = (NUM_CR > 1) ? $clog2(NUM_CR) : 1,
  localparam int unsigned BW    = CBUF * DW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CRW-1:0]   cr,
  output logic             done,
  output logic             busy,
  // input activation buffer (read only)
  output logic             in_en,
  output logic [PAW-1:0]   in_addr,
  input  logic [BW-1:0]    in_rdata,
  // skip buffer (read only, used when SKIP)
  output logic             skip_en,
  output logic [PAW-1:0]   skip_addr,
  input  logic [BW-1:0]    skip_rdata,
  // output activation buffer (write only)
  output logic             out_en,
  output logic [PAW-1:0]   out_addr,
  output logic [BW-1:0]    out_wdata,
  // kernel SRAMs, NBANK in parallel, common address
  output logic             w_en,
  output logic [WAW-1:0]   w_addr,
  input  logic [KW-1:0]    w_rdata [NBANK],
  // adapter SRAM (used when LOREN)
  output logic             a_en,
  output logic [AAW-1:0]   a_addr,
  input  data_t            a_rdata,
  // bias register file write port
  input  logic             bias_we,
  input  logic [$clog2(COUT)-1:0] bias_addr,
  input  data_t            bias_wdata
);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_ADAPT, S_CONV, S_DRAIN, S_WRITE} state_e;
  state_e state;

  data_t          bias   [COUT];
  data_t          win    [KTAPS][CIN];
  data_t          skipv  [COUT];
  data_t          outv   [CBUF];
  acc_t           acc    [NBANK];
  acc_t           delta  [COUT];
  logic [CRW-1:0] cr_q;
  logic [PAW-1:0] pos;
  int unsigned    t_cur, f_cur;
  logic [3:0]     k;          // fill tap issued
  logic [3:0]     k_d;
  logic           k_vld_d, k_zero_d;
  logic [WAW-1:0] wa;         // kernel word issued
  logic [WAW-1:0] wa_d;
  logic           wa_vld_d;
  logic           ad_start, ad_done;

  always_comb begin
    t_cur = int'(pos) / F;
    f_cur = int'(pos) % F;
  end

  // Neighbour of the current cell for tap k and whether it lies in the grid.
  int  nt, nf;
  logic in_grid;
  always_comb begin
    nt = int'(t_cur) + int'(k) / 3 - 1;
    nf = int'(f_cur) + int'(k) % 3 - 1;
    in_grid = (nt >= 0) && (nt < int'(T)) && (nf >= 0) && (nf < int'(F));
  end

  always_comb begin
    in_en     = (state == S_FILL) && (k < 4'd9) && in_grid;
    in_addr   = PAW'(nt * int'(F) + nf);
    skip_en   = SKIP && (state == S_FILL) && (k == 4'd0);
    skip_addr = pos;
    w_en      = (state == S_CONV);
    w_addr    = wa;
    out_en    = (state == S_WRITE);
    out_addr  = pos;
    for (int c = 0; c < CBUF; c++) out_wdata[c*DW +: DW] = outv[c];
    busy      = (state != S_IDLE);
  end

  // Adapter (LORENCONV2D only).
  if (LOREN) begin : g_loren
    loren_adapter #(.CIN(CIN), .COUT(COUT), .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)) u_adapter (
      .clk, .rst_n, .start(ad_start), .cr(cr_q), .x(win[4]), .done(ad_done), .delta(delta),
      .mem_en(a_en), .mem_addr(a_addr), .mem_rdata(a_rdata));
  end else begin : g_noloren
    assign ad_done = 1'b0;
    assign a_en    = 1'b0;
    assign a_addr  = '0;
    for (genvar o = 0; o < COUT; o++) begin : g_zd
      assign delta[o] = '0;
    end
  end

  // MAC of the arriving kernel words against the window.
  int unsigned cin_d, grp_d;
  acc_t        sum_now [NBANK];
  always_comb begin
    cin_d = int'(wa_d) % CIN;
    grp_d = int'(wa_d) / CIN;
    for (int s = 0; s < NBANK; s++) begin
      sum_now[s] = acc[s];
      for (int tap = 0; tap < KTAPS; tap++)
        sum_now[s] += acc_t'(win[tap][cin_d]) *
                      acc_t'($signed(w_rdata[s][tap*DW +: DW]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pos <= '0; k <= '0; k_d <= '0; k_vld_d <= 1'b0; k_zero_d <= 1'b0;
      wa <= '0; wa_d <= '0; wa_vld_d <= 1'b0; done <= 1'b0; ad_start <= 1'b0; cr_q <= '0;
      for (int s = 0; s < NBANK; s++) acc[s] <= '0;
      for (int c = 0; c < CBUF; c++) outv[c] <= '0;
    end else begin
      done     <= 1'b0;
      ad_start <= 1'b0;
      if (bias_we) bias[bias_addr] <= bias_wdata;
      // window capture (one cycle after issue)
      k_vld_d  <= (state == S_FILL) && (k < 4'd9);
      k_d      <= k;
      k_zero_d <= !in_grid;
      if (k_vld_d)
        for (int c = 0; c < CIN; c++)
          win[k_d][c] <= k_zero_d ? data_t'(0) : data_t'(in_rdata[c*DW +: DW]);
      if (SKIP && k_vld_d && k_d == 4'd0)
        for (int o = 0; o < COUT; o++) skipv[o] <= data_t'(skip_rdata[o*DW +: DW]);
      // MAC pipeline
      wa_vld_d <= (state == S_CONV);
      wa_d     <= wa;
      if (wa_vld_d) begin
        if (cin_d == CIN - 1) begin
          for (int s = 0; s < NBANK; s++) begin
            automatic int unsigned o = grp_d * NBANK + s;
            automatic acc_t v = sum_now[s] + (acc_t'(bias[o]) <<< FRAC) + delta[o];
            v = (v >>> FRAC) + (SKIP ? acc_t'(skipv[o]) : acc_t'(0));
            outv[o] <= sat16(v);
            acc[s]  <= '0;
          end
        end else begin
          for (int s = 0; s < NBANK; s++) acc[s] <= sum_now[s];
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FILL; pos <= '0; k <= '0; cr_q <= cr;
        end
        S_FILL: begin
          if (k == 4'd9) begin
            // last tap captured this cycle
            if (LOREN) begin state <= S_ADAPT; ad_start <= 1'b1; end
            else begin state <= S_CONV; wa <= '0; end
          end else k <= k + 1'b1;
        end
        S_ADAPT: if (ad_done) begin state <= S_CONV; wa <= '0; end
        S_CONV: begin
          if (int'(wa) == NW - 1) state <= S_DRAIN;
          else wa <= wa + 1'b1;
        end
        S_DRAIN: state <= S_WRITE;   // last kernel word is accumulated here
        S_WRITE: begin
          if (int'(pos) == NPOS - 1) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            pos <= pos + 1'b1; k <= '0; state <= S_FILL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  initial assert (COUT % NBANK == 0) else $fatal(1, "COUT must be a multiple of NBANK");
  initial assert (CIN <= CBUF && COUT <= CBUF) else $fatal(1, "channel count exceeds buffer word");
`endif

endmodule
