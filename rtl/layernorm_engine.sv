// layernorm_engine: one layer-normalisation layer of a residual block.
//
// The whole T x F x C activation tensor is normalised with one mean and one
// variance, then scaled and shifted element by element:
//   y[t][f][c] = gamma[t][f][c] * (x - mean) / sqrt(var + eps) + beta[t][f][c].
// gamma and beta each have T x F x C entries, which is the 128 x 128 x 14
// parameter count the paper gives per layer-normalisation layer; they come
// from gamma/beta SRAMs whose 224-bit word holds the T values of one
// (subcarrier f, channel c) pair, word index f*C + c.
//
// Schedule (this design's choice):
//   1. statistics: one buffer word (one cell, all C channels) per cycle;
//      S1 = sum x and S2 = sum x^2 over all N = T*F*C elements.
//   2. mean = S1 / N (truncated toward zero, FRAC fraction bits),
//      var  = S2 / N - mean^2 (2*FRAC fraction bits, clamped at 0) + EPS,
//      sd   = isqrt(var) (FRAC fraction bits),
//      inv  = 2^(FRAC+GBITS) / sd (GBITS fraction bits)
//      with a shared sequential divider and square root, ~250 cycles.
//   3. normalise: per cell the word is read, then channel c's gamma and beta
//      words are read (one per cycle) and
//        n = ((x - mean) * inv) >>> GBITS,
//        y = sat16(((n * gamma) >>> FRAC) + beta);
//      the finished word is written back to the output buffer.
// Statistics take T*F + 2 cycles, normalising T*F*(C + 3) cycles.
// Interface: start pulse -> done pulse; buffer and gamma/beta ports are
// SRAM masters with one-cycle read latency.
module layernorm_engine
  import loren_pkg::*;
#(
  parameter int unsigned T     = 14,
  parameter int unsigned F     = 128,
  parameter int unsigned C     = 128,
  parameter int unsigned EPS   = 64,   // added to the variance, 2*FRAC fraction bits
  parameter int unsigned GBITS = 16,   // fraction bits of 1/sd
  localparam int unsigned NPOS = T * F,
  localparam int unsigned PAW  = $clog2(NPOS),
  localparam int unsigned GAW  = $clog2(F * C),
  localparam int unsigned BW   = C * DW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            done,
  output logic            busy,
  // input buffer
  output logic            in_en,
  output logic [PAW-1:0]  in_addr,
  input  logic [BW-1:0]   in_rdata,
  // output buffer
  output logic            out_en,
  output logic [PAW-1:0]  out_addr,
  output logic [BW-1:0]   out_wdata,
  // gamma / beta SRAM read (common index f*C + c)
  output logic            gb_en,
  output logic [GAW-1:0]  gb_addr,
  input  logic [T*DW-1:0] gamma_rdata,
  input  logic [T*DW-1:0] beta_rdata
);

  localparam longint unsigned N = longint'(T) * F * C;

  typedef enum logic [3:0] {
    S_IDLE, S_SUM, S_SUM_LAST, S_MEAN, S_MSQ, S_SQRT, S_INV,
    S_NREAD, S_NWAIT, S_NCH, S_NLAST, S_NWRITE
  } state_e;
  state_e state;

  logic [PAW-1:0]   pos;
  logic             rd_vld_d;
  logic signed [63:0] s1;
  logic [63:0]      s2;
  logic signed [31:0] mean;
  logic [63:0]      inv;
  logic [$clog2(C+1)-1:0] ch, ch_d;
  data_t            xv   [C];
  data_t            yv   [C];
  int unsigned      t_cur, f_cur;

  // shared divider and square root
  logic             div_start, div_done, sq_start, sq_done;
  logic [63:0]      div_a, div_b, div_q;
  logic [31:0]      sq_root;
  logic [63:0]      var_q;
  logic             s1_neg;

  seq_div   #(.WIDTH(64)) u_div (.clk, .rst_n, .start(div_start), .dividend(div_a),
                                 .divisor(div_b), .done(div_done), .quotient(div_q));
  seq_isqrt #(.WIDTH(64)) u_sqrt(.clk, .rst_n, .start(sq_start), .radicand(var_q),
                                 .done(sq_done), .root(sq_root));

  always_comb begin
    t_cur = int'(pos) / F;
    f_cur = int'(pos) % F;
  end

  // Sum of one word and of its squares.
  logic signed [63:0] wsum;
  logic [63:0]        wsq;
  always_comb begin
    wsum = '0; wsq = '0;
    for (int c = 0; c < C; c++) begin
      automatic logic signed [31:0] v = 32'(data_t'(in_rdata[c*DW +: DW]));
      wsum += 64'(v);
      wsq  += 64'(v * v);
    end
  end

  // Normalisation of channel ch_d with the arriving gamma/beta words.
  acc_t  nrm, yfull;
  data_t g_sel, b_sel;
  always_comb begin
    g_sel = data_t'(gamma_rdata[t_cur*DW +: DW]);
    b_sel = data_t'(beta_rdata[t_cur*DW +: DW]);
    nrm   = ((acc_t'(xv[int'(ch_d) % C]) - acc_t'(mean)) * acc_t'(inv)) >>> GBITS;
    yfull = ((nrm * acc_t'(g_sel)) >>> FRAC) + acc_t'(b_sel);
  end

  always_comb begin
    busy     = (state != S_IDLE);
    in_en    = (state == S_SUM) || (state == S_NREAD);
    in_addr  = pos;
    gb_en    = (state == S_NCH);
    gb_addr  = GAW'(f_cur * C + int'(ch));
    out_en   = (state == S_NWRITE);
    out_addr = pos;
    for (int c = 0; c < C; c++) out_wdata[c*DW +: DW] = yv[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pos <= '0; rd_vld_d <= 1'b0; s1 <= '0; s2 <= '0;
      mean <= '0; inv <= '0; ch <= '0; ch_d <= '0; done <= 1'b0;
      div_start <= 1'b0; sq_start <= 1'b0; div_a <= '0; div_b <= '0; var_q <= '0;
      s1_neg <= 1'b0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      rd_vld_d  <= (state == S_SUM);
      if (rd_vld_d) begin
        s1 <= s1 + wsum;
        s2 <= s2 + wsq;
      end
      ch_d <= ch;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_SUM; pos <= '0; s1 <= '0; s2 <= '0;
        end
        S_SUM: if (int'(pos) == NPOS - 1) state <= S_SUM_LAST;
               else pos <= pos + 1'b1;
        S_SUM_LAST: if (!rd_vld_d) begin   // last word has been added
          state     <= S_MEAN;
          s1_neg    <= s1[63];
          div_a     <= s1[63] ? 64'(-s1) : 64'(s1);
          div_b     <= 64'(N);
          div_start <= 1'b1;
        end
        S_MEAN: if (div_done) begin
          mean      <= s1_neg ? -32'(div_q) : 32'(div_q);
          state     <= S_MSQ;
          div_a     <= s2;
          div_b     <= 64'(N);
          div_start <= 1'b1;
        end
        S_MSQ: if (div_done) begin
          automatic logic signed [64:0] vr = $signed({1'b0, div_q}) - 65'(64'(mean) * 64'(mean));
          var_q    <= (vr < 0) ? 64'(EPS) : 64'(vr) + 64'(EPS);
          sq_start <= 1'b1;
          state    <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          div_a     <= 64'(1) << (FRAC + GBITS);
          div_b     <= 64'(sq_root);
          div_start <= 1'b1;
          state     <= S_INV;
        end
        S_INV: if (div_done) begin
          inv   <= div_q;
          pos   <= '0;
          state <= S_NREAD;
        end
        S_NREAD: state <= S_NWAIT;
        S_NWAIT: begin
          for (int c = 0; c < C; c++) xv[c] <= data_t'(in_rdata[c*DW +: DW]);
          ch    <= '0;
          state <= S_NCH;
        end
        S_NCH: begin
          if (int'(ch) == C - 1) state <= S_NLAST;
          ch <= ch + 1'b1;
        end
        S_NLAST: state <= S_NWRITE;
        S_NWRITE: begin
          if (int'(pos) == NPOS - 1) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            pos <= pos + 1'b1; state <= S_NREAD;
          end
        end
        default: state <= S_IDLE;
      endcase
      // gamma/beta data for channel ch_d arrives one cycle after issue
      if (state == S_NCH && ch != '0 || state == S_NLAST)
        yv[int'(ch_d) % C] <= sat16(yfull);
    end
  end

endmodule
