// tb_conv2d_engine: a small LORENCONV2D layer with skip connection
// (T=4, F=5, 8 -> 8 channels, 4 kernel banks, rank 2, 2 code rates) on
// random data. Every output channel of every cell is compared with the
// reference for both code rates, which must differ; the frame time must be
// T*F*(12 + COUT*CIN/NBANK + CIN*RANK + COUT*RANK + 3) + 1 cycles
// from the start pulse to the done pulse.
module tb_conv2d_engine;
  import loren_pkg::*;
  import loren_ref_pkg::*;
  localparam int T = 4, F = 5, CIN = 8, COUT = 8, CBUF = 8, NBANK = 4;
  localparam int RANK = 2, ALPHA = 1, NUM_CR = 2;
  localparam int NPOS = T*F, NW = COUT*CIN/NBANK;
  localparam int ADEPTH = NUM_CR*RANK*(CIN+COUT);
  localparam int BW = CBUF*DW;

  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic [0:0] cr = '0;
  logic in_en, skip_en, out_en, w_en, a_en;
  logic [$clog2(NPOS)-1:0] in_addr, skip_addr, out_addr;
  logic [BW-1:0] in_rdata, skip_rdata, out_wdata;
  logic [$clog2(NW)-1:0] w_addr;
  logic [KW-1:0] w_rdata [NBANK];
  logic [$clog2(ADEPTH)-1:0] a_addr;
  data_t a_rdata;
  logic bias_we = 0;
  logic [$clog2(COUT)-1:0] bias_addr = '0;
  data_t bias_wdata = '0;

  int xin[], skp[], w[], bias[], amem[];
  int yout [NPOS*COUT];
  int m_x [NPOS*CIN], m_s [NPOS*COUT], m_w [COUT*CIN*9], m_a [ADEPTH];
  int checks = 0, failures = 0;

  conv2d_engine #(.T(T), .F(F), .CIN(CIN), .COUT(COUT), .CBUF(CBUF), .NBANK(NBANK),
                  .SKIP(1'b1), .LOREN(1'b1), .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)) dut (.*);

  function automatic logic [15:0] lo16(input int v); return v[15:0]; endfunction

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // memory models, one-cycle read latency
  always_ff @(posedge clk) begin
    if (in_en) for (int c = 0; c < CBUF; c++) in_rdata[c*DW +: DW] <= lo16(m_x[int'(in_addr)*CIN + c]);
    if (skip_en) for (int c = 0; c < CBUF; c++) skip_rdata[c*DW +: DW] <= lo16(m_s[int'(skip_addr)*COUT + c]);
    if (a_en) a_rdata <= data_t'(m_a[a_addr]);
    if (w_en)
      for (int s = 0; s < NBANK; s++) begin
        automatic int o = (int'(w_addr) / CIN) * NBANK + s;
        automatic int i = int'(w_addr) % CIN;
        for (int k = 0; k < 9; k++) w_rdata[s][k*DW +: DW] <= lo16(m_w[(o*CIN + i)*9 + k]);
      end
    if (out_en) for (int c = 0; c < COUT; c++) yout[int'(out_addr)*COUT + c] <= int'(data_t'(out_wdata[c*DW +: DW]));
  end

  initial begin
    int yref[], a[], b[], prev[];
    int cyc, exp_cyc;
    xin = new[NPOS*CIN]; skp = new[NPOS*COUT]; w = new[COUT*CIN*9]; bias = new[COUT];
    amem = new[ADEPTH]; a = new[CIN*RANK]; b = new[COUT*RANK];
    foreach (xin[i]) xin[i] = rnd(1024);
    xin[0] = 32767; xin[1] = 32767;        // drive one cell towards saturation
    foreach (skp[i]) skp[i] = rnd(1024);
    foreach (w[i]) w[i] = rnd(128);
    for (int k = 0; k < 9; k++) w[k] = 4000; // large kernel on channel pair (0,0)
    foreach (bias[i]) bias[i] = rnd(256);
    foreach (amem[i]) amem[i] = rnd(256);
    foreach (xin[i]) m_x[i] = xin[i];
    foreach (skp[i]) m_s[i] = skp[i];
    foreach (w[i]) m_w[i] = w[i];
    foreach (amem[i]) m_a[i] = amem[i];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int o = 0; o < COUT; o++) begin
      @(negedge clk); bias_we = 1; bias_addr = 3'(o); bias_wdata = data_t'(bias[o]);
    end
    @(negedge clk); bias_we = 0;
    exp_cyc = NPOS * (12 + NW + CIN*RANK + COUT*RANK + 3) + 1;
    for (int r = 0; r < NUM_CR; r++) begin
      automatic int base = r*RANK*(CIN+COUT);
      automatic int nsat = 0;
      for (int i = 0; i < CIN*RANK; i++) a[i] = amem[base + i];
      for (int i = 0; i < COUT*RANK; i++) b[i] = amem[base + CIN*RANK + i];
      conv_ref(T, F, CIN, COUT, xin, w, bias, 1'b1, skp, 1'b1, RANK, ALPHA, a, b, yref);
      @(negedge clk); start = 1; cr = 1'(r);
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL frame cycles %0d exp %0d", cyc, exp_cyc); end
      foreach (yref[i]) begin
        checks++;
        if (yout[i] != yref[i]) begin
          failures++;
          if (failures < 10) $display("FAIL cr=%0d cell=%0d ch=%0d got %0d exp %0d", r, i/COUT, i%COUT, yout[i], yref[i]);
        end
        if (yref[i] == 32767 || yref[i] == -32768) nsat++;
      end
      checks++;
      if (nsat == 0) begin failures++; $display("FAIL no saturation exercised"); end
      if (r > 0) begin
        checks++;
        if (prev == yref) begin failures++; $display("FAIL code rates give same output"); end
      end
      prev = yref;
      $display("cr=%0d: %0d cycles, %0d saturated outputs", r, cyc, nsat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
