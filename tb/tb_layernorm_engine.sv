// tb_layernorm_engine: a small LayerNorm (T=3, F=4, C=8) on two random
// tensors (one with a large negative offset, so the mean is negative and
// far from zero) with random gamma/beta; every output element is compared
// with the reference, and the frame time is checked to be at most
// T*F + T*F*(C+3) + 300 cycles.
module tb_layernorm_engine;
  import loren_pkg::*;
  import loren_ref_pkg::*;
  localparam int T = 3, F = 4, C = 8, EPS = 64, GBITS = 16;
  localparam int NPOS = T*F, BW = C*DW;

  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic in_en, out_en, gb_en;
  logic [$clog2(NPOS)-1:0] in_addr, out_addr;
  logic [BW-1:0] in_rdata, out_wdata;
  logic [$clog2(F*C)-1:0] gb_addr;
  logic [T*DW-1:0] gamma_rdata, beta_rdata;
  int xin[], g[], be[];
  int yout [NPOS*C];
  int m_x [NPOS*C], m_g [NPOS*C], m_b [NPOS*C];
  int checks = 0, failures = 0;

  layernorm_engine #(.T(T), .F(F), .C(C), .EPS(EPS), .GBITS(GBITS)) dut (.*);

  function automatic logic [15:0] lo16(input int v); return v[15:0]; endfunction

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_ff @(posedge clk) begin
    if (in_en) for (int c = 0; c < C; c++) in_rdata[c*DW +: DW] <= lo16(m_x[int'(in_addr)*C + c]);
    if (gb_en)
      for (int t = 0; t < T; t++) begin
        automatic int f = int'(gb_addr) / C, c = int'(gb_addr) % C;
        gamma_rdata[t*DW +: DW] <= lo16(m_g[(t*F + f)*C + c]);
        beta_rdata[t*DW +: DW]  <= lo16(m_b[(t*F + f)*C + c]);
      end
    if (out_en) for (int c = 0; c < C; c++) yout[int'(out_addr)*C + c] <= int'(data_t'(out_wdata[c*DW +: DW]));
  end

  initial begin
    int yref[];
    int cyc;
    xin = new[NPOS*C]; g = new[NPOS*C]; be = new[NPOS*C];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      foreach (xin[i]) xin[i] = (trial == 0) ? rnd(3000) : rnd(500) - 6000;
      foreach (g[i]) g[i] = 256 + rnd(128);
      foreach (be[i]) be[i] = rnd(128);
      foreach (xin[i]) begin m_x[i] = xin[i]; m_g[i] = g[i]; m_b[i] = be[i]; end
      ln_ref(T, F, C, EPS, GBITS, xin, g, be, yref);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > NPOS + NPOS*(C+3) + 300) begin failures++; $display("FAIL cycles %0d", cyc); end
      foreach (yref[i]) begin
        checks++;
        if (yout[i] != yref[i]) begin
          failures++;
          if (failures < 10) $display("FAIL elem %0d got %0d exp %0d (x=%0d)", i, yout[i], yref[i], xin[i]);
        end
      end
      $display("trial %0d: %0d cycles, y[0]=%0d", trial, cyc, yref[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
