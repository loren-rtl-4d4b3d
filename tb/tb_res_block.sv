// tb_res_block: one residual block at a reduced size (T=3, F=4, C=8,
// 4 kernel banks, adapters on both convs, rank 2, three code rates).
// Weights are loaded through the load bus, the block input sits in buffer
// X; the output found in buffer B after done must equal the reference
// LN -> conv -> LN -> conv + X for each code rate, X must be left
// unchanged, and the three code rates must give three different outputs.
module tb_res_block;
  import loren_pkg::*;
  import loren_ref_pkg::*;
  localparam int T = 3, F = 4, C = 8, NBANK = 4, LN_BANKS = 4;
  localparam int RANK = 2, ALPHA = 1, NUM_CR = 3, EPS = 64;
  localparam int NPOS = T*F, PAW = $clog2(NPOS), BW = C*DW;
  localparam int LDEPTH = F*C/LN_BANKS, ADEPTH = NUM_CR*RANK*2*C;

  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic [1:0] cr = '0;
  logic x_en, a_en, a_we, b_en, b_we;
  logic [PAW-1:0] x_addr, a_addr, b_addr;
  logic [BW-1:0] x_rdata, a_rdata, b_rdata, a_wdata, b_wdata;
  logic wl_en = 0;
  wtarget_e wl_target = WT_CONV1;
  logic [2:0] wl_bank = '0;
  logic [15:0] wl_addr = '0;
  logic [223:0] wl_data = '0;

  res_block #(.T(T), .F(F), .C(C), .NBANK(NBANK), .LN_BANKS(LN_BANKS), .LOREN1(1'b1), .LOREN2(1'b1),
              .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR), .EPS(EPS)) dut (.*);

  logic [BW-1:0] mx [NPOS], ma [NPOS], mb [NPOS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_ff @(posedge clk) begin
    if (x_en) x_rdata <= mx[x_addr];
    if (a_en) begin if (a_we) ma[a_addr] <= a_wdata; else a_rdata <= ma[a_addr]; end
    if (b_en) begin if (b_we) mb[b_addr] <= b_wdata; else b_rdata <= mb[b_addr]; end
  end

  task automatic wl(input wtarget_e tg, input int bank, input int addr, input logic [223:0] data);
    @(negedge clk);
    wl_en = 1; wl_target = tg; wl_bank = 3'(bank); wl_addr = 16'(addr); wl_data = data;
    @(negedge clk);
    wl_en = 0;
  endtask

  initial begin
    int x[], wc[2][], bc[2][], g[2][], be[2][], am[2][], h[], y1[], yref[], prev[][];
    int a[], bm[];
    prev = new[NUM_CR];
    x = new[NPOS*C]; foreach (x[i]) x[i] = rnd(2048);
    for (int l = 0; l < 2; l++) begin
      wc[l] = new[C*C*9]; foreach (wc[l][i]) wc[l][i] = rnd(40);
      bc[l] = new[C];     foreach (bc[l][i]) bc[l][i] = rnd(64);
      g[l]  = new[NPOS*C]; foreach (g[l][i]) g[l][i] = 256 + rnd(64);
      be[l] = new[NPOS*C]; foreach (be[l][i]) be[l][i] = rnd(64);
      am[l] = new[ADEPTH]; foreach (am[l][i]) am[l][i] = rnd(300);
    end
    for (int p = 0; p < NPOS; p++)
      for (int c = 0; c < C; c++) mx[p][c*DW +: DW] = DW'(x[p*C + c]);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      for (int s = 0; s < NBANK; s++)
        for (int ad = 0; ad < C*C/NBANK; ad++) begin
          automatic int o = (ad / C)*NBANK + s, i = ad % C;
          automatic logic [223:0] v = '0;
          for (int k = 0; k < 9; k++) v[k*DW +: DW] = DW'(wc[l][(o*C + i)*9 + k]);
          wl(l == 0 ? WT_CONV1 : WT_CONV2, s, ad, v);
        end
      for (int o = 0; o < C; o++) wl(l == 0 ? WT_BIAS1 : WT_BIAS2, 0, o, 224'(DW'(bc[l][o])));
      for (int bank = 0; bank < 2*LN_BANKS; bank++)
        for (int ad = 0; ad < LDEPTH; ad++) begin
          automatic int idx = (bank % LN_BANKS)*LDEPTH + ad;
          automatic int f = idx / C, c = idx % C;
          automatic logic [223:0] v = '0;
          for (int t = 0; t < T; t++)
            v[t*DW +: DW] = DW'(bank < LN_BANKS ? g[l][(t*F + f)*C + c] : be[l][(t*F + f)*C + c]);
          wl(l == 0 ? WT_LN1 : WT_LN2, bank, ad, v);
        end
      for (int ad = 0; ad < ADEPTH; ad++) wl(l == 0 ? WT_ADAPT1 : WT_ADAPT2, 0, ad, 224'(DW'(am[l][ad])));
    end
    a = new[C*RANK]; bm = new[C*RANK];
    for (int r = 0; r < NUM_CR; r++) begin
      automatic int base = r*RANK*2*C;
      // reference
      ln_ref(T, F, C, EPS, 16, x, g[0], be[0], h);
      for (int i = 0; i < C*RANK; i++) begin a[i] = am[0][base + i]; bm[i] = am[0][base + C*RANK + i]; end
      conv_ref(T, F, C, C, h, wc[0], bc[0], 1'b0, x, 1'b1, RANK, ALPHA, a, bm, y1);
      ln_ref(T, F, C, EPS, 16, y1, g[1], be[1], h);
      for (int i = 0; i < C*RANK; i++) begin a[i] = am[1][base + i]; bm[i] = am[1][base + C*RANK + i]; end
      conv_ref(T, F, C, C, h, wc[1], bc[1], 1'b1, x, 1'b1, RANK, ALPHA, a, bm, yref);
      // run
      @(negedge clk); start = 1; cr = 2'(r);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int p = 0; p < NPOS; p++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (int'(data_t'(mb[p][c*DW +: DW])) != yref[p*C + c]) begin
            failures++;
            if (failures < 10) $display("FAIL cr=%0d cell %0d ch %0d got %0d exp %0d", r, p, c,
                                        data_t'(mb[p][c*DW +: DW]), yref[p*C + c]);
          end
          checks++;
          if (int'(data_t'(mx[p][c*DW +: DW])) != x[p*C + c]) begin failures++; $display("FAIL X modified"); end
        end
      for (int q = 0; q < r; q++) begin
        checks++;
        if (prev[q] == yref) begin failures++; $display("FAIL code rates %0d and %0d agree", q, r); end
      end
      prev[r] = yref;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
