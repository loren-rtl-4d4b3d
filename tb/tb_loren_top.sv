// tb_loren_top: end-to-end test of the receiver at a reduced size
// (T=14 symbols, F=16 subcarriers, C=16 channels, rank 4, three code rates,
// adapters on both convs of the last residual block as in the default).
//
// Random weights, biases, LayerNorm parameters and adapters are loaded
// through the weight-load bus and a random received grid through the input
// port. Three frames are run with the code rates 0, 1, 2 and a fourth with
// code rate 0 again; each frame's LLR stream is compared value by value
// with the bit-exact reference (input conv, 4 x (LN, conv, LN, conv, skip),
// output conv). Mechanisms counted, each of which must occur: code-rate
// switches (also read back from the receiver's counter), a frame whose
// output differs from the one with another code rate, a repeated code rate
// reproducing its earlier output exactly, and LLR cells delivered at the grid
// border (zero padding).
module tb_loren_top;
  import loren_pkg::*;
  import loren_ref_pkg::*;

  localparam int T = 14, F = 16, C = 16, CIN0 = 3, COUT_F = 4, NBANK = 4;
  localparam int NUM_CR = 3, RANK = 4, ALPHA = 1, EPS = 64;
  localparam logic [7:0] LOREN_MASK = 8'b1100_0000;
  localparam int MAXCYC = 3_000_000;
  localparam int NFRAMES = 4;

  localparam int NPOS = T*F, PAW = $clog2(NPOS), NBLK = 4, LN_BANKS = 4;
  localparam int LDEPTH = F*C/LN_BANKS, ADEPTH = NUM_CR*RANK*2*C;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [1:0] cr_sel = '0;
  logic [15:0] frames, cr_switches;
  logic in_we = 0;
  logic [PAW-1:0] in_addr = '0;
  logic [CIN0*DW-1:0] in_data = '0;
  logic wl_en = 0;
  logic [2:0] wl_stage = '0, wl_target = '0, wl_bank = '0;
  logic [15:0] wl_addr = '0;
  logic [223:0] wl_data = '0;
  logic llr_valid;
  logic [PAW-1:0] llr_addr;
  logic [COUT_F*DW-1:0] llr_data;

  loren_top #(.T(T), .F(F), .C(C), .CIN0(CIN0), .COUT_F(COUT_F), .NBANK(NBANK),
              .NUM_CR(NUM_CR), .RANK(RANK), .ALPHA(ALPHA), .LOREN_MASK(LOREN_MASK), .EPS(EPS)) dut (.*);

  int checks = 0, failures = 0;
  int llr_got [NPOS*COUT_F];
  int llr_cnt = 0, border_cells = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always_ff @(posedge clk)
    if (llr_valid) begin
      for (int o = 0; o < COUT_F; o++)
        llr_got[int'(llr_addr)*COUT_F + o] <= int'(data_t'(llr_data[o*DW +: DW]));
      llr_cnt <= llr_cnt + 1;
      if (int'(llr_addr) / F == 0 || int'(llr_addr) / F == T-1 ||
          int'(llr_addr) % F == 0 || int'(llr_addr) % F == F-1) border_cells <= border_cells + 1;
    end

  // network parameters (flat, see loren_ref_pkg)
  int x0[], w_in[], b_in[], w_out[], b_out[];
  int wc [NBLK*2][];
  int bc [NBLK*2][];
  int gam [NBLK*2][];
  int bet [NBLK*2][];
  int amem [NBLK*2][];

  task automatic wl(input int stage, input int target, input int bank, input int addr,
                    input logic [223:0] data);
    @(negedge clk);
    wl_en = 1; wl_stage = 3'(stage); wl_target = 3'(target); wl_bank = 3'(bank);
    wl_addr = 16'(addr); wl_data = data;
    @(negedge clk);
    wl_en = 0;
  endtask

  function automatic logic [KW-1:0] kword(input int w[], input int o, input int i, input int cin);
    logic [KW-1:0] v;
    for (int k = 0; k < 9; k++) v[k*DW +: DW] = DW'(w[(o*cin + i)*9 + k]);
    return v;
  endfunction

  task automatic load_all();
    int wmax;
    // input / output conv share one SRAM
    for (int a = 0; a < CIN0*C; a++) wl(0, 0, 0, a, 224'(kword(w_in, a / CIN0, a % CIN0, CIN0)));
    for (int a = 0; a < C*COUT_F; a++) wl(0, 0, 0, CIN0*C + a, 224'(kword(w_out, a / C, a % C, C)));
    for (int o = 0; o < C; o++) wl(0, 1, 0, o, 224'(DW'(b_in[o])));
    for (int o = 0; o < COUT_F; o++) wl(0, 2, 0, o, 224'(DW'(b_out[o])));
    for (int b = 0; b < NBLK; b++)
      for (int l = 0; l < 2; l++) begin
        automatic int n = 2*b + l;
        for (int s = 0; s < NBANK; s++)
          for (int a = 0; a < C*C/NBANK; a++)
            wl(b+1, l, s, a, 224'(kword(wc[n], (a / C)*NBANK + s, a % C, C)));
        for (int o = 0; o < C; o++) wl(b+1, 4 + l, 0, o, 224'(DW'(bc[n][o])));
        for (int bank = 0; bank < 2*LN_BANKS; bank++)
          for (int a = 0; a < LDEPTH; a++) begin
            automatic int idx = (bank % LN_BANKS)*LDEPTH + a;
            automatic int f = idx / C, c = idx % C;
            logic [223:0] v = '0;
            for (int t = 0; t < T; t++)
              v[t*DW +: DW] = DW'((bank < LN_BANKS) ? gam[n][(t*F + f)*C + c] : bet[n][(t*F + f)*C + c]);
            wl(b+1, 2 + l, bank, a, v);
          end
        if (LOREN_MASK[n])
          for (int a = 0; a < ADEPTH; a++) wl(b+1, 6 + l, 0, a, 224'(DW'(amem[n][a])));
      end
  endtask

  // Sizes handed to the reference model as run-time values, so that the
  // simulator compiles the model as loops rather than unrolling it.
  int rt_t, rt_f, rt_c, rt_cin0, rt_cout;

  function automatic void ref_frame(input int cr, output int y[]);
    int x[], s[], h[], a[], bm[];
    a = new[C*RANK]; bm = new[C*RANK];
    conv_ref(rt_t, rt_f, rt_cin0, rt_c, x0, w_in, b_in, 1'b0, x0, 1'b0, RANK, ALPHA, a, bm, x);
    for (int b = 0; b < NBLK; b++) begin
      s = x;
      for (int l = 0; l < 2; l++) begin
        automatic int n = 2*b + l;
        automatic int base = cr*RANK*2*C;
        ln_ref(rt_t, rt_f, rt_c, EPS, 16, x, gam[n], bet[n], h);
        if (LOREN_MASK[n]) begin
          // run-time loop bound: keeps the simulator from unrolling
          for (int i = 0; i < a.size(); i++) begin
            a[i]  = amem[n][base + i];
            bm[i] = amem[n][base + a.size() + i];
          end
        end
        conv_ref(rt_t, rt_f, rt_c, rt_c, h, wc[n], bc[n], l == 1, s, LOREN_MASK[n], RANK, ALPHA, a, bm, x);
      end
    end
    conv_ref(rt_t, rt_f, rt_c, rt_cout, x, w_out, b_out, 1'b0, x, 1'b0, RANK, ALPHA, a, bm, y);
  endfunction

  initial begin
    int yref[], prev[][];
    automatic int crs[4] = '{0, 1, 2, 0};
    automatic int win, wres, nswitch = 0, ndiff = 0, nrepeat = 0, cyc;
    prev = new[NUM_CR];
    rt_t = T; rt_f = F; rt_c = C; rt_cin0 = CIN0; rt_cout = COUT_F;
    win  = 256 / 3;                               // ~1/sqrt(9*CIN0) in Q7.8
    wres = 256 / $rtoi($sqrt(9.0 * C));
    x0 = new[NPOS*CIN0]; foreach (x0[i]) x0[i] = rnd(1024);
    w_in = new[C*CIN0*9]; foreach (w_in[i]) w_in[i] = rnd(win);
    b_in = new[C]; foreach (b_in[i]) b_in[i] = rnd(64);
    w_out = new[COUT_F*C*9]; foreach (w_out[i]) w_out[i] = rnd(wres);
    b_out = new[COUT_F]; foreach (b_out[i]) b_out[i] = rnd(64);
    for (int n = 0; n < NBLK*2; n++) begin
      wc[n] = new[C*C*9];  foreach (wc[n][i]) wc[n][i] = rnd(wres);
      bc[n] = new[C];      foreach (bc[n][i]) bc[n][i] = rnd(64);
      gam[n] = new[NPOS*C]; foreach (gam[n][i]) gam[n][i] = 256 + rnd(64);
      bet[n] = new[NPOS*C]; foreach (bet[n][i]) bet[n][i] = rnd(64);
      amem[n] = new[ADEPTH]; foreach (amem[n][i]) amem[n][i] = rnd(256);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    load_all();
    for (int p = 0; p < NPOS; p++) begin
      @(negedge clk);
      in_we = 1; in_addr = PAW'(p);
      for (int c = 0; c < CIN0; c++) in_data[c*DW +: DW] = DW'(x0[p*CIN0 + c]);
    end
    @(negedge clk); in_we = 0;

    for (int fr = 0; fr < NFRAMES; fr++) begin
      ref_frame(crs[fr], yref);
      // the received grid sits in buffer 0, which the frame overwrites: reload
      if (fr > 0)
        for (int p = 0; p < NPOS; p++) begin
          @(negedge clk);
          in_we = 1; in_addr = PAW'(p);
          for (int c = 0; c < CIN0; c++) in_data[c*DW +: DW] = DW'(x0[p*CIN0 + c]);
          @(negedge clk); in_we = 0;
        end
      llr_cnt = 0;
      @(negedge clk); start = 1; cr_sel = 2'(crs[fr]);
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (llr_cnt != NPOS) begin failures++; $display("FAIL frame %0d: %0d LLR cells", fr, llr_cnt); end
      foreach (yref[i]) begin
        checks++;
        if (llr_got[i] != yref[i]) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d cr %0d cell %0d llr %0d: got %0d exp %0d",
                                      fr, crs[fr], i / COUT_F, i % COUT_F, llr_got[i], yref[i]);
        end
      end
      if (fr > 0 && crs[fr] != crs[fr-1]) nswitch++;
      for (int r = 0; r < NUM_CR; r++)
        if (prev[r].size() != 0) begin
          if (r != crs[fr] && prev[r] != yref) ndiff++;
          if (r == crs[fr] && prev[r] == yref) nrepeat++;
        end
      prev[crs[fr]] = yref;
      $display("frame %0d: code rate %0d, %0d cycles, llr[0]=%0d", fr, crs[fr], cyc, yref[0]);
    end
    // mechanisms
    if (NFRAMES > 1) begin
    checks++; if (nswitch == 0)  begin failures++; $display("FAIL no code-rate switch"); end
    checks++; if (int'(cr_switches) != nswitch) begin failures++; $display("FAIL cr_switches=%0d exp %0d", cr_switches, nswitch); end
    checks++; if (int'(frames) != NFRAMES) begin failures++; $display("FAIL frames=%0d", frames); end
    checks++; if (ndiff == 0)    begin failures++; $display("FAIL adapters never changed the output"); end
    checks++; if (nrepeat == 0)  begin failures++; $display("FAIL repeated code rate not reproduced"); end
    checks++; if (border_cells == 0) begin failures++; $display("FAIL no border cells"); end
    $display("mechanisms: code-rate switches=%0d, outputs differing across code rates=%0d, repeats reproduced=%0d, border cells=%0d",
             nswitch, ndiff, nrepeat, border_cells);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
