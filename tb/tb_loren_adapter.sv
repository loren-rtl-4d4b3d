// tb_loren_adapter: runs the low-rank adapter for every code rate on random
// inputs and compares delta with the reference; checks the latency
// start -> done = CIN*RANK + COUT*RANK + 2 cycles and that the three code
// rates give different results for the same input.
module tb_loren_adapter;
  import loren_pkg::*;
  import loren_ref_pkg::*;
  localparam int CIN = 8, COUT = 12, RANK = 4, ALPHA = 2, NUM_CR = 3;
  localparam int DEPTH = NUM_CR * RANK * (CIN + COUT);

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [1:0] cr = '0;
  data_t x [CIN];
  acc_t  delta [COUT];
  logic  mem_en;
  logic [$clog2(DEPTH)-1:0] mem_addr;
  data_t mem_rdata;
  int    mem [DEPTH];
  int checks = 0, failures = 0;

  loren_adapter #(.CIN(CIN), .COUT(COUT), .RANK(RANK), .ALPHA(ALPHA), .NUM_CR(NUM_CR)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_en) mem_rdata <= data_t'(mem[mem_addr]);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int xi[], a[], b[];
    longint d_ref[], first[];
    int cyc;
    xi = new[CIN]; a = new[CIN*RANK]; b = new[COUT*RANK];
    for (int i = 0; i < DEPTH; i++) mem[i] = rnd(300);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int c = 0; c < CIN; c++) begin xi[c] = rnd(2000); x[c] = data_t'(xi[c]); end
      if (trial == 3) for (int c = 0; c < CIN; c++) begin xi[c] = 32000; x[c] = data_t'(xi[c]); end
      for (int r = 0; r < NUM_CR; r++) begin
        automatic int base = r * RANK * (CIN + COUT);
        for (int i = 0; i < CIN*RANK; i++) a[i] = mem[base + i];
        for (int i = 0; i < COUT*RANK; i++) b[i] = mem[base + CIN*RANK + i];
        adapter_ref(CIN, COUT, RANK, ALPHA, xi, a, b, d_ref);
        @(negedge clk); start = 1; cr = 2'(r);
        @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != CIN*RANK + COUT*RANK + 2) begin
          failures++; $display("FAIL latency %0d", cyc);
        end
        for (int o = 0; o < COUT; o++) begin
          checks++;
          if (longint'(delta[o]) != d_ref[o]) begin
            failures++; $display("FAIL cr=%0d o=%0d got %0d exp %0d", r, o, delta[o], d_ref[o]);
          end
        end
        if (r == 0) first = d_ref;
        else begin
          checks++;
          if (first == d_ref) begin failures++; $display("FAIL code rates give same delta"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
