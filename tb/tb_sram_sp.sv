// tb_sram_sp: checks the single-port SRAM model: write, read with one-cycle
// latency, read data held while the port is idle, write does not disturb
// rdata, random traffic against a shadow copy.
module tb_sram_sp;
  localparam int DEPTH = 64, WIDTH = 144;
  logic clk = 0, en = 0, we = 0;
  logic [5:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [WIDTH-1:0] rword();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, rdata, exp); end
  endtask

  initial begin
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      shadow[i] = rword();
      @(negedge clk); en = 1; we = 1; addr = 6'(i); wdata = shadow[i];
    end
    // read back in order, one-cycle latency
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 6'(i);
      @(negedge clk); en = 0; check(shadow[i], "readback");
    end
    // hold while idle and during a write
    @(negedge clk); en = 1; we = 0; addr = 6'd7;
    @(negedge clk); en = 0;
    repeat (3) @(negedge clk);
    check(shadow[7], "hold idle");
    en = 1; we = 1; addr = 6'd9; wdata = rword(); shadow[9] = wdata;
    @(negedge clk); en = 0; we = 0;
    check(shadow[7], "hold across write");
    // random traffic
    for (int n = 0; n < 500; n++) begin
      automatic int a = $urandom_range(DEPTH-1);
      @(negedge clk);
      en = 1; addr = 6'(a);
      if ($urandom_range(1)) begin we = 1; wdata = rword(); shadow[a] = wdata; end
      else begin
        we = 0;
        @(negedge clk); en = 0; check(shadow[a], "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
