// tb_loren_ctrl: drives the sequencer with stages that finish after random
// delays and checks the stage order, one start pulse per stage, the buffer
// roles of every stage (input conv 0 -> 1, then each block reads the buffer
// the previous stage wrote), code-rate latching during a frame, and the
// frame and code-rate-switch counters.
module tb_loren_ctrl;
  localparam int NSTAGE = 6, NUM_CR = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [1:0] cr_in = '0, cr_q;
  logic [2:0] stage;
  logic [NSTAGE-1:0] stage_start, stage_done = '0;
  logic [1:0] rs, ra, rb;
  logic [15:0] frames, cr_switches;
  int checks = 0, failures = 0;

  loren_ctrl #(.NSTAGE(NSTAGE), .NUM_CR(NUM_CR)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    automatic int crs[5] = '{2, 2, 0, 1, 1};
    automatic int exp_sw = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int fr = 0; fr < 5; fr++) begin
      automatic logic [1:0] last_out = 2'd0;
      @(negedge clk); start = 1; cr_in = 2'(crs[fr]);
      @(negedge clk); start = 0; cr_in = 2'(crs[(fr + 1) % 5] ^ 1);  // must not be picked up
      if (fr > 0 && crs[fr] != crs[fr-1]) exp_sw++;
      for (int s = 0; s < NSTAGE; s++) begin
        chk(stage_start == NSTAGE'(1) << s, $sformatf("frame %0d stage %0d start pulse %b", fr, s, stage_start));
        chk(int'(stage) == s, "stage index");
        chk(busy, "busy during frame");
        chk(int'(cr_q) == crs[fr], "code rate latched");
        chk(rs != ra && ra != rb && rs != rb, "distinct buffer roles");
        if (s == 0) chk(rs == 2'd0 && rb == 2'd1, "input conv reads 0, writes 1");
        else chk(rs == last_out, "stage reads previous output");
        last_out = rb;
        @(negedge clk);
        chk(stage_start == '0, "single start pulse");
        repeat ($urandom_range(5)) @(negedge clk);
        stage_done[s] = 1'b1;
        @(negedge clk);
        stage_done[s] = 1'b0;
        if (s == NSTAGE - 1) chk(!busy, "idle after last stage");
      end
      repeat (2) @(negedge clk);
      chk(int'(frames) == fr + 1, "frame counter");
      chk(int'(cr_switches) == exp_sw, $sformatf("switch counter %0d exp %0d", cr_switches, exp_sw));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
