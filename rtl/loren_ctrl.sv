// loren_ctrl: layer sequencer of the receiver.
//
// One frame (one T x F resource grid) passes through NSTAGE stages in the
// order of the network: stage 0 the input CONV2D, stages 1..NSTAGE-2 the
// residual blocks, stage NSTAGE-1 the output CONV2D. Each stage is started
// with a one-cycle pulse on stage_start[i] and ends with stage_done[i].
//
// The three activation buffers rotate roles. The received samples are
// loaded into buffer 0; the input conv writes buffer 1. A residual block
// reads its input from buffer rs (X), uses ra as scratch (A) and leaves its
// output in rb (B); afterwards (rs, ra, rb) <= (rb, rs, ra), so the next
// block finds its input in rs again. The output conv reads rs.
//
// The code rate is sampled at start and held in cr_q for the whole frame, so
// the adapter choice can change from frame to frame (the paper's run-time
// code-rate switch) but never within one. cr_switches counts frames whose
// code rate differs from the previous frame's. The buffer-role scheme and
// the per-frame switch point are this design's choices.
module loren_ctrl #(
  parameter int unsigned NSTAGE = 6,
  parameter int unsigned NUM_CR = 3,
  localparam int unsigned CRW   = (NUM_CR > 1) ? $clog2(NUM_CR) : 1,
  localparam int unsigned SW    = $clog2(NSTAGE)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CRW-1:0]    cr_in,
  output logic              busy,
  output logic              done,
  output logic [CRW-1:0]    cr_q,
  output logic [SW-1:0]     stage,
  output logic [NSTAGE-1:0] stage_start,
  input  logic [NSTAGE-1:0] stage_done,
  output logic [1:0]        rs,
  output logic [1:0]        ra,
  output logic [1:0]        rb,
  output logic [15:0]       frames,
  output logic [15:0]       cr_switches
);

  logic run;
  logic first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; cr_q <= '0; stage <= '0; stage_start <= '0;
      rs <= 2'd0; ra <= 2'd1; rb <= 2'd2; frames <= '0; cr_switches <= '0; first <= 1'b1;
    end else begin
      done        <= 1'b0;
      stage_start <= '0;
      if (!run) begin
        if (start) begin
          run   <= 1'b1;
          stage <= '0;
          stage_start[0] <= 1'b1;
          cr_q  <= cr_in;
          first <= 1'b0;
          if (!first && cr_in != cr_q) cr_switches <= cr_switches + 1'b1;
          // input conv reads buffer 0 and writes buffer 1
          rs <= 2'd0; ra <= 2'd2; rb <= 2'd1;
        end
      end else if (stage_done[stage]) begin
        // after the input conv and after every residual block the output
        // buffer becomes the next input buffer
        rs <= rb; ra <= rs; rb <= ra;
        if (int'(stage) == NSTAGE - 1) begin
          run    <= 1'b0;
          done   <= 1'b1;
          frames <= frames + 1'b1;
        end else begin
          stage <= stage + 1'b1;
          stage_start[int'(stage) + 1] <= 1'b1;
        end
      end
    end
  end

  assign busy = run;

`ifndef SYNTHESIS
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(stage_start));
  assert property (@(posedge clk) disable iff (!rst_n) run |-> (rs != ra) && (ra != rb) && (rs != rb));
`endif

endmodule
