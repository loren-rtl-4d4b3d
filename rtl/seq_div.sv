// seq_div: sequential unsigned restoring divider, one quotient bit per
// cycle. Used by the layer normalisation to form the mean, the mean square
// and the reciprocal of the standard deviation once per layer.
//
// A start pulse loads dividend and divisor; done pulses WIDTH+1 cycles later
// with quotient = floor(dividend / divisor). A zero divisor gives all ones.
module seq_div #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WIDTH-1:0] dividend,
  input  logic [WIDTH-1:0] divisor,
  output logic             done,
  output logic [WIDTH-1:0] quotient
);

  logic [WIDTH-1:0]   q;
  logic [WIDTH:0]     rem;
  logic [WIDTH-1:0]   dvs;
  logic [$clog2(WIDTH+1)-1:0] cnt;
  logic               run;
  logic [WIDTH:0]     trial;

  always_comb trial = {rem[WIDTH-1:0], q[WIDTH-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; cnt <= '0;
      q <= '0; rem <= '0; dvs <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1; cnt <= '0;
        q <= dividend; rem <= '0; dvs <= divisor;
      end else if (run) begin
        if (trial[WIDTH]) begin
          rem <= {rem[WIDTH-1:0], q[WIDTH-1]};
          q   <= {q[WIDTH-2:0], 1'b0};
        end else begin
          rem <= trial;
          q   <= {q[WIDTH-2:0], 1'b1};
        end
        if (int'(cnt) == WIDTH-1) begin
          run  <= 1'b0;
          done <= 1'b1;
          quotient <= trial[WIDTH] ? {q[WIDTH-2:0], 1'b0} : {q[WIDTH-2:0], 1'b1};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
