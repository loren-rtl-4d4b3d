// seq_isqrt: sequential integer square root, two radicand bits per cycle.
// Used once per layer by the layer normalisation.
//
// A start pulse loads the radicand; done pulses WIDTH/2+1 cycles later with
// root = floor(sqrt(radicand)). WIDTH must be even.
module seq_isqrt #(
  parameter int unsigned WIDTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [WIDTH-1:0]   radicand,
  output logic               done,
  output logic [WIDTH/2-1:0] root
);

  logic [WIDTH-1:0]   x;
  logic [WIDTH/2+2:0] rem;
  logic [WIDTH/2-1:0] r;
  logic [$clog2(WIDTH)-1:0] cnt;
  logic               run;
  logic [WIDTH/2+2:0] rem_sh, trial;

  always_comb begin
    rem_sh = {rem[WIDTH/2:0], x[WIDTH-1:WIDTH-2]};
    trial  = rem_sh - {1'b0, r, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; cnt <= '0;
      x <= '0; rem <= '0; r <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1; cnt <= '0;
        x <= radicand; rem <= '0; r <= '0;
      end else if (run) begin
        x <= {x[WIDTH-3:0], 2'b00};
        if (trial[WIDTH/2+2]) begin
          rem <= rem_sh;
          r   <= {r[WIDTH/2-2:0], 1'b0};
        end else begin
          rem <= trial;
          r   <= {r[WIDTH/2-2:0], 1'b1};
        end
        if (int'(cnt) == WIDTH/2-1) begin
          run  <= 1'b0;
          done <= 1'b1;
          root <= trial[WIDTH/2+2] ? {r[WIDTH/2-2:0], 1'b0} : {r[WIDTH/2-2:0], 1'b1};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
