// loren_adapter: the per-code-rate low-rank 1x1 update of a LORENCONV2D
// layer.
//
// For the feature vector x (CIN channels) at one (OFDM symbol, subcarrier)
// cell it computes h = A^T x (CIN -> RANK channels) and then
// delta = (ALPHA/RANK) * B^T h (RANK -> COUT channels). Adding delta to the
// output of the frozen 3x3 convolution equals convolving with
// W0 + (ALPHA/RANK) A B placed on the centre tap, which is the paper's
// adapter: a channel-mixing update applied independently at each cell.
//
// The A and B matrices of all NUM_CR code rates live in one 16-bit-wide
// adapter SRAM (external, one-cycle read latency). Code rate cr occupies
// words cr*RANK*(CIN+COUT) onward: first A[c][j] at offset c*RANK + j, then
// B[j][o] at offset RANK*CIN + o*RANK + j. Selecting a code rate is thus
// only a change of base address, so switching costs no cycles.
//
// Timing: start (with cr and x valid) -> CIN*RANK + COUT*RANK + 2 cycles ->
// done pulse; delta holds the result until the next start. h is rounded to
// a data word (floor, saturate); delta is kept at full accumulator
// precision with 2*FRAC fraction bits, scaled by ALPHA and an arithmetic
// right shift by log2(RANK) (RANK must be a power of two). Sequencing,
// memory layout and rounding are this design's choices.
module loren_adapter
  import loren_pkg::*;
#(
  parameter int unsigned CIN    = 128,
  parameter int unsigned COUT   = 128,
  parameter int unsigned RANK   = 4,
  parameter int unsigned ALPHA  = 1,
  parameter int unsigned NUM_CR = 3,
  localparam int unsigned DEPTH = NUM_CR * RANK * (CIN + COUT),
  localparam int unsigned AAW   = $clog2(DEPTH),
  localparam int unsigned CRW   = (NUM_CR > 1) ? $clog2(NUM_CR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [CRW-1:0] cr,
  input  data_t          x [CIN],
  output logic           done,
  output acc_t           delta [COUT],
  // adapter SRAM read port
  output logic           mem_en,
  output logic [AAW-1:0] mem_addr,
  input  data_t          mem_rdata
);

  localparam int unsigned NA    = CIN * RANK;
  localparam int unsigned NB    = COUT * RANK;
  localparam int unsigned SHIFT = $clog2(RANK);

  typedef enum logic [1:0] {S_IDLE, S_A, S_B} state_e;
  state_e state;

  logic [AAW-1:0] base;
  logic [AAW-1:0] idx;       // index issued this cycle
  logic [AAW-1:0] idx_d;     // index whose data arrives this cycle
  logic           vld_d;     // data arriving this cycle is valid
  logic           phase_b_d; // arriving data belongs to B
  logic           last_d;
  acc_t           hacc [RANK];
  data_t          h    [RANK];
  acc_t           dacc;

  initial assert ((1 << SHIFT) == RANK) else $fatal(1, "RANK must be a power of two");

  always_comb begin
    mem_en   = (state != S_IDLE);
    mem_addr = base + ((state == S_B) ? AAW'(NA) : '0) + idx;
  end

  // Product of the arriving word with its partner.
  int unsigned c_d, j_d, o_d;
  acc_t prod_a, prod_b, dsum;
  always_comb begin
    c_d    = int'(idx_d) / RANK;
    j_d    = int'(idx_d) % RANK;
    o_d    = int'(idx_d) / RANK;
    prod_a = acc_t'(x[c_d % CIN]) * acc_t'(mem_rdata);
    prod_b = acc_t'(h[j_d]) * acc_t'(mem_rdata);
    dsum   = dacc + prod_b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; idx <= '0; idx_d <= '0;
      vld_d <= 1'b0; phase_b_d <= 1'b0; last_d <= 1'b0; done <= 1'b0;
      dacc <= '0;
      for (int j = 0; j < RANK; j++) begin hacc[j] <= '0; h[j] <= '0; end
      for (int o = 0; o < COUT; o++) delta[o] <= '0;
    end else begin
      done <= 1'b0;
      // issue side
      vld_d     <= (state != S_IDLE);
      phase_b_d <= (state == S_B);
      idx_d     <= idx;
      last_d    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_A;
          idx   <= '0;
          base  <= AAW'(int'(cr) * RANK * (CIN + COUT));
          for (int j = 0; j < RANK; j++) hacc[j] <= '0;
          dacc  <= '0;
        end
        S_A: if (int'(idx) == NA - 1) begin
          state <= S_B; idx <= '0;
        end else idx <= idx + 1'b1;
        S_B: if (int'(idx) == NB - 1) begin
          state <= S_IDLE; idx <= '0; last_d <= 1'b1;
        end else idx <= idx + 1'b1;
        default: state <= S_IDLE;
      endcase
      // data side
      if (vld_d && !phase_b_d) begin
        hacc[j_d] <= hacc[j_d] + prod_a;
        if (int'(idx_d) == NA - 1)
          for (int j = 0; j < RANK; j++)
            h[j] <= sat16(((j == j_d) ? hacc[j] + prod_a : hacc[j]) >>> FRAC);
      end
      if (vld_d && phase_b_d) begin
        if (j_d == RANK - 1) begin
          delta[o_d % COUT] <= (dsum * acc_t'(ALPHA)) >>> SHIFT;
          dacc <= '0;
        end else dacc <= dsum;
      end
      if (last_d) done <= 1'b1;
    end
  end

endmodule
