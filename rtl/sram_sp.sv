// sram_sp: single-port synchronous SRAM, the RTL stand-in for the
// single-port low-power SRAM macros that hold the weights (and, in this
// design, the activation buffers).
//
// One access per cycle: with en=1 and we=1 the word at addr is written; with
// en=1 and we=0 it is read and appears on rdata on the next clock edge
// (one-cycle read latency) and is held until the next read. The contents are
// not reset, as in a real macro. The macros of the paper's implementation
// come from a memory compiler; this array model keeps only their geometry
// (depth x width) and the single port.
module sram_sp #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 144,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

`ifndef SYNTHESIS
  always_ff @(posedge clk)
    if (en) assert (int'(addr) < DEPTH) else $error("sram_sp: address %0d out of range", addr);
`endif

endmodule
