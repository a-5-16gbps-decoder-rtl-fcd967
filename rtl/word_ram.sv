// word_ram: storage array with one synchronous write port and two asynchronous read
// ports.  It stands for the chip's memories (channel LLR, internal LLR, partial sum,
// frozen/good bit and decoded-bit memories).  Contents are not reset; the decoder keeps
// validity flags for what it reads.  Asynchronous reads are this design's choice: the
// paper does not describe its SRAM macros.
module word_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr0,
  output logic [WIDTH-1:0] rdata0,
  input  logic [AW-1:0]    raddr1,
  output logic [WIDTH-1:0] rdata1
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;
  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
