// rs_buffer: received-word memory of the decoder.
//
// A simple dual-port array, DEPTH words of WIDTH bits: one synchronous
// write port and one read port with a registered output (rdata is valid the
// cycle after re). The syndrome stage writes each received symbol as it
// arrives; the correction stage reads the word back in the same order once
// the key equation is solved. The memory itself is not part of the paper's
// algorithms; its organisation is this design's choice.
module rs_buffer #(
  parameter int unsigned DEPTH = 255,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
