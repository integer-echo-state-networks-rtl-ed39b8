// item_memory: the table of bipolar hypervectors that maps a symbol (an input
// token, or a quantization level of the fed-back output) to an N-element
// bipolar vector that is added to the reservoir.
//
// Each row holds N bits; bit j = 1 stands for element +1 and bit j = 0 for
// element -1. The rows are random (input tokens) or similarity-preserving
// (output levels); either way they are fixed for the lifetime of a network,
// so they are written once by the host through the write port and then only
// read. How the rows are generated is left to the host.
//
// Interface: one synchronous write port (we/waddr/wdata) and one synchronous
// read port: raddr sampled with re on a rising edge, rdata valid from the
// next cycle until the next read. The array has no reset (it is a RAM).
module item_memory #(
  parameter int unsigned N     = intesn_pkg::N_DEF,  // vector length
  parameter int unsigned DEPTH = intesn_pkg::D_DEF,  // number of items
  localparam int unsigned AB   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AB-1:0] waddr,
  input  logic [N-1:0]  wdata,
  input  logic          re,
  input  logic [AB-1:0] raddr,
  output logic [N-1:0]  rdata
);

  logic [N-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
