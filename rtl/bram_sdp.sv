// bram_sdp: simple dual-port block RAM, one write port and one read port.
//
// This is the memory every DL layer reads its input from and the weights
// memory all layers share. A write at the rising edge stores wdata at waddr;
// the read port registers mem[raddr] at the rising edge, so rdata is valid one
// cycle after raddr is presented (the usual FPGA block RAM timing). A read of
// the address being written returns the old word. No reset: contents are
// whatever was last written. Written as an array so synthesis maps it to block
// RAM; the one-cycle read latency is this design's choice and all layers are
// built around it.
module bram_sdp #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [rflearn_pkg::idx_w(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]                 wdata,
  input  logic [rflearn_pkg::idx_w(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]                 rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
