// sp_ram: simple dual-port on-chip RAM (one write port, one synchronous read port),
// the storage element used for every weight, bias and node-feature buffer of the
// accelerator. Written as an array so synthesis maps it to block RAM.
//
// Interface: we/waddr/wdata write on the rising clock edge; raddr is sampled on the
// rising edge and rdata holds the addressed word one cycle later (read latency 1).
// A read of the address being written returns the old contents.
// Keeping weights and biases on chip follows the paper; the port arrangement and the
// one-cycle read latency are this design's choice (they match an FPGA block RAM).
module sp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
