// sym_ram: simple dual-port memory (one write port, one synchronous read
// port), used for the filter-symbol memory of a layer and for each
// feature-map bank.
//
// Interface: a write of wdata at waddr when we is high; a read of raddr when
// re is high, whose word appears on rdata on the next clock edge (one cycle
// read latency, as an FPGA block RAM).  A read and a write of the same address
// in the same cycle return the old word.  The memory is not reset: every word
// a computation reads must have been written first.
module sym_ram #(
  parameter int unsigned DEPTH = dietcnn_pkg::FLT_DEPTH,
  parameter int unsigned WIDTH = dietcnn_pkg::FLT_W,
  localparam int unsigned AW = $clog2(DEPTH)
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
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
