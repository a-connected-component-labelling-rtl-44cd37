// eq_ram: one copy of an equivalence table, 2**ADDR_BITS words.
//
// Simple dual-port synchronous RAM with one write port and one read port,
// read latency 1. A read of the address being written in the same cycle
// returns the new data (write-first), so a label looked up right after a
// merger was written already sees it. Maps onto one block RAM.
module eq_ram #(
  parameter int unsigned ADDR_BITS = 10,
  parameter int unsigned DATA_BITS = 10
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [ADDR_BITS-1:0] waddr,
  input  logic [DATA_BITS-1:0] wdata,
  input  logic [ADDR_BITS-1:0] raddr,
  output logic [DATA_BITS-1:0] rdata
);

  logic [DATA_BITS-1:0] mem [2**ADDR_BITS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (we && waddr == raddr) rdata <= wdata;
    else                      rdata <= mem[raddr];
  end

endmodule
