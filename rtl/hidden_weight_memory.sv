// hidden_weight_memory: the high-precision digital memory that holds one
// hidden weight W_H per synapse of the crossbar tile.
//
// One synchronous read port (data one cycle after the address) and one
// synchronous write port, both on the rising clock edge. A read of the
// address being written in the same cycle returns the old word. Written as a
// plain array so it maps onto an SRAM macro. The paper gives only the
// function (high-precision storage of the hidden weights); the port
// arrangement and the read latency are this design's choice. The memory is
// not reset: every word is written before it is read (initialisation pass).
module hidden_weight_memory
  import meta_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output wh_t           rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  wh_t           wdata
);
  wh_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
