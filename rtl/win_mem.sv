// win_mem: storage for the fixed random input matrix W_in.
//
// W_in holds one bipolar weight per (hidden neuron, feature) pair, stored
// as one bit (1 = -1, 0 = +1). The matrix is drawn once when the network is
// set up and never changes afterwards, so the memory is written through a
// plain load port before use and only read during classification.
// Word g holds the LANES rows of hidden neurons g*LANES .. g*LANES+LANES-1,
// row p at bits [p*K +: K], bit i of a row being feature i.
//
// Timing: write on the rising clock edge when we is high; read is
// synchronous, rdata shows word raddr one cycle after raddr is applied.
// No reset: the contents are undefined until loaded. How W_in is generated
// and loaded is not part of the algorithm; the load port is this design's.
module win_mem #(
  parameter int unsigned K     = rvfl_pkg::K_DEF,
  parameter int unsigned N     = rvfl_pkg::N_DEF,
  parameter int unsigned LANES = rvfl_pkg::LANES_DEF,
  localparam int unsigned DEPTH = N / LANES,
  localparam int unsigned AW    = rvfl_pkg::ubits(DEPTH - 1),
  localparam int unsigned DW    = LANES * K
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
