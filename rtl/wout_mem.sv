// wout_mem: storage for the trained integer readout matrix W_out.
//
// Each weight is a WOUT_BITS-bit two's complement integer; with 5 bits the
// trained weights lie in the symmetric range [-15, 15]. Word g holds the
// weights of hidden neurons g*LANES .. g*LANES+LANES-1 towards all L output
// neurons: the weight of lane p towards class l sits at
// bits [(p*L + l)*WOUT_BITS +: WOUT_BITS].
//
// Timing: write on the rising clock edge when we is high; synchronous read
// with one cycle of latency. No reset. The weights are trained off-chip and
// loaded through the write port, which is this design's choice.
module wout_mem #(
  parameter int unsigned N         = rvfl_pkg::N_DEF,
  parameter int unsigned L         = rvfl_pkg::L_DEF,
  parameter int unsigned WOUT_BITS = rvfl_pkg::WOUT_BITS_DEF,
  parameter int unsigned LANES     = rvfl_pkg::LANES_DEF,
  localparam int unsigned DEPTH = N / LANES,
  localparam int unsigned AW    = rvfl_pkg::ubits(DEPTH - 1),
  localparam int unsigned DW    = LANES * L * WOUT_BITS
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
