// Vector tile buffer (block RAM): DEPTH words of WIDTH bits.
//
// One write port and NRD independent read ports, each read registered (data
// one cycle after re). A read of the word being written in the same cycle
// returns the old contents. Used for every on-chip activation store: the
// activation buffer between the norm unit and the matrix core, the
// result/scratch buffer, the output (residual) buffer, the hidden-state
// buffer and the norm-weight store.
module vec_buffer #(
  parameter int WIDTH = 2048,
  parameter int DEPTH = 64,
  parameter int NRD   = 1,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [WIDTH-1:0]          wdata,
  input  logic [NRD-1:0]            re,
  input  logic [NRD-1:0][AW-1:0]    raddr,
  output logic [NRD-1:0][WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk)
      if (re[p]) rdata[p] <= mem[raddr[p]];
  end
endmodule
