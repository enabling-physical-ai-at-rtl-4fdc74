// trace_buffer - on-chip memory holding one input sequence.
//
// The GRU consumes each sample once, but the ODE solver needs the initial
// state Y(0) and the whole input trace U afterwards, and the loss needs the
// measured Y. Each incoming sample [Y; U] is therefore also written here.
// DEPTH words of WIDTH bits, one write port and one synchronous read port
// (data the cycle after rd_en), the shape of a block RAM, which is where the
// paper places larger, less frequently accessed data.
module trace_buffer #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 200,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
