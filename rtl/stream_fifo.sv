// stream_fifo - synchronous FIFO connecting two dataflow stages.
//
// Stages of the forward pass run concurrently and pass data through FIFOs,
// so a stage that stalls only stops its producer when the FIFO fills. This
// is a plain register-array FIFO: DEPTH entries of WIDTH bits, valid/ready
// on both sides, write and read in the same cycle allowed, data visible on
// out_data in the cycle after it is written (no fall-through). The depth and
// structure are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + AW'(1);
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + AW'(1);
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A full FIFO never takes a write, an empty one never gives a read.
  assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));

endmodule
