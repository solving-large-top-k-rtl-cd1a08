// sync_fifo: single-clock first-in first-out buffer used between dataflow
// stages. DEPTH entries of WIDTH bits in a register array; `count` tells the
// producer how full it is so it can reserve room for data still in flight.
// Push and pop may happen in the same cycle. A push into a full FIFO or a
// pop from an empty one is a protocol error and is asserted against.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     pop,
  output logic [WIDTH-1:0]         rdata,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign empty = (count == '0);
  assign rdata = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= wdata;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && count == ($clog2(DEPTH+1))'(DEPTH)));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
