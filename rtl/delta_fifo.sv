// delta_fifo: the Delta-index FIFO between the partial-similarity unit and the
// aligner. The PSU pushes the positions of flipped query bits; the aligner pops
// them in delta mode and touches only those item-memory columns. Head and tail
// pointers plus an occupancy count, show-ahead read (dout is the head entry
// while !empty). The FIFO itself and its head/tail pointers follow the paper;
// depth, width and the show-ahead style are this design's choice. A push when
// full or a pop when empty is a protocol error (asserted), not silently dropped.
module delta_fifo #(
  parameter int unsigned DEPTH = torr_pkg::FIFO_DEF,
  parameter int unsigned DW    = $clog2(torr_pkg::D_DEF),
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [DW-1:0] din,
  input  logic          pop,
  output logic [DW-1:0] dout,
  output logic          empty,
  output logic          full,
  output logic [PW:0]   count
);
  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] head, tail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else if (clear) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else begin
      if (push && !full) tail <= (tail == PW'(DEPTH - 1)) ? '0 : tail + 1'b1;
      if (pop && !empty) head <= (head == PW'(DEPTH - 1)) ? '0 : head + 1'b1;
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[tail] <= din;

  assign dout  = mem[head];
  assign empty = (count == '0);
  assign full  = (count == (PW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
