// axis_fifo: small synchronous first-word-fall-through FIFO for an AXI4-Stream.
//
// Holds DEPTH words of WIDTH bits. The write side takes a word when
// in_tvalid and in_tready are both high; in_tready is low only when the FIFO
// is full. The read side presents the oldest word with out_tvalid high
// while the FIFO is not empty. A word written into an empty FIFO is visible
// on the next clock. Used in the top level to hold x[n] samples between the
// FIR filter, which takes them first, and the LMS engine, which needs them
// again once e[n] is known.
module axis_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             reset_n,
  input  logic [WIDTH-1:0] in_tdata,
  input  logic             in_tvalid,
  output logic             in_tready,
  output logic [WIDTH-1:0] out_tdata,
  output logic             out_tvalid,
  input  logic             out_tready
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_tready  = (32'(count) < DEPTH);
  assign out_tvalid = (count != '0);
  assign out_tdata  = mem[rd_ptr];
  assign push       = in_tvalid && in_tready;
  assign pop        = out_tvalid && out_tready;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (32'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_tdata;
  end

endmodule
