// sync_fifo: single-clock first-in first-out buffer of DEPTH words.
//
// A word written with `push` while the FIFO is not full is stored; a push
// while full is refused (the caller sees `full` and counts the loss). `pop`
// removes the word shown on `dout`, which is valid while `empty` is low
// (first-word fall-through). `count` gives the fill level. DEPTH must be a
// power of two. Used for the per-fiber input buffers and the readout queue.
module sync_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;

  assign empty = (wr_ptr == rd_ptr);
  assign full  = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign count = wr_ptr - rd_ptr;
  assign dout  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr_ptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push && !full) wr_ptr <= wr_ptr + 1'b1;
      if (pop && !empty) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH)
    else $error("sync_fifo: DEPTH must be a power of two");

  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
