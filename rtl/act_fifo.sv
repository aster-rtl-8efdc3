// act_fifo: input activation FIFO of one subarray.
//
// Each entry holds ACT_BITS bits for every wordline, laid out row by row
// (row r owns bits [r*ACT_BITS +: ACT_BITS]). One entry carries four
// timesteps of 1-bit spikes, two timesteps of 2-bit activations or one
// timestep of 4-bit activations; the timestep scheduler reads it one
// bit-plane at a time. Inside a row group the earliest timestep / least
// significant bit sits in bit 0 (this bit order is an implementation choice).
//
// Interface: push/din write at the tail when not full; the head entry is
// visible on dout whenever empty is low and pop removes it. A push and a pop
// in the same cycle are both performed. The 4-bit entry width is the
// design's; the depth is this implementation's choice.
module act_fifo #(
  parameter int ROWS     = aster_pkg::ROWS,
  parameter int ACT_BITS = aster_pkg::ACT_BITS,
  parameter int DEPTH    = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [ROWS*ACT_BITS-1:0] din,
  input  logic                     pop,
  output logic [ROWS*ACT_BITS-1:0] dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [ROWS*ACT_BITS-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push && (!full || pop);
  assign do_pop  = pop && !empty;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= nxt(wr_ptr);
      if (do_pop)  rd_ptr <= nxt(rd_ptr);
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  // A pop of an empty FIFO is a sequencing error of the caller.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
