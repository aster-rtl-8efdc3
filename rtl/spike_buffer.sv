// spike_buffer: packs output spike vectors into activation entries.
//
// Each spike vector (one bit per neuron/column) received on in_valid is
// stored as bit k of every row group of an entry, k counting from 0, so an
// entry collects ACT_BITS successive timesteps of 1-bit spikes in the same
// layout the input activation FIFO uses. The entry is emitted (out_valid
// for one cycle) when it is full or when flush is raised with at least one
// spike vector in it; the vector arriving in the same cycle as a flush is
// included. Emitted entries feed the next layer through the global buffer or
// are looped back into the FIFO.
module spike_buffer #(
  parameter int ROWS     = aster_pkg::ROWS,
  parameter int ACT_BITS = aster_pkg::ACT_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [ROWS-1:0]          spikes,
  input  logic                     flush,
  output logic                     out_valid,
  output logic [ROWS*ACT_BITS-1:0] entry
);
  logic [ROWS*ACT_BITS-1:0] acc, acc_nxt;
  logic [$clog2(ACT_BITS+1)-1:0] cnt, cnt_nxt;

  always_comb begin
    acc_nxt = acc;
    cnt_nxt = cnt;
    if (in_valid) begin
      for (int r = 0; r < ROWS; r++) acc_nxt[r*ACT_BITS + int'(cnt)] = spikes[r];
      cnt_nxt = cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      entry     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (cnt_nxt == ($clog2(ACT_BITS+1))'(ACT_BITS) || (flush && cnt_nxt != '0)) begin
        out_valid <= 1'b1;
        entry     <= acc_nxt;
        acc       <= '0;
        cnt       <= '0;
      end else begin
        acc <= acc_nxt;
        cnt <= cnt_nxt;
      end
    end
  end
endmodule
