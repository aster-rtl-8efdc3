// sdsa_unit: spike-driven self-attention.
//
// For binary Q, K, V spike matrices of N tokens by D channels the attention
// is computed without multiplications:
//   1. for every token, the Hadamard product Q_n AND K_n is added column-wise
//      into D channel counters (qk_valid, one token per cycle);
//   2. a channel whose count reaches the attention threshold vth fires,
//      giving a D-bit channel mask (the spiking neuron after the column sum);
//   3. for every token, V_n AND mask is the attention output (v_valid in,
//      out_valid/out one cycle later).
// clr starts a new attention map. out_ones is the number of ones in out; the
// layer-skip unit uses it to measure the attention firing rate. The
// mask-and-add formulation and column-wise reduction follow the design;
// computing it in tile logic, the counter width and the >= test are this
// implementation's choices.
module sdsa_unit #(
  parameter int D     = aster_pkg::ROWS,
  parameter int CNT_W = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     qk_valid,
  input  logic [D-1:0]             q,
  input  logic [D-1:0]             k,
  input  logic [CNT_W-1:0]         vth,
  input  logic                     v_valid,
  input  logic [D-1:0]             v,
  output logic [D-1:0]             mask,
  output logic                     out_valid,
  output logic [D-1:0]             out,
  output logic [$clog2(D+1)-1:0]   out_ones
);
  logic [D-1:0][CNT_W-1:0] cnt;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;
  localparam int SUM_W = $clog2(D + 1);

  logic [$clog2(D+1)-1:0] ones_nxt;

  always_comb begin
    for (int d = 0; d < D; d++) mask[d] = (cnt[d] >= vth);
    ones_nxt = SUM_W'($countones(v & mask));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      out_ones  <= '0;
    end else begin
      out_valid <= v_valid;
      if (clr) cnt <= '0;
      else if (qk_valid) begin
        for (int d = 0; d < D; d++)
          if (q[d] && k[d] && cnt[d] != CNT_MAX) cnt[d] <= cnt[d] + 1'b1;
      end
      if (v_valid) begin
        out      <= v & mask;
        out_ones <= ones_nxt;
      end
    end
  end
endmodule
