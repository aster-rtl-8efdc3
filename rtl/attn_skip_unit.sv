// attn_skip_unit: task-aware attention-layer skipping.
//
// During a profiling pass the tile reports, for every attention output it
// produces, the layer, the number of ones (obs_ones) and the number of bits
// observed (obs_bits). The unit keeps per-layer totals. On decide it sets
// skip[l] for every layer whose firing rate is below the threshold tau (a
// 16-bit fraction, 65536 = 1.0): ones * 2^16 < tau * bits. Layers that were
// never observed are left unchanged. The skip bits are fixed from then on
// (the decision is made once, at initialisation); they can also be written
// directly with set/set_mask. prof_clr clears the counters.
module attn_skip_unit #(
  parameter int LAYERS = aster_pkg::LAYERS,
  parameter int OBS_W  = 8,
  parameter int CNT_W  = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        prof_clr,
  input  logic                        obs_valid,
  input  logic [$clog2(LAYERS)-1:0]   obs_layer,
  input  logic [OBS_W-1:0]            obs_ones,
  input  logic [OBS_W-1:0]            obs_bits,
  input  logic                        decide,
  input  logic [15:0]                 tau,
  input  logic                        set,
  input  logic [LAYERS-1:0]           set_mask,
  output logic [LAYERS-1:0]           skip
);
  logic [CNT_W-1:0] ones [LAYERS];
  logic [CNT_W-1:0] bits [LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skip <= '0;
      for (int l = 0; l < LAYERS; l++) begin
        ones[l] <= '0;
        bits[l] <= '0;
      end
    end else begin
      if (prof_clr) begin
        for (int l = 0; l < LAYERS; l++) begin
          ones[l] <= '0;
          bits[l] <= '0;
        end
      end else if (obs_valid) begin
        ones[obs_layer] <= ones[obs_layer] + CNT_W'(obs_ones);
        bits[obs_layer] <= bits[obs_layer] + CNT_W'(obs_bits);
      end
      if (set) skip <= set_mask;
      else if (decide) begin
        for (int l = 0; l < LAYERS; l++)
          if (bits[l] != '0)
            skip[l] <= ((64'(ones[l]) << 16) < (64'(tau) * 64'(bits[l])));
      end
    end
  end
endmodule
