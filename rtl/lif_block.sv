// lif_block: bit-serial membrane accumulation and integrate-and-fire
// activation of the COLS neurons of one subarray.
//
// Every column has a local accumulator and a comparator; the potentials of
// SLOTS neuron slots live in the embedded membrane buffer. For each
// bit-plane the partial sums arrive on acc_valid together with the slot, the
// bit weight `shift` and fire_en (the last bit of a timestep):
//   stage 1 (accumulate): O_tmp = O[slot] + (psum << shift), saturating;
//   stage 2 (threshold) : if fire_en, spike = (O_tmp >= vth) and the stored
//                         potential becomes 0 for a fired neuron, O_tmp
//                         otherwise; without fire_en O_tmp is stored as is.
// The two stages overlap: a new bit-plane may enter stage 1 every cycle, and
// a stage-2 result for the same slot is forwarded into stage 1, which gives
// the one-update-per-cycle pipeline of the 1-bit case and the four-cycle
// accumulate / one compare pattern of the 4-bit case. spike_valid and the
// spike register follow stage 2 by one clock edge.
//
// The accumulate-shift-compare-clear structure follows the design. It
// shows no leak term, so none is applied; the firing test uses >= (the
// membrane is kept only while below the threshold); potentials are unsigned.
module lif_block #(
  parameter int COLS     = aster_pkg::COLS,
  parameter int SLOTS    = aster_pkg::SLOTS,
  parameter int MEM_W    = aster_pkg::MEM_W,
  parameter int ADC_BITS = aster_pkg::ADC_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          acc_valid,
  input  logic [COLS-1:0][ADC_BITS-1:0] psum,
  input  logic [1:0]                    shift,
  input  logic                          fire_en,
  input  logic [$clog2(SLOTS)-1:0]      slot,
  input  logic [MEM_W-1:0]              vth,
  input  logic                          clr,
  input  logic [$clog2(SLOTS)-1:0]      clr_slot,
  output logic                          spike_valid,
  output logic [COLS-1:0]               spikes
);
  localparam int XW = MEM_W + 1;
  localparam logic [MEM_W-1:0] MEM_MAX = '1;

  logic [COLS-1:0][MEM_W-1:0] mem_rd, base, s2_new;
  logic [COLS-1:0][MEM_W-1:0] s1_tmp, s1_nxt;
  logic                       s1_valid, s1_fire;
  logic [$clog2(SLOTS)-1:0]   s1_slot;
  logic [COLS-1:0]            s2_spk;

  membrane_buffer #(.COLS(COLS), .SLOTS(SLOTS), .MEM_W(MEM_W)) u_mem (
    .clk     (clk),
    .rd_slot (slot),
    .rd_data (mem_rd),
    .we      (s1_valid),
    .wr_slot (s1_slot),
    .wr_data (s2_new),
    .clr     (clr),
    .clr_slot(clr_slot)
  );

  // Stage 2: comparators and clear-on-fire.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      s2_spk[c] = s1_fire && (s1_tmp[c] >= vth);
      s2_new[c] = s2_spk[c] ? '0 : s1_tmp[c];
    end
  end

  // Stage 1: local accumulators, with forwarding from stage 2.
  always_comb begin
    for (int c = 0; c < COLS; c++)
      base[c] = (s1_valid && s1_slot == slot) ? s2_new[c] : mem_rd[c];
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [XW-1:0] sum;
      sum = XW'(base[c]) + (XW'(psum[c]) << shift);
      s1_nxt[c] = sum[XW-1] ? MEM_MAX : sum[MEM_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid    <= 1'b0;
      s1_fire     <= 1'b0;
      s1_slot     <= '0;
      s1_tmp      <= '0;
      spike_valid <= 1'b0;
      spikes      <= '0;
    end else begin
      s1_valid <= acc_valid;
      if (acc_valid) begin
        s1_fire <= fire_en;
        s1_slot <= slot;
        s1_tmp  <= s1_nxt;
      end
      spike_valid <= s1_valid && s1_fire;
      if (s1_valid && s1_fire) spikes <= s2_spk;
    end
  end
endmodule
