// subarray: one RRAM processing-in-memory subarray with its digital
// periphery.
//
// Data path, in order: input activation FIFO -> mask registers (one
// bit-plane) -> gated wordline drivers (mask AND subarray-select AND fire)
// -> crossbar (bitline sums) -> column multiplexers and converters (partial
// sums) -> LIF block (bit-serial membrane accumulation, threshold, clear)
// -> spike buffer (packs output spikes into an activation entry). The
// timestep scheduler sequences one FIFO entry per start.
//
// Interface:
//   ss            subarray select from the sub-array decoder; without it no
//                 wordline fires.
//   wr_*          program one crossbar row.
//   push/push_data push an activation entry; loopback makes the entry built
//                 from this run's output spikes enter the FIFO again as the
//                 next input (the "next cycle input" path).
//   start         process the FIFO head with precision prec; lif_en routes
//                 the partial sums into the LIF neurons of slot `slot` with
//                 threshold vth (otherwise only psum_valid is produced for
//                 the global accumulator).
//   psum_valid    one pulse per bit-plane with psum and its bit weight
//                 psum_shift.
//   entry_valid   packed output spikes (LIF runs only), in the cycle of done.
//   done          one pulse after start: ADC_SHARE+2 cycles per bit-plane
//                 that holds a one, 2 per empty bit-plane, plus 4
//                 (44 cycles when every plane holds a one). An empty plane
//                 fires no wordline and is not read out; its partial sums
//                 are zero.
module subarray
#(
  parameter int ROWS      = aster_pkg::ROWS,
  parameter int COLS      = aster_pkg::COLS,
  parameter int ACT_BITS  = aster_pkg::ACT_BITS,
  parameter int ADC_SHARE = aster_pkg::ADC_SHARE,
  parameter int ADC_BITS  = aster_pkg::ADC_BITS,
  parameter int MEM_W     = aster_pkg::MEM_W,
  parameter int SLOTS     = aster_pkg::SLOTS,
  parameter int FIFO_DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ss,
  input  logic                          wr_en,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [COLS-1:0]               wr_data,
  input  logic                          push,
  input  logic [ROWS*ACT_BITS-1:0]      push_data,
  output logic                          fifo_full,
  output logic                          fifo_empty,
  input  logic                          start,
  input  aster_pkg::prec_e                         prec,
  input  logic                          lif_en,
  input  logic                          loopback,
  input  logic [$clog2(SLOTS)-1:0]      slot,
  input  logic [MEM_W-1:0]              vth,
  input  logic                          clr_mem,
  input  logic [$clog2(SLOTS)-1:0]      clr_slot,
  output logic                          busy,
  output logic                          done,
  output logic                          psum_valid,
  output logic [COLS-1:0][ADC_BITS-1:0] psum,
  output logic [1:0]                    psum_shift,
  output logic                          entry_valid,
  output logic [ROWS*ACT_BITS-1:0]      entry,
  output logic [$clog2(ROWS+1)-1:0]     wl_active
);
  localparam int SUM_W = $clog2(ROWS + 1);

  logic [ROWS*ACT_BITS-1:0] fifo_dout;
  logic fifo_pop, fifo_push;
  logic [ROWS*ACT_BITS-1:0] fifo_din;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  logic mask_load, fire, sample, acc_valid, fire_en, sched_done;
  logic [$clog2(ACT_BITS)-1:0] plane;
  logic plane_zero, psum_zero;
  logic [COLS-1:0][ADC_BITS-1:0] psum_raw;
  logic [$clog2(ADC_SHARE)-1:0] step;
  logic [1:0] shift, tstep;
  logic [ROWS-1:0] mask, wl;
  logic [COLS-1:0][SUM_W-1:0] col_sum;
  logic spike_valid;
  logic [COLS-1:0] spikes;
  logic lif_en_q, loopback_q;
  logic [$clog2(SLOTS)-1:0] slot_q;
  logic [MEM_W-1:0] vth_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lif_en_q   <= 1'b0;
      loopback_q <= 1'b0;
      slot_q     <= '0;
      vth_q      <= '0;
    end else if (start && !busy) begin
      lif_en_q   <= lif_en;
      loopback_q <= loopback;
      slot_q     <= slot;
      vth_q      <= vth;
    end
  end

  assign fifo_push = push || (entry_valid && loopback_q);
  assign fifo_din  = push ? push_data : entry;

  act_fifo #(.ROWS(ROWS), .ACT_BITS(ACT_BITS), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .push(fifo_push), .din(fifo_din),
    .pop(fifo_pop), .dout(fifo_dout),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  timestep_scheduler #(.ACT_BITS(ACT_BITS), .ADC_SHARE(ADC_SHARE)) u_sched (
    .clk(clk), .rst_n(rst_n),
    .start(start), .prec(prec), .busy(busy),
    .mask_load(mask_load), .plane(plane), .fire(fire),
    .sample(sample), .step(step),
    .acc_valid(acc_valid), .shift(shift), .fire_en(fire_en), .tstep(tstep),
    .plane_zero(plane_zero), .psum_zero(psum_zero),
    .pop(fifo_pop), .done(sched_done)
  );

  // Zero-skipping at plane level: the plane about to be loaded has no ones.
  always_comb begin
    plane_zero = 1'b1;
    for (int r = 0; r < ROWS; r++)
      if (fifo_dout[r*ACT_BITS + int'(plane)]) plane_zero = 1'b0;
  end

  mask_regs #(.ROWS(ROWS), .ACT_BITS(ACT_BITS)) u_mask (
    .clk(clk), .rst_n(rst_n),
    .load(mask_load), .clear(sched_done), .plane(plane), .entry(fifo_dout),
    .mask(mask)
  );

  gated_wl_driver #(.ROWS(ROWS)) u_wld (
    .mask(mask), .ss(ss), .fire(fire), .wl(wl), .active_cnt(wl_active)
  );

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .SUM_W(SUM_W)) u_xbar (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .wl(wl), .col_sum(col_sum)
  );

  peripheral_readout #(.COLS(COLS), .ADC_SHARE(ADC_SHARE), .SUM_W(SUM_W),
                       .ADC_BITS(ADC_BITS)) u_periph (
    .clk(clk), .rst_n(rst_n),
    .col_sum(col_sum), .step(step), .sample(sample), .psum(psum_raw)
  );

  assign psum = psum_zero ? '0 : psum_raw;

  assign psum_valid = acc_valid;
  assign psum_shift = shift;

  lif_block #(.COLS(COLS), .SLOTS(SLOTS), .MEM_W(MEM_W), .ADC_BITS(ADC_BITS)) u_lif (
    .clk(clk), .rst_n(rst_n),
    .acc_valid(acc_valid && lif_en_q), .psum(psum), .shift(shift), .fire_en(fire_en),
    .slot(slot_q), .vth(vth_q),
    .clr(clr_mem), .clr_slot(clr_slot),
    .spike_valid(spike_valid), .spikes(spikes)
  );

  spike_buffer #(.ROWS(COLS), .ACT_BITS(ACT_BITS)) u_spk (
    .clk(clk), .rst_n(rst_n),
    .in_valid(spike_valid), .spikes(spikes), .flush(sched_done),
    .out_valid(entry_valid), .entry(entry)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= sched_done;
  end

  // The output neurons become the next layer's input rows.
  if (ROWS != COLS) begin : g_size_err
    $error("subarray: the spike feedback path needs ROWS == COLS");
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> !fifo_empty);
  assert property (@(posedge clk) disable iff (!rst_n) push |-> !fifo_full);
endmodule
