// tile: one ASTER tile.
//
// Four PIM subarrays share a tile-level digital periphery: the sub-array
// decoder (subarray selects), the global accumulator (adds partial sums of
// several subarrays), the global buffer (activation/spike entries), max
// pooling, the spike-driven self-attention unit, the attention layer-skip
// unit, the early-exit unit (class-logit time averaging and confidence test)
// and the tile controller, which executes command packets arriving through
// the tile's network-on-chip router and answers each with a response packet.
//
// Ports: the upstream (up_*) and downstream (dn_*) sides of the router,
// valid/ready packets of type aster_pkg::pkt_t. ID is the tile's address.
// The split into subarray-level analog compute and shared low-duty-cycle tile
// logic follows the design; placing the attention, skip and early-exit units
// in every tile is this implementation's choice.
module tile
  import aster_pkg::*;
#(
  parameter logic [TILE_ID_W-1:0] ID = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic up_valid,
  output logic up_ready,
  input  pkt_t up_pkt,
  output logic dn_valid,
  input  logic dn_ready,
  output pkt_t dn_pkt
);
  // router <-> controller
  logic cmd_valid, cmd_ready, rsp_valid, rsp_ready;
  pkt_t cmd_pkt, rsp_pkt;

  // decoder
  logic sad_en, sad_all;
  logic [$clog2(NUM_SUB)-1:0] sad_addr;
  logic [NUM_SUB-1:0] ss;

  // subarray controls
  logic wr_en, push, start, lif_en, loopback, clr_mem;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [COLS-1:0] wr_data;
  logic [ENTRY_W-1:0] push_data;
  prec_e prec;
  logic [$clog2(SLOTS)-1:0] slot;
  logic [MEM_W-1:0] vth;
  logic [NUM_SUB-1:0] sub_full, sub_empty, sub_busy, sub_done, sub_entry_valid, sub_psum_valid;
  logic [NUM_SUB-1:0][ENTRY_W-1:0] sub_entry;
  logic [NUM_SUB-1:0][COLS-1:0][ADC_BITS-1:0] sub_psum;
  logic [NUM_SUB-1:0][1:0] sub_shift;
  logic [NUM_SUB-1:0][$clog2(ROWS+1)-1:0] sub_wl_active;

  // tile units
  logic ga_clear;
  logic [NUM_SUB-1:0] ga_sel;
  logic [COLS-1:0][GA_W-1:0] ga_acc;
  logic [1:0] ga_shift;
  logic gb_en, gb_we;
  logic [$clog2(GB_DEPTH)-1:0] gb_addr;
  logic [ENTRY_W-1:0] gb_wdata, gb_wmask, gb_rdata;
  logic mp_start, mp_valid;
  logic [ENTRY_W-1:0] mp_res;
  logic sd_clr, sd_qk_valid, sd_v_valid, sd_out_valid;
  logic [ROWS-1:0] sd_q, sd_k, sd_v, sd_out, sd_mask;
  logic [7:0] sd_vth;
  logic [$clog2(ROWS+1)-1:0] sd_out_ones;
  logic sk_prof_clr, sk_obs_valid, sk_decide, sk_set;
  logic [$clog2(LAYERS)-1:0] sk_obs_layer;
  logic [15:0] sk_tau;
  logic [LAYERS-1:0] sk_set_mask, skip;
  logic ee_clr, ee_logit_valid, ee_busy, ee_done, ee_exit, ee_confident;
  logic [15:0] ee_beta;
  logic [7:0] ee_classes, ee_tmax, ee_pred, ee_t;

  noc_router #(.ID(ID)) u_router (
    .clk(clk), .rst_n(rst_n),
    .up_valid(up_valid), .up_ready(up_ready), .up_pkt(up_pkt),
    .li_valid(rsp_valid), .li_ready(rsp_ready), .li_pkt(rsp_pkt),
    .lo_valid(cmd_valid), .lo_ready(cmd_ready), .lo_pkt(cmd_pkt),
    .dn_valid(dn_valid), .dn_ready(dn_ready), .dn_pkt(dn_pkt)
  );

  sad #(.NUM_SUB(NUM_SUB)) u_sad (.en(sad_en), .all(sad_all), .addr(sad_addr), .ss(ss));

  for (genvar s = 0; s < NUM_SUB; s++) begin : g_sub
    subarray u_sub (
      .clk(clk), .rst_n(rst_n), .ss(ss[s]),
      .wr_en(wr_en && ss[s]), .wr_row(wr_row), .wr_data(wr_data),
      .push(push && ss[s]), .push_data(push_data),
      .fifo_full(sub_full[s]), .fifo_empty(sub_empty[s]),
      .start(start && ss[s]), .prec(prec), .lif_en(lif_en), .loopback(loopback),
      .slot(slot), .vth(vth),
      .clr_mem(clr_mem && ss[s]), .clr_slot(slot),
      .busy(sub_busy[s]), .done(sub_done[s]),
      .psum_valid(sub_psum_valid[s]), .psum(sub_psum[s]), .psum_shift(sub_shift[s]),
      .entry_valid(sub_entry_valid[s]), .entry(sub_entry[s]),
      .wl_active(sub_wl_active[s])
    );
  end

  // All selected subarrays run in lock step; take the bit weight of the
  // lowest selected one.
  always_comb begin
    ga_shift = '0;
    for (int s = NUM_SUB - 1; s >= 0; s--) if (ga_sel[s]) ga_shift = sub_shift[s];
  end

  global_accumulator u_ga (
    .clk(clk), .rst_n(rst_n), .clear(ga_clear),
    .in_valid(|(sub_psum_valid & ga_sel)), .sel(ga_sel), .shift(ga_shift),
    .psum(sub_psum), .acc(ga_acc)
  );

  global_buffer u_gb (
    .clk(clk), .en(gb_en), .we(gb_we), .addr(gb_addr),
    .wdata(gb_wdata), .wmask(gb_wmask), .rdata(gb_rdata)
  );

  max_pool u_mp (
    .clk(clk), .rst_n(rst_n), .start(mp_start), .in_valid(mp_valid),
    .din(gb_rdata), .res(mp_res)
  );

  sdsa_unit u_sdsa (
    .clk(clk), .rst_n(rst_n), .clr(sd_clr),
    .qk_valid(sd_qk_valid), .q(sd_q), .k(sd_k), .vth(sd_vth),
    .v_valid(sd_v_valid), .v(sd_v), .mask(sd_mask),
    .out_valid(sd_out_valid), .out(sd_out), .out_ones(sd_out_ones)
  );

  attn_skip_unit u_skip (
    .clk(clk), .rst_n(rst_n), .prof_clr(sk_prof_clr),
    .obs_valid(sk_obs_valid), .obs_layer(sk_obs_layer),
    .obs_ones(8'(sd_out_ones)), .obs_bits(8'(ROWS)),
    .decide(sk_decide), .tau(sk_tau), .set(sk_set), .set_mask(sk_set_mask),
    .skip(skip)
  );

  early_exit_unit u_ee (
    .clk(clk), .rst_n(rst_n), .clr(ee_clr), .beta(ee_beta),
    .num_classes(ee_classes), .t_max(ee_tmax),
    .logit_valid(ee_logit_valid), .logits(ga_acc[CLASSES-1:0]),
    .busy(ee_busy), .done(ee_done), .exit_now(ee_exit), .confident(ee_confident),
    .pred(ee_pred), .tcount(ee_t)
  );

  tile_controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .my_id(ID),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_pkt(cmd_pkt),
    .rsp_valid(rsp_valid), .rsp_ready(rsp_ready), .rsp_pkt(rsp_pkt),
    .sad_en(sad_en), .sad_all(sad_all), .sad_addr(sad_addr),
    .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .push(push), .push_data(push_data), .start(start), .prec(prec),
    .lif_en(lif_en), .loopback(loopback), .slot(slot), .vth(vth), .clr_mem(clr_mem),
    .ss(ss), .sub_full(sub_full), .sub_empty(sub_empty), .sub_done(sub_done),
    .sub_entry_valid(sub_entry_valid), .sub_entry(sub_entry),
    .ga_clear(ga_clear), .ga_sel(ga_sel), .ga_acc(ga_acc),
    .gb_en(gb_en), .gb_we(gb_we), .gb_addr(gb_addr), .gb_wdata(gb_wdata),
    .gb_wmask(gb_wmask), .gb_rdata(gb_rdata),
    .mp_start(mp_start), .mp_valid(mp_valid), .mp_res(mp_res),
    .sd_clr(sd_clr), .sd_qk_valid(sd_qk_valid), .sd_q(sd_q), .sd_k(sd_k),
    .sd_vth(sd_vth), .sd_v_valid(sd_v_valid), .sd_v(sd_v),
    .sd_out_valid(sd_out_valid), .sd_out(sd_out), .sd_out_ones(sd_out_ones),
    .sk_prof_clr(sk_prof_clr), .sk_obs_valid(sk_obs_valid), .sk_obs_layer(sk_obs_layer),
    .sk_decide(sk_decide), .sk_tau(sk_tau), .sk_set(sk_set), .sk_set_mask(sk_set_mask),
    .skip(skip),
    .ee_clr(ee_clr), .ee_beta(ee_beta), .ee_classes(ee_classes), .ee_tmax(ee_tmax),
    .ee_logit_valid(ee_logit_valid), .ee_done(ee_done), .ee_exit(ee_exit),
    .ee_confident(ee_confident), .ee_pred(ee_pred), .ee_t(ee_t)
  );
endmodule
