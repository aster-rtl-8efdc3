// tb_aster_top: end-to-end test of the whole chip at its default size
// (four tiles of four 128x128 subarrays), driven only through the host
// packet ports.
//
// Flow, checked step by step against a reference model kept in this
// testbench (binary weights, bit-plane partial sums, integrate-and-fire
// with hard reset, max pooling as OR, spike-driven attention, base-2
// softmax early exit):
//   setup   program ten subarrays with back-to-back commands (responses are
//           collected concurrently, so the tile-0 router sees contention);
//           check refusal of a push into a full FIFO and of a run on an
//           empty one.
//   sample  up to three timesteps of
//     tile 0  patch embedding: four 4-bit input tokens -> LIF spikes,
//             then max pooling of token pairs (two tokens remain);
//     tile 1  Q, K, V projections (three subarrays, one broadcast run per
//             token), then spike-driven self-attention, unless the layer
//             has been marked for skipping (identity: no Q, K, V runs, and
//             the attention command reports the bypass);
//     tile 2  two-layer MLP on one subarray, 1-bit bit-serial, the first
//             layer's spikes looped back into the FIFO as the second's input;
//     tile 3  classification head over all four subarrays (2-bit inputs,
//             global accumulator), logits to the early-exit unit; stop when
//             it reports exit.
//   Sample 0 profiles attention activity; the layer-skip decision then
//   marks the attention layer, so sample 1 bypasses it.
// Each mechanism (zero-skipping wordlines, skipped empty bit-planes, each
// precision, membrane reset,
// loopback, multi-subarray accumulation, max pooling, attention, layer skip,
// confident exit, timestep-limit exit, router contention, FIFO refusal) is
// counted and must occur at least once.
module tb_aster_top;
  import aster_pkg::*;
  localparam int NT = 4;

  logic clk = 0, rst_n = 0;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 1;
  pkt_t host_in_pkt, host_out_pkt;

  aster_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pkt_t rq[$];
  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) rq.push_back(host_out_pkt);
  always @(negedge clk) host_out_ready = ($urandom % 4) != 0;

  // ---------------- mechanism counters ----------------
  int n_prec[3], n_zero_skip, n_fired, n_loopback, n_ga_multi, n_pool, n_sdsa, n_skipped;
  int n_exit_conf, n_exit_tmax, n_contention, n_reject, n_plane_skip;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tile[0].u_tile.g_sub[0].u_sub.fire &&
        int'(dut.g_tile[0].u_tile.g_sub[0].u_sub.wl_active) < ROWS) n_zero_skip++;
    if (dut.g_tile[0].u_tile.u_router.up_wants_dn && dut.g_tile[0].u_tile.u_router.li_valid) n_contention++;
    if (dut.g_tile[2].u_tile.g_sub[0].u_sub.acc_valid && dut.g_tile[2].u_tile.g_sub[0].u_sub.psum_zero) n_plane_skip++;
    if (dut.g_tile[2].u_tile.g_sub[0].u_sub.entry_valid && dut.g_tile[2].u_tile.g_sub[0].u_sub.loopback_q) n_loopback++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- host driver ----------------
  function automatic pkt_t mk(int dest, opcode_e op, int sub = 0, bit all = 0,
                              int a0 = 0, int a1 = 0, int a2 = 0, int a3 = 0,
                              int arg0 = 0, int arg1 = 0, int flags = 0,
                              logic [ENTRY_W-1:0] data = '0);
    pkt_t p;
    p = '0;
    p.dest = TILE_ID_W'(dest); p.op = op; p.sub = 2'(sub); p.all = all;
    p.a0 = 8'(a0); p.a1 = 8'(a1); p.a2 = 8'(a2); p.a3 = 8'(a3);
    p.arg0 = 16'(arg0); p.arg1 = 16'(arg1); p.flags = 8'(flags); p.data = data;
    return p;
  endfunction

  task automatic send(input pkt_t p);
    @(negedge clk);
    host_in_pkt = p; host_in_valid = 1;
    #1;
    while (!host_in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    host_in_valid = 0;
  endtask

  task automatic recv(output pkt_t r);
    int guard;
    guard = 0;
    while (rq.size() == 0 && guard < 200000) begin @(negedge clk); guard++; end
    if (rq.size() == 0) begin chk(0, "response timeout"); r = '0; end
    else r = rq.pop_front();
  endtask

  task automatic cmd(input pkt_t p, output pkt_t r);
    send(p);
    recv(r);
    chk(r.op == OP_RESP && r.a0 == 8'(p.op) && r.a1 == 8'(p.dest), "response header");
  endtask

  // ---------------- reference model ----------------
  logic [COLS-1:0] W [NT][NUM_SUB][ROWS];
  int memm [NT][NUM_SUB][SLOTS][COLS];
  longint ee_sum [CLASSES];
  int ee_t;

  function automatic int colsum(int t, int s, logic [ENTRY_W-1:0] e, int b, int c);
    int n;
    n = 0;
    for (int r = 0; r < ROWS; r++) n += int'(e[r*ACT_BITS + b] & W[t][s][r][c]);
    return n;
  endfunction

  function automatic logic [ENTRY_W-1:0] model_lif(int t, int s, int slot,
      logic [ENTRY_W-1:0] e, int nb, int vth);
    logic [ENTRY_W-1:0] out;
    out = '0;
    for (int ts = 0; ts < 4 / nb; ts++)
      for (int c = 0; c < COLS; c++) begin
        int o;
        o = memm[t][s][slot][c];
        for (int b = 0; b < nb; b++) begin
          o += colsum(t, s, e, ts*nb + b, c) << b;
          if (o > 65535) o = 65535;
        end
        if (o >= vth) begin out[c*ACT_BITS + ts] = 1'b1; memm[t][s][slot][c] = 0; n_fired++; end
        else memm[t][s][slot][c] = o;
      end
    return out;
  endfunction

  function automatic logic [ROWS-1:0] plane0(logic [ENTRY_W-1:0] e);
    logic [ROWS-1:0] v;
    for (int r = 0; r < ROWS; r++) v[r] = e[r*ACT_BITS];
    return v;
  endfunction
  function automatic logic [ENTRY_W-1:0] spread0(logic [ROWS-1:0] v);
    logic [ENTRY_W-1:0] e;
    e = '0;
    for (int r = 0; r < ROWS; r++) e[r*ACT_BITS] = v[r];
    return e;
  endfunction

  function automatic logic [ENTRY_W-1:0] rnd_entry(int density);
    logic [ENTRY_W-1:0] e;
    for (int q = 0; q < ENTRY_W/32; q++) begin
      e[q*32 +: 32] = $urandom;
      if (density < 2) e[q*32 +: 32] &= $urandom;
      if (density < 1) e[q*32 +: 32] &= $urandom;
    end
    return e;
  endfunction

  task automatic program_sub(int t, int s);
    for (int r = 0; r < ROWS; r++) begin
      for (int q = 0; q < COLS/32; q++) W[t][s][r][q*32 +: 32] = $urandom & $urandom;
      send(mk(t, OP_WRITE_ROW, s, 0, r, 0, 0, 0, 0, 0, 0, ENTRY_W'(W[t][s][r])));
    end
  endtask

  // ---------------- test ----------------
  initial begin
    pkt_t r;
    logic [ENTRY_W-1:0] x [4];
    logic [ENTRY_W-1:0] e0 [4];
    logic [ENTRY_W-1:0] pm [2];
    logic [ENTRY_W-1:0] qkv [2][NUM_SUB];
    logic [ENTRY_W-1:0] om [2];
    logic [ENTRY_W-1:0] hm [2];
    logic [ENTRY_W-1:0] h2 [2];
    logic [LAYERS-1:0] skip_model;
    longint prof_ones, prof_bits;
    int nresp;

    skip_model = '0; prof_ones = 0; prof_bits = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- setup: pipelined weight programming of ten subarrays ----
    program_sub(0, 0);
    for (int s = 0; s < NUM_SUB; s++) program_sub(1, s);
    program_sub(2, 0);
    for (int s = 0; s < NUM_SUB; s++) program_sub(3, s);
    nresp = 0;
    while (nresp < 10 * ROWS) begin
      recv(r);
      nresp++;
      if (r.a0 != 8'(OP_WRITE_ROW)) begin chk(0, "write ack"); break; end
    end
    chk(nresp == 10 * ROWS, "all row writes acknowledged");

    // ---- FIFO refusal: tile 2, subarray 3 holds four entries at most ----
    for (int i = 0; i < 5; i++) begin
      cmd(mk(2, OP_PUSH_ACT, 3, 0, 0, 0, 0, 0, 0, 0, 0, rnd_entry(1)), r);
      chk(r.flags[1] == (i == 4), "push refused only when full");
      if (r.flags[1]) n_reject++;
    end
    cmd(mk(2, OP_RUN, 2, 0, 0, 0, 0, 0, 100, 0, 0), r);
    chk(r.flags[1], "run on empty FIFO refused");
    if (r.flags[1]) n_reject++;

    for (int smp = 0; smp < 2; smp++) begin
      int beta;
      beta = (smp == 0) ? 65535 : 32768;
      for (int n = 0; n < 4; n++) x[n] = rnd_entry(2);
      if (smp == 1) begin
        // attention activity seen in sample 0 decides the skip bits
        cmd(mk(1, OP_SKIP_CFG, 0, 0, 0, 0, 0, 0, 65535, 0, 4), r);
        if (prof_bits != 0) skip_model[0] = (prof_ones << 16) < (longint'(65535) * prof_bits);
        chk(r.a2 == 8'(skip_model), "skip decision");
      end
      cmd(mk(3, OP_EE_CFG, 0, 0, 10, 3, 0, 0, beta), r);
      for (int c = 0; c < CLASSES; c++) ee_sum[c] = 0;
      ee_t = 0;
      // clear membranes of every slot in use
      for (int t = 0; t < NT; t++)
        for (int sl = 0; sl < 4; sl++) begin
          cmd(mk(t, OP_CLR_MEM, 0, 1, sl), r);
          for (int s = 0; s < NUM_SUB; s++) for (int c = 0; c < COLS; c++) memm[t][s][sl][c] = 0;
        end

      for (int ts = 1; ts <= 3; ts++) begin
        logic [ROWS-1:0] qk_mask;
        int cnt [ROWS];
        longint lanes [COLS];
        int mx, best, ones;
        longint S;
        bit conf, ex;
        pkt_t sd;
        // tile 0: embedding, 4-bit inputs
        for (int n = 0; n < 4; n++) begin
          cmd(mk(0, OP_PUSH_ACT, 0, 0, 0, 0, 0, 0, 0, 0, 0, x[n]), r);
          cmd(mk(0, OP_RUN, 0, 0, n, n, 1, 0, 180, 0, 32 | int'(PREC_4)), r);
          n_prec[2]++;
          e0[n] = model_lif(0, 0, n, x[n], 4, 180);
        end
        cmd(mk(0, OP_POOL, 0, 0, 0, 2, 8), r);
        cmd(mk(0, OP_POOL, 0, 0, 2, 2, 9), r);
        n_pool += 2;
        pm[0] = e0[0] | e0[1];
        pm[1] = e0[2] | e0[3];
        for (int m = 0; m < 2; m++) begin
          cmd(mk(0, OP_READ_GB, 0, 0, 8 + m), r);
          chk(r.data == pm[m], $sformatf("embedding + pooling, token %0d", m));
        end
        // tile 1: Q, K, V and attention; a layer marked for skipping is an
        // identity, so its Q, K and V are not computed either
        for (int m = 0; m < 2 && !skip_model[0]; m++) begin
          cmd(mk(1, OP_PUSH_ACT, 0, 1, 0, 0, 0, 0, 0, 0, 0, pm[m]), r);
          cmd(mk(1, OP_RUN, 0, 1, m, 16 + m, 8, 0, 20, 0, 32 | int'(PREC_4)), r);
          n_prec[2]++;
          for (int s = 0; s < NUM_SUB; s++) qkv[m][s] = model_lif(1, s, m, pm[m], 4, 20);
        end
        for (int d = 0; d < ROWS; d++) cnt[d] = 0;
        for (int m = 0; m < 2; m++)
          for (int d = 0; d < ROWS; d++) cnt[d] += int'(qkv[m][0][d*ACT_BITS] & qkv[m][1][d*ACT_BITS]);
        for (int d = 0; d < ROWS; d++) qk_mask[d] = cnt[d] >= 1;
        cmd(mk(1, OP_SDSA, 0, 0, 16, 24, 32, 48, 2, 1, 8), r);
        sd = r;
        if (skip_model[0]) begin
          chk(sd.flags[0], "attention skipped");
          n_skipped++;
          om[0] = pm[0]; om[1] = pm[1];
        end else begin
          chk(!sd.flags[0], "attention computed");
          n_sdsa++;
          ones = 0;
          for (int m = 0; m < 2; m++) begin
            om[m] = spread0(plane0(qkv[m][2]) & qk_mask);
            ones += $countones(plane0(om[m]));
            cmd(mk(1, OP_READ_GB, 0, 0, 48 + m), r);
            chk(plane0(r.data) == plane0(om[m]), "attention output");
          end
          chk(int'(sd.arg0) == ones, "attention output spike count");
          prof_ones += ones; prof_bits += 2 * ROWS;
        end
        // tile 2: two MLP layers, 1-bit, loopback between them
        for (int m = 0; m < 2; m++) begin
          cmd(mk(2, OP_PUSH_ACT, 0, 0, 0, 0, 0, 0, 0, 0, 0, om[m]), r);
          cmd(mk(2, OP_RUN, 0, 0, m, 60 + m, 1, 0, 6, 0, 32 | 16 | int'(PREC_1)), r);
          n_prec[0]++;
          hm[m] = model_lif(2, 0, m, om[m], 1, 6);
          cmd(mk(2, OP_RUN, 0, 0, 2 + m, 62 + m, 1, 0, 6, 0, 32 | int'(PREC_1)), r);
          n_prec[0]++;
          h2[m] = model_lif(2, 0, 2 + m, hm[m], 1, 6);
          cmd(mk(2, OP_READ_GB, 0, 0, 62 + m), r);
          chk(r.data == h2[m], $sformatf("MLP output, token %0d", m));
        end
        // tile 3: head over all subarrays, 2-bit inputs, early exit
        cmd(mk(3, OP_PUSH_ACT, 0, 1, 0, 0, 0, 0, 0, 0, 0, h2[0] | h2[1]), r);
        cmd(mk(3, OP_RUN, 0, 1, 0, 0, 0, 0, 0, 0, (int'(RUN_LOGIT) << 2) | int'(PREC_2)), r);
        n_prec[1]++; n_ga_multi++;
        for (int c = 0; c < COLS; c++) begin
          lanes[c] = 0;
          for (int b = 0; b < 4; b++) begin
            for (int s = 0; s < NUM_SUB; s++) lanes[c] += colsum(3, s, h2[0] | h2[1], b, c) << (b % 2);
            if (lanes[c] > 65535) lanes[c] = 65535;
          end
        end
        for (int ch = 0; ch < 4; ch++) begin
          pkt_t g;
          cmd(mk(3, OP_READ_GA, 0, 0, ch), g);
          for (int l = 0; l < 32; l++)
            chk(longint'(g.data[l*GA_W +: GA_W]) == lanes[ch*32 + l], "head logits");
        end
        ee_t++;
        for (int c = 0; c < 10; c++) ee_sum[c] += lanes[c];
        mx = 0; best = 0;
        for (int c = 0; c < 10; c++) if (ee_sum[c] > mx) begin mx = int'(ee_sum[c]); best = c; end
        S = 0;
        for (int c = 0; c < 10; c++) begin
          longint e;
          e = (mx - ee_sum[c]) / ee_t;
          if (e <= 16) S += 65536 >> e;
        end
        conf = (longint'(1) << 32) > longint'(beta) * S;
        ex = conf || ee_t >= 3;
        chk(r.arg0[0] == ex && r.arg0[1] == conf, "exit decision");
        chk(int'(r.a2) == best && int'(r.a3) == ee_t, "prediction and timestep count");
        if (r.arg0[0]) begin
          if (r.arg0[1]) n_exit_conf++; else n_exit_tmax++;
          $display("sample %0d: class %0d after %0d timestep(s)%s", smp, r.a2, r.a3,
                   r.arg0[1] ? " (confident)" : " (limit)");
          break;
        end
      end
    end

    // ---- mechanisms ----
    $display("mechanisms: prec1=%0d prec2=%0d prec4=%0d zero_skip_cycles=%0d empty_planes=%0d fired=%0d loopback=%0d",
             n_prec[0], n_prec[1], n_prec[2], n_zero_skip, n_plane_skip, n_fired, n_loopback);
    $display("            ga_multi=%0d pool=%0d sdsa=%0d skipped=%0d exit_conf=%0d exit_tmax=%0d contention=%0d refused=%0d",
             n_ga_multi, n_pool, n_sdsa, n_skipped, n_exit_conf, n_exit_tmax, n_contention, n_reject);
    chk(n_prec[0] > 0, "1-bit runs");
    chk(n_prec[1] > 0, "2-bit runs");
    chk(n_prec[2] > 0, "4-bit runs");
    chk(n_zero_skip > 0, "zero-skipped wordlines");
    chk(n_plane_skip > 0, "empty bit-planes skipped");
    chk(n_fired > 0, "neurons fired and reset");
    chk(n_loopback > 0, "spike loopback");
    chk(n_ga_multi > 0, "multi-subarray accumulation");
    chk(n_pool > 0, "max pooling");
    chk(n_sdsa > 0, "attention computed");
    chk(n_skipped > 0, "attention skipped");
    chk(n_exit_conf > 0, "confident early exit");
    chk(n_exit_tmax > 0, "timestep-limit exit");
    chk(n_contention > 0, "router contention");
    chk(n_reject > 0, "FIFO refusal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
