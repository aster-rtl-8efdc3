// tb_tile: end-to-end test of one tile (router, sub-array decoder, four
// subarrays, global accumulator, global buffer, max pool, attention unit,
// layer-skip unit, early-exit unit and the command sequencer) through its
// upstream and downstream packet ports, with random back-pressure on the
// downstream side.
//
// Checked against a reference model in this file: row programming of all
// four subarrays, buffer write/read, buffer-to-FIFO transfer, LIF runs at
// 4-bit and 2-bit precision with membranes carried between runs and cleared
// on command, strided write-back of the spike entries of all subarrays,
// partial-sum mode through the global accumulator (all subarrays), max
// pooling, attention over tokens stored in the buffer, layer skip set by
// command, early-exit decision for logits, FIFO-full and FIFO-empty
// refusals, and the response header of every command.
module tb_tile;
  import aster_pkg::*;

  logic clk = 0, rst_n = 0;
  logic up_valid = 0, up_ready, dn_valid, dn_ready = 1;
  pkt_t up_pkt, dn_pkt;

  tile dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pkt_t rq[$];
  always @(posedge clk) if (rst_n && dn_valid && dn_ready) rq.push_back(dn_pkt);
  always @(negedge clk) dn_ready = ($urandom % 3) != 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic pkt_t mk(opcode_e op, int sub = 0, bit all = 0,
                              int a0 = 0, int a1 = 0, int a2 = 0, int a3 = 0,
                              int arg0 = 0, int arg1 = 0, int flags = 0,
                              logic [ENTRY_W-1:0] data = '0);
    pkt_t p;
    p = '0;
    p.dest = '0; p.op = op; p.sub = 2'(sub); p.all = all;
    p.a0 = 8'(a0); p.a1 = 8'(a1); p.a2 = 8'(a2); p.a3 = 8'(a3);
    p.arg0 = 16'(arg0); p.arg1 = 16'(arg1); p.flags = 8'(flags); p.data = data;
    return p;
  endfunction

  task automatic send(input pkt_t p);
    @(negedge clk);
    up_pkt = p; up_valid = 1;
    #1;
    while (!up_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    up_valid = 0;
  endtask

  task automatic recv(output pkt_t r);
    int guard;
    guard = 0;
    while (rq.size() == 0 && guard < 100000) begin @(negedge clk); guard++; end
    if (rq.size() == 0) begin chk(0, "response timeout"); r = '0; end
    else r = rq.pop_front();
  endtask

  task automatic cmd(input pkt_t p, output pkt_t r);
    send(p);
    recv(r);
    chk(r.dest == HOST_ID && r.op == OP_RESP && r.a0 == 8'(p.op) && r.a1 == 8'd0,
        "response header");
  endtask

  // reference model
  logic [COLS-1:0] W [NUM_SUB][ROWS];
  int memm [NUM_SUB][SLOTS][COLS];
  logic [ENTRY_W-1:0] gbm [GB_DEPTH];

  function automatic int colsum(int s, logic [ENTRY_W-1:0] e, int b, int c);
    int n;
    n = 0;
    for (int r = 0; r < ROWS; r++) n += int'(e[r*ACT_BITS + b] & W[s][r][c]);
    return n;
  endfunction

  function automatic logic [ENTRY_W-1:0] model_lif(int s, int slot,
      logic [ENTRY_W-1:0] e, int nb, int vth);
    logic [ENTRY_W-1:0] out;
    out = '0;
    for (int ts = 0; ts < 4 / nb; ts++)
      for (int c = 0; c < COLS; c++) begin
        int o;
        o = memm[s][slot][c];
        for (int b = 0; b < nb; b++) begin
          o += colsum(s, e, ts*nb + b, c) << b;
          if (o > 65535) o = 65535;
        end
        if (o >= vth) begin out[c*ACT_BITS + ts] = 1'b1; memm[s][slot][c] = 0; end
        else memm[s][slot][c] = o;
      end
    return out;
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

  function automatic bit lanes_ok(pkt_t g, int ch, longint lanes [COLS]);
    for (int l = 0; l < 32; l++)
      if (longint'(g.data[l*GA_W +: GA_W]) != lanes[ch*32 + l]) return 0;
    return 1;
  endfunction

  initial begin
    pkt_t r;
    logic [ENTRY_W-1:0] x, sp [NUM_SUB];
    longint lanes [COLS];
    int nresp;

    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NUM_SUB; s++) for (int sl = 0; sl < SLOTS; sl++)
      for (int c = 0; c < COLS; c++) memm[s][sl][c] = 0;

    // program all four subarrays back to back
    for (int s = 0; s < NUM_SUB; s++)
      for (int rr = 0; rr < ROWS; rr++) begin
        for (int q = 0; q < COLS/32; q++) W[s][rr][q*32 +: 32] = $urandom & $urandom;
        send(mk(OP_WRITE_ROW, s, 0, rr, 0, 0, 0, 0, 0, 0, ENTRY_W'(W[s][rr])));
      end
    nresp = 0;
    while (nresp < NUM_SUB * ROWS) begin
      recv(r);
      nresp++;
      if (r.a0 != 8'(OP_WRITE_ROW)) begin chk(0, "write ack"); break; end
    end
    chk(nresp == NUM_SUB * ROWS, "row writes acknowledged");
    for (int sl = 0; sl < 4; sl++) cmd(mk(OP_CLR_MEM, 0, 1, sl), r);

    // buffer write / read
    for (int a = 0; a < 8; a++) begin
      gbm[a] = rnd_entry(2);
      cmd(mk(OP_WRITE_GB, 0, 0, a, 0, 0, 0, 0, 0, 0, gbm[a]), r);
    end
    for (int a = 0; a < 8; a++) begin
      cmd(mk(OP_READ_GB, 0, 0, a), r);
      chk(r.data == gbm[a], "buffer read");
    end

    // partial sums of all subarrays through the global accumulator, 4-bit
    x = rnd_entry(2);
    cmd(mk(OP_PUSH_ACT, 0, 1, 0, 0, 0, 0, 0, 0, 0, x), r);
    cmd(mk(OP_RUN, 0, 1, 0, 0, 0, 0, 0, 0, (int'(RUN_PSUM) << 2) | int'(PREC_4)), r);
    chk(!r.flags[1], "psum run accepted");
    for (int c = 0; c < COLS; c++) begin
      lanes[c] = 0;
      for (int b = 0; b < 4; b++) begin
        for (int s = 0; s < NUM_SUB; s++) lanes[c] += colsum(s, x, b, c) << b;
        if (lanes[c] > 65535) lanes[c] = 65535;
      end
    end
    for (int ch = 0; ch < 4; ch++) begin
      cmd(mk(OP_READ_GA, 0, 0, ch), r);
      chk(lanes_ok(r, ch, lanes), "accumulated partial sums");
    end

    // LIF, 4-bit, from the buffer into the FIFOs, twice on one slot so the
    // membrane carries over; strided write-back of all four spike entries
    for (int rep = 0; rep < 2; rep++) begin
      cmd(mk(OP_GB_TO_FIFO, 0, 1, rep), r);
      cmd(mk(OP_RUN, 0, 1, 1, 16 + rep, 4, 0, 150, 0, 32 | int'(PREC_4)), r);
      for (int s = 0; s < NUM_SUB; s++) sp[s] = model_lif(s, 1, gbm[rep], 4, 150);
      for (int s = 0; s < NUM_SUB; s++) begin
        gbm[16 + rep + 4*s] = sp[s];
        cmd(mk(OP_READ_GB, 0, 0, 16 + rep + 4*s), r);
        chk(r.data == sp[s], $sformatf("LIF 4-bit spikes, subarray %0d run %0d", s, rep));
      end
    end
    // LIF, 2-bit, one subarray; then clear and repeat: same result as fresh
    x = rnd_entry(1);
    for (int rep = 0; rep < 2; rep++) begin
      cmd(mk(OP_CLR_MEM, 2, 0, 3), r);
      for (int c = 0; c < COLS; c++) memm[2][3][c] = 0;
      cmd(mk(OP_PUSH_ACT, 2, 0, 0, 0, 0, 0, 0, 0, 0, x), r);
      cmd(mk(OP_RUN, 2, 0, 3, 40, 0, 0, 30, 0, 32 | int'(PREC_2)), r);
      sp[2] = model_lif(2, 3, x, 2, 30);
      gbm[40] = sp[2];
      cmd(mk(OP_READ_GB, 0, 0, 40), r);
      chk(r.data == sp[2], "LIF 2-bit spikes");
    end

    // max pooling of two entries
    cmd(mk(OP_POOL, 0, 0, 16, 2, 50), r);
    cmd(mk(OP_READ_GB, 0, 0, 50), r);
    chk(r.data == (gbm[16] | gbm[17]), "max pool");

    // attention: Q at 0..1, K at 2..3, V at 4..5, output at 60..61, bit 1
    begin
      int cnt [ROWS];
      logic [ROWS-1:0] mask, o;
      int ones;
      for (int d = 0; d < ROWS; d++) begin
        cnt[d] = 0;
        for (int m = 0; m < 2; m++) cnt[d] += int'(gbm[m][d*ACT_BITS+1] & gbm[2+m][d*ACT_BITS+1]);
        mask[d] = cnt[d] >= 2;
      end
      cmd(mk(OP_SDSA, 0, 0, 0, 2, 4, 60, 2 | (1 << 8), 2, 0), r);
      chk(!r.flags[0], "attention computed");
      ones = 0;
      for (int m = 0; m < 2; m++) begin
        pkt_t g;
        for (int d = 0; d < ROWS; d++) o[d] = gbm[4+m][d*ACT_BITS+1] & mask[d];
        ones += $countones(o);
        cmd(mk(OP_READ_GB, 0, 0, 60 + m), g);
        for (int d = 0; d < ROWS; d++) chk(g.data[d*ACT_BITS+1] == o[d], "attention output");
      end
      chk(int'(r.arg0) == ones, "attention ones");
    end
    cmd(mk(OP_SKIP_CFG, 0, 0, 8'h04, 0, 0, 0, 0, 0, 1), r);
    chk(r.a2 == 8'h04, "skip bits set");
    cmd(mk(OP_SDSA, 0, 0, 0, 2, 4, 60, 2, 2, 2), r);
    chk(r.flags[0], "layer 2 skipped");
    cmd(mk(OP_SDSA, 0, 0, 0, 2, 4, 60, 2, 2, 1), r);
    chk(!r.flags[0], "layer 1 not skipped");

    // logits and early exit: beta = 0 always confident
    cmd(mk(OP_EE_CFG, 0, 0, 10, 4, 0, 0, 0), r);
    x = rnd_entry(1);
    cmd(mk(OP_PUSH_ACT, 0, 1, 0, 0, 0, 0, 0, 0, 0, x), r);
    cmd(mk(OP_RUN, 0, 1, 0, 0, 0, 0, 0, 0, (int'(RUN_LOGIT) << 2) | int'(PREC_1)), r);
    begin
      int best; longint mx;
      for (int c = 0; c < COLS; c++) begin
        lanes[c] = 0;
        for (int b = 0; b < 4; b++) begin
          for (int s = 0; s < NUM_SUB; s++) lanes[c] += colsum(s, x, b, c);
          if (lanes[c] > 65535) lanes[c] = 65535;
        end
      end
      mx = -1; best = 0;
      for (int c = 0; c < 10; c++) if (lanes[c] > mx) begin mx = lanes[c]; best = c; end
      chk(r.arg0[1:0] == 2'b11 && int'(r.a2) == best && r.a3 == 8'd1, "logit exit");
    end

    // refusals
    for (int i = 0; i < 5; i++) begin
      cmd(mk(OP_PUSH_ACT, 3, 0, 0, 0, 0, 0, 0, 0, 0, x), r);
      chk(r.flags[1] == (i == 4), "push refused only when full");
    end
    cmd(mk(OP_GB_TO_FIFO, 3, 0, 0), r);
    chk(r.flags[1], "transfer refused when full");
    cmd(mk(OP_RUN, 1, 0, 0, 0, 0, 0, 10, 0, 0), r);
    chk(r.flags[1], "run refused when empty");
    cmd(mk(OP_NOP), r);
    chk(rq.size() == 0, "one response per command");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
