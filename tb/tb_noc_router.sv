// tb_noc_router: random upstream packets (some for this router, ID 2) and
// local responses with random back-pressure on both outputs. Every packet
// must arrive exactly once, at the right output, in order per source, and
// contention for the downstream port must occur and be resolved both ways.
module tb_noc_router;
  import aster_pkg::*;
  logic clk = 0, rst_n = 0;
  logic up_valid = 0, up_ready, li_valid = 0, li_ready, lo_valid, lo_ready, dn_valid, dn_ready;
  pkt_t up_pkt, li_pkt, lo_pkt, dn_pkt;
  int checks = 0, failures = 0, contention = 0;
  int up_sent = 0, li_sent = 0;
  logic [15:0] exp_lo[$], exp_dn_up[$], exp_dn_li[$];

  noc_router #(.ID(4'd2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sources
  always @(posedge clk) if (rst_n) begin
    if (up_valid && up_ready) begin
      if (up_pkt.dest == 4'd2) exp_lo.push_back(up_pkt.arg0);
      else exp_dn_up.push_back(up_pkt.arg0);
      up_sent++;
    end
    if (li_valid && li_ready) begin exp_dn_li.push_back(li_pkt.arg0); li_sent++; end
    if (up_valid && li_valid && up_pkt.dest != 4'd2 && (!dn_valid || dn_ready)) contention++;
    // sinks
    if (lo_valid && lo_ready) begin
      checks++;
      if (exp_lo.size() == 0 || lo_pkt.arg0 != exp_lo.pop_front()) begin failures++; $display("FAIL local"); end
    end
    if (dn_valid && dn_ready) begin
      checks++;
      if (dn_pkt.op == OP_RESP) begin
        if (exp_dn_li.size() == 0 || dn_pkt.arg0 != exp_dn_li.pop_front()) begin failures++; $display("FAIL dn li"); end
      end else begin
        if (exp_dn_up.size() == 0 || dn_pkt.arg0 != exp_dn_up.pop_front()) begin failures++; $display("FAIL dn up"); end
      end
    end
  end

  initial begin
    int seq = 0;
    up_pkt = '0; li_pkt = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      lo_ready = 1'($urandom); dn_ready = ($urandom % 4) != 0;
      if (!up_valid || up_ready_q) begin
        up_valid = ($urandom % 3) != 0;
        up_pkt.dest = ($urandom % 2) ? 4'd2 : 4'(5 + $urandom % 3);
        up_pkt.op = OP_RUN; up_pkt.arg0 = 16'(seq++);
      end
      if (!li_valid || li_ready_q) begin
        li_valid = 1'($urandom);
        li_pkt.dest = HOST_ID; li_pkt.op = OP_RESP; li_pkt.arg0 = 16'(seq++);
      end
    end
    @(negedge clk); up_valid = 0; li_valid = 0; lo_ready = 1; dn_ready = 1;
    repeat (10) @(negedge clk);
    checks++; if (exp_lo.size() + exp_dn_up.size() + exp_dn_li.size() != 0) begin failures++; $display("FAIL lost packets"); end
    checks++; if (contention == 0) begin failures++; $display("FAIL no contention"); end
    checks++; if (up_sent < 500 || li_sent < 300) begin failures++; $display("FAIL throughput %0d %0d", up_sent, li_sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshake results of the last clock edge, seen from the negedge driver
  logic up_ready_q, li_ready_q;
  always @(posedge clk) begin up_ready_q <= up_valid && up_ready; li_ready_q <= li_valid && li_ready; end
endmodule
