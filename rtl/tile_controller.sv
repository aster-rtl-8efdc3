// tile_controller: command sequencer of one tile.
//
// Takes one command packet at a time from the tile's router, carries it out
// on the subarrays and the tile units, and answers every command with one
// response packet to the host (dest = HOST_ID, op = OP_RESP, a0 = the
// command's opcode, a1 = this tile's id). Commands and their fields:
//   OP_WRITE_ROW  sub, a0 = row, data[COLS-1:0] = cells       program a row
//   OP_PUSH_ACT   sub/all, data = activation entry
//   OP_GB_TO_FIFO sub/all, a0 = buffer address                 buffer -> FIFO
//                 Both are refused (response flags[1] = 1, nothing pushed)
//                 when a selected FIFO is full.
//   OP_CLR_MEM    sub/all, a0 = slot                           clear membranes
//   OP_RUN        sub/all, a0 = slot, a1 = buffer address, arg0 = vth,
//                 flags[1:0] = precision, flags[3:2] = mode, flags[4] =
//                 loopback, flags[5] = write the spike entry of subarray s to
//                 buffer address a1 + s*a2. Refused (flags[1]) when a
//                 selected FIFO is empty. Mode RUN_PSUM/RUN_LOGIT clears the
//                 global accumulator first; RUN_LOGIT then hands the result
//                 to the early-exit unit and answers arg0[0] = exit,
//                 arg0[1] = confident, a2 = predicted class, a3 = timesteps.
//   OP_WRITE_GB   a0 = address, data;  OP_READ_GB a0 -> response data
//   OP_READ_GA    a0 = chunk -> lanes [32*a0, 32*a0+31] of the accumulator
//   OP_POOL       a0 = first source, a1 = count, a2 = destination
//   OP_SDSA       a0/a1/a2 = Q/K/V base, a3 = output base, arg0[7:0] = tokens,
//                 arg0[9:8] = timestep bit, arg1 = threshold, flags[2:0] =
//                 layer, flags[3] = report activity to the skip unit. A layer
//                 marked for skipping is not computed (identity; response
//                 flags[0] = 1); otherwise arg0 of the response = output ones.
//   OP_SKIP_CFG   flags[0] set skip bits = a0, flags[1] clear profile,
//                 flags[2] decide with tau = arg0; response a2 = skip bits
//   OP_EE_CFG     arg0 = beta, a0 = classes, a1 = maximum timesteps; starts
//                 a new sample
// The command set and packet layout are this implementation's own; the
// operations they trigger are the design's. Some response bits are constant
// by construction (destination = host, opcode = response, unused flags).
module tile_controller
  import aster_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [TILE_ID_W-1:0]          my_id,
  // command in / response out
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  pkt_t                          cmd_pkt,
  output logic                          rsp_valid,
  input  logic                          rsp_ready,
  output pkt_t                          rsp_pkt,
  // sub-array decoder
  output logic                          sad_en,
  output logic                          sad_all,
  output logic [$clog2(NUM_SUB)-1:0]    sad_addr,
  // subarray strobes (the tile gates them with the subarray selects)
  output logic                          wr_en,
  output logic [$clog2(ROWS)-1:0]       wr_row,
  output logic [COLS-1:0]               wr_data,
  output logic                          push,
  output logic [ENTRY_W-1:0]            push_data,
  output logic                          start,
  output prec_e                         prec,
  output logic                          lif_en,
  output logic                          loopback,
  output logic [$clog2(SLOTS)-1:0]      slot,
  output logic [MEM_W-1:0]              vth,
  output logic                          clr_mem,
  input  logic [NUM_SUB-1:0]            ss,
  input  logic [NUM_SUB-1:0]            sub_full,
  input  logic [NUM_SUB-1:0]            sub_empty,
  input  logic [NUM_SUB-1:0]            sub_done,
  input  logic [NUM_SUB-1:0]            sub_entry_valid,
  input  logic [NUM_SUB-1:0][ENTRY_W-1:0] sub_entry,
  // global accumulator
  output logic                          ga_clear,
  output logic [NUM_SUB-1:0]            ga_sel,
  input  logic [COLS-1:0][GA_W-1:0]     ga_acc,
  // global buffer
  output logic                          gb_en,
  output logic                          gb_we,
  output logic [$clog2(GB_DEPTH)-1:0]   gb_addr,
  output logic [ENTRY_W-1:0]            gb_wdata,
  output logic [ENTRY_W-1:0]            gb_wmask,
  input  logic [ENTRY_W-1:0]            gb_rdata,
  // max pooling
  output logic                          mp_start,
  output logic                          mp_valid,
  input  logic [ENTRY_W-1:0]            mp_res,
  // spike-driven self-attention
  output logic                          sd_clr,
  output logic                          sd_qk_valid,
  output logic [ROWS-1:0]               sd_q,
  output logic [ROWS-1:0]               sd_k,
  output logic [7:0]                    sd_vth,
  output logic                          sd_v_valid,
  output logic [ROWS-1:0]               sd_v,
  input  logic                          sd_out_valid,
  input  logic [ROWS-1:0]               sd_out,
  input  logic [$clog2(ROWS+1)-1:0]     sd_out_ones,
  // layer skipping
  output logic                          sk_prof_clr,
  output logic                          sk_obs_valid,
  output logic [$clog2(LAYERS)-1:0]     sk_obs_layer,
  output logic                          sk_decide,
  output logic [15:0]                   sk_tau,
  output logic                          sk_set,
  output logic [LAYERS-1:0]             sk_set_mask,
  input  logic [LAYERS-1:0]             skip,
  // early exit
  output logic                          ee_clr,
  output logic [15:0]                   ee_beta,
  output logic [7:0]                    ee_classes,
  output logic [7:0]                    ee_tmax,
  output logic                          ee_logit_valid,
  input  logic                          ee_done,
  input  logic                          ee_exit,
  input  logic                          ee_confident,
  input  logic [7:0]                    ee_pred,
  input  logic [7:0]                    ee_t
);
  typedef enum logic [4:0] {
    C_IDLE, C_EXEC, C_G2F, C_RUN_WAIT, C_RUN_WR, C_EE, C_EE_WAIT, C_RD_WAIT,
    C_POOL_RD, C_POOL_ACC, C_POOL_FIN, C_POOL_WR,
    C_SQ, C_SK, C_SQK, C_SV, C_SVV, C_SVW, C_RESP
  } cstate_e;

  cstate_e state;
  pkt_t    cmd;
  pkt_t    rsp;
  logic [7:0] n;
  logic [15:0] ones_acc;
  logic [ROWS-1:0] q_reg;
  logic [NUM_SUB-1:0] run_sel;
  logic [ENTRY_W-1:0] ent_q [NUM_SUB];
  logic [$clog2(NUM_SUB)-1:0] wi;
  run_mode_e mode;

  // Bit-plane helpers: one spike vector <-> bit `p` of every row group.
  function automatic logic [ROWS-1:0] plane_of(logic [ENTRY_W-1:0] e, logic [1:0] p);
    logic [ROWS-1:0] v;
    for (int r = 0; r < ROWS; r++) v[r] = e[r*ACT_BITS + int'(p)];
    return v;
  endfunction
  function automatic logic [ENTRY_W-1:0] spread(logic [ROWS-1:0] v, logic [1:0] p);
    logic [ENTRY_W-1:0] e;
    e = '0;
    for (int r = 0; r < ROWS; r++) e[r*ACT_BITS + int'(p)] = v[r];
    return e;
  endfunction

  assign mode      = run_mode_e'(cmd.flags[3:2]);
  assign cmd_ready = (state == C_IDLE);
  assign sad_en    = (state != C_IDLE);
  assign sad_all   = cmd.all;
  assign sad_addr  = cmd.sub;
  assign wr_row    = cmd.a0[$clog2(ROWS)-1:0];
  assign wr_data   = cmd.data[COLS-1:0];
  assign prec      = prec_e'(cmd.flags[1:0]);
  assign lif_en    = (mode == RUN_LIF);
  assign loopback  = cmd.flags[4];
  assign slot      = cmd.a0[$clog2(SLOTS)-1:0];
  assign vth       = cmd.arg0[MEM_W-1:0];
  assign push_data = (state == C_G2F) ? gb_rdata : cmd.data;
  assign sd_vth    = cmd.arg1[7:0];
  assign sk_obs_layer = cmd.flags[$clog2(LAYERS)-1:0];
  assign sk_tau    = cmd.arg0;
  assign sk_set_mask = cmd.a0[LAYERS-1:0];
  assign ga_sel    = run_sel;
  assign rsp_valid = (state == C_RESP);
  assign rsp_pkt   = rsp;

  // Strobes, decoded from the state and the command.
  always_comb begin
    wr_en = 1'b0; push = 1'b0; start = 1'b0; clr_mem = 1'b0; ga_clear = 1'b0;
    gb_en = 1'b0; gb_we = 1'b0; gb_addr = '0; gb_wdata = '0; gb_wmask = '1;
    mp_start = 1'b0; mp_valid = 1'b0;
    sd_clr = 1'b0; sd_qk_valid = 1'b0; sd_q = q_reg; sd_k = '0; sd_v_valid = 1'b0; sd_v = '0;
    sk_prof_clr = 1'b0; sk_obs_valid = 1'b0; sk_decide = 1'b0; sk_set = 1'b0;
    ee_clr = 1'b0; ee_logit_valid = 1'b0;
    case (state)
      C_EXEC: begin
        case (cmd.op)
          OP_WRITE_ROW: wr_en = 1'b1;
          OP_PUSH_ACT:  push = !(|(ss & sub_full));
          OP_GB_TO_FIFO: begin gb_en = 1'b1; gb_addr = cmd.a0; end
          OP_CLR_MEM:   clr_mem = 1'b1;
          OP_RUN: begin
            start    = !(|(ss & sub_empty));
            ga_clear = (mode != RUN_LIF) && start;
          end
          OP_WRITE_GB: begin gb_en = 1'b1; gb_we = 1'b1; gb_addr = cmd.a0; gb_wdata = cmd.data; end
          OP_READ_GB:  begin gb_en = 1'b1; gb_addr = cmd.a0; end
          OP_POOL:     mp_start = 1'b1;
          OP_SDSA:     sd_clr = 1'b1;
          OP_SKIP_CFG: begin
            sk_set      = cmd.flags[0];
            sk_prof_clr = cmd.flags[1];
            sk_decide   = cmd.flags[2];
          end
          OP_EE_CFG:   ee_clr = 1'b1;
          default: ;
        endcase
      end
      C_G2F:     push = !(|(ss & sub_full));
      C_RUN_WR: begin
        gb_en = ss[wi]; gb_we = ss[wi];
        gb_addr = cmd.a1 + 8'(wi) * cmd.a2;
        gb_wdata = ent_q[wi];
      end
      C_EE:      ee_logit_valid = 1'b1;
      C_POOL_RD: begin gb_en = 1'b1; gb_addr = cmd.a0 + n; end
      C_POOL_ACC: mp_valid = 1'b1;
      C_POOL_WR: begin gb_en = 1'b1; gb_we = 1'b1; gb_addr = cmd.a2; gb_wdata = mp_res; end
      C_SQ:      begin gb_en = 1'b1; gb_addr = cmd.a0 + n; end
      C_SK:      begin gb_en = 1'b1; gb_addr = cmd.a1 + n; end
      C_SQK:     begin sd_qk_valid = 1'b1; sd_k = plane_of(gb_rdata, cmd.arg0[9:8]); end
      C_SV:      begin gb_en = 1'b1; gb_addr = cmd.a2 + n; end
      C_SVV:     begin sd_v_valid = 1'b1; sd_v = plane_of(gb_rdata, cmd.arg0[9:8]); end
      C_SVW: begin
        gb_en = 1'b1; gb_we = 1'b1; gb_addr = cmd.a3 + n;
        gb_wdata = spread(sd_out, cmd.arg0[9:8]);
        gb_wmask = spread('1, cmd.arg0[9:8]);
        sk_obs_valid = cmd.flags[3];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      cmd        <= '0;
      rsp        <= '0;
      n          <= '0;
      ones_acc   <= '0;
      q_reg      <= '0;
      run_sel    <= '0;
      wi         <= '0;
      ee_beta    <= '0;
      ee_classes <= 8'd1;
      ee_tmax    <= 8'd1;
      for (int s = 0; s < NUM_SUB; s++) ent_q[s] <= '0;
    end else begin
      for (int s = 0; s < NUM_SUB; s++)
        if (sub_entry_valid[s]) ent_q[s] <= sub_entry[s];
      case (state)
        C_IDLE: if (cmd_valid) begin
          cmd   <= cmd_pkt;
          rsp   <= '0;
          state <= C_EXEC;
        end
        C_EXEC: begin
          rsp.dest <= HOST_ID;
          rsp.op   <= OP_RESP;
          rsp.a0   <= 8'(cmd.op);
          rsp.a1   <= 8'(my_id);
          n        <= '0;
          ones_acc <= '0;
          case (cmd.op)
            OP_PUSH_ACT: begin
              rsp.flags <= {6'd0, |(ss & sub_full), 1'b0};
              state     <= C_RESP;
            end
            OP_GB_TO_FIFO: state <= C_G2F;
            OP_RUN: begin
              if (|(ss & sub_empty)) begin
                rsp.flags <= 8'h02;     // nothing to process: refused
                state     <= C_RESP;
              end else begin
                run_sel <= (mode == RUN_LIF) ? '0 : ss;
                state   <= C_RUN_WAIT;
              end
            end
            OP_READ_GB:  state <= C_RD_WAIT;
            OP_READ_GA: begin
              for (int l = 0; l < 32; l++)
                rsp.data[l*GA_W +: GA_W] <= ga_acc[{cmd.a0[1:0], 5'(l)}];
              state <= C_RESP;
            end
            OP_POOL:     state <= (cmd.a1 == 0) ? C_POOL_FIN : C_POOL_RD;
            OP_SDSA: begin
              if (skip[cmd.flags[$clog2(LAYERS)-1:0]]) begin
                rsp.flags <= 8'h01;
                state     <= C_RESP;
              end else state <= C_SQ;
            end
            OP_SKIP_CFG: state <= C_RD_WAIT;
            OP_EE_CFG: begin
              ee_beta    <= cmd.arg0;
              ee_classes <= cmd.a0;
              ee_tmax    <= cmd.a1;
              state      <= C_RESP;
            end
            default: state <= C_RESP;
          endcase
        end
        C_G2F: begin
          rsp.flags <= {6'd0, |(ss & sub_full), 1'b0};
          state     <= C_RESP;
        end
        C_RUN_WAIT: if (|(sub_done & ss)) begin
          wi <= '0;
          if (mode == RUN_LIF && cmd.flags[5]) state <= C_RUN_WR;
          else if (mode == RUN_LOGIT)          state <= C_EE;
          else                                 state <= C_RESP;
        end
        C_RUN_WR: begin
          // Walk over all subarrays; only selected ones are written.
          if (wi == ($clog2(NUM_SUB))'(NUM_SUB - 1)) state <= C_RESP;
          else wi <= wi + 1'b1;
        end
        C_EE: state <= C_EE_WAIT;
        C_EE_WAIT: if (ee_done) begin
          rsp.arg0 <= {14'd0, ee_confident, ee_exit};
          rsp.a2   <= ee_pred;
          rsp.a3   <= ee_t;
          state    <= C_RESP;
        end
        C_RD_WAIT: begin
          // Read data (OP_READ_GB) or the skip bits after their update.
          if (cmd.op == OP_READ_GB) rsp.data <= gb_rdata;
          else                      rsp.a2   <= 8'(skip);
          state    <= C_RESP;
        end
        C_POOL_RD:  state <= C_POOL_ACC;
        C_POOL_ACC: begin
          n     <= n + 1'b1;
          state <= (n + 1'b1 == cmd.a1) ? C_POOL_FIN : C_POOL_RD;
        end
        C_POOL_FIN: state <= C_POOL_WR;
        C_POOL_WR:  state <= C_RESP;
        C_SQ:  state <= C_SK;
        C_SK: begin
          q_reg <= plane_of(gb_rdata, cmd.arg0[9:8]);
          state <= C_SQK;
        end
        C_SQK: begin
          if (n + 1'b1 == cmd.arg0[7:0]) begin
            n     <= '0;
            state <= C_SV;
          end else begin
            n     <= n + 1'b1;
            state <= C_SQ;
          end
        end
        C_SV:  state <= C_SVV;
        C_SVV: state <= C_SVW;
        C_SVW: begin
          ones_acc <= ones_acc + 16'(sd_out_ones);
          if (n + 1'b1 == cmd.arg0[7:0]) begin
            rsp.arg0 <= ones_acc + 16'(sd_out_ones);
            state    <= C_RESP;
          end else begin
            n     <= n + 1'b1;
            state <= C_SV;
          end
        end
        C_RESP: begin
          if (rsp_ready) state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // The attention output is registered: one cycle after each V token.
  assert property (@(posedge clk) disable iff (!rst_n) sd_v_valid |=> sd_out_valid);
endmodule
