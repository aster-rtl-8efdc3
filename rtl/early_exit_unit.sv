// early_exit_unit: classification-head time averaging and confidence-based
// early exit.
//
// Each logit_valid delivers the class logits of one timestep; they are added
// into per-class temporal accumulators and the timestep count t advances.
// The unit then scans the first num_classes classes twice, one class per
// cycle:
//   pass 1: the largest accumulated logit m and its class (the prediction);
//   pass 2: S = sum_j 2^-e_j with e_j = floor((m - sum_j) / t), i.e. the
//           softmax denominator of the time-averaged logits in base 2,
//           as a 16-bit fixed-point number (the winning class adds 1.0).
// The maximum softmax probability is 1/S, so the sample is confident when
// 1/S > beta, evaluated as 2^32 > beta * S with beta a 16-bit fraction.
// done pulses with exit = confident or t == t_max; exit tells the host to
// stop issuing timesteps for this sample. clr starts a new sample.
// Latency: 2*num_classes + 2 cycles from logit_valid to done.
// Accumulating logits over time and comparing the maximum softmax probability
// with the exit threshold follows the design; the base-2 exponential and the
// fixed-point formats are this implementation's choices.
module early_exit_unit #(
  parameter int CLASSES = aster_pkg::CLASSES,
  parameter int GA_W    = aster_pkg::GA_W,
  parameter int SW      = GA_W + 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic [15:0]                   beta,
  input  logic [7:0]                    num_classes,
  input  logic [7:0]                    t_max,
  input  logic                          logit_valid,
  input  logic [CLASSES-1:0][GA_W-1:0]  logits,
  output logic                          busy,
  output logic                          done,
  output logic                          exit_now,
  output logic                          confident,
  output logic [7:0]                    pred,
  output logic [7:0]                    tcount
);
  typedef enum logic [1:0] {E_IDLE, E_MAX, E_SUM, E_DONE} state_e;
  state_e state;

  logic [SW-1:0] sums [CLASSES];
  logic [SW-1:0] mx;
  logic [7:0]    j;
  logic [31:0]   s_acc;
  logic [SW-1:0] diff, e;
  logic [31:0]   term;

  assign busy = (state != E_IDLE);

  always_comb begin
    diff = mx - sums[j[$clog2(CLASSES)-1:0]];
    e    = diff / SW'(tcount);
    term = (e > SW'(16)) ? 32'd0 : (32'h1_0000 >> e);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= E_IDLE;
      tcount    <= '0;
      mx        <= '0;
      j         <= '0;
      s_acc     <= '0;
      pred      <= '0;
      done      <= 1'b0;
      exit_now  <= 1'b0;
      confident <= 1'b0;
      for (int c = 0; c < CLASSES; c++) sums[c] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        E_IDLE: begin
          if (clr) begin
            tcount <= '0;
            for (int c = 0; c < CLASSES; c++) sums[c] <= '0;
          end else if (logit_valid) begin
            for (int c = 0; c < CLASSES; c++) sums[c] <= sums[c] + SW'(logits[c]);
            tcount <= tcount + 1'b1;
            mx     <= '0;
            pred   <= '0;
            j      <= '0;
            state  <= E_MAX;
          end
        end
        E_MAX: begin
          if (sums[j[$clog2(CLASSES)-1:0]] > mx) begin
            mx   <= sums[j[$clog2(CLASSES)-1:0]];
            pred <= j;
          end
          if (j == num_classes - 1'b1) begin
            j     <= '0;
            s_acc <= '0;
            state <= E_SUM;
          end else j <= j + 1'b1;
        end
        E_SUM: begin
          s_acc <= s_acc + term;
          if (j == num_classes - 1'b1) state <= E_DONE;
          else j <= j + 1'b1;
        end
        default: begin   // E_DONE
          confident <= (64'd1 << 32) > (64'(beta) * 64'(s_acc));
          exit_now  <= ((64'd1 << 32) > (64'(beta) * 64'(s_acc))) || (tcount >= t_max);
          done      <= 1'b1;
          state     <= E_IDLE;
        end
      endcase
    end
  end
endmodule
