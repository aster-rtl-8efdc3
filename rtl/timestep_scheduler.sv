// timestep_scheduler: sequences one activation entry through a subarray.
//
// An entry holds ACT_BITS bit-planes. With programmable precision N (1, 2 or
// 4 bits) it holds ACT_BITS/N timesteps; bit-plane b belongs to timestep b/N
// and carries weight 2^(b mod N). For each bit-plane the scheduler
//   LOAD : copies the bit-plane into the mask registers,
//   READ : fires the gated wordlines for ADC_SHARE cycles while the column
//          multiplexer steps through its inputs and samples,
//   ACC  : presents the partial sums to the LIF block with shift = b mod N and
//          fire_en = (b mod N == N-1), i.e. the "count == N" test after which
//          the membrane is compared with the threshold.
// A bit-plane with no ones (plane_zero, sampled in LOAD) drives no wordline,
// so its READ is skipped: the scheduler goes straight to ACC with psum_zero
// set, and the partial sums of that plane count as zero. Latency therefore
// follows the number of non-empty bit-planes.
// After the last bit-plane it waits DRAIN cycles for the LIF pipeline, pops
// the entry and pulses done. One entry therefore takes
// (ADC_SHARE+2) per non-empty plane + 2 per empty plane + DRAIN + 1 cycles
// from start to done (43 when all four planes hold ones).
// The bit-serial precision scheme and latency that scales with the input's
// ones are the design's; the state sequence, the plane-level granularity of
// the skip and the cycle counts are this implementation's.
module timestep_scheduler
#(
  parameter int ACT_BITS  = aster_pkg::ACT_BITS,
  parameter int ADC_SHARE = aster_pkg::ADC_SHARE,
  parameter int DRAIN     = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          plane_zero,
  input  aster_pkg::prec_e                         prec,
  output logic                          busy,
  output logic                          mask_load,
  output logic [$clog2(ACT_BITS)-1:0]   plane,
  output logic                          fire,
  output logic                          sample,
  output logic [$clog2(ADC_SHARE)-1:0]  step,
  output logic                          acc_valid,
  output logic                          psum_zero,
  output logic [1:0]                    shift,
  output logic                          fire_en,
  output logic [1:0]                    tstep,
  output logic                          pop,
  output logic                          done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_READ, S_ACC, S_DRAIN, S_DONE} state_e;
  state_e state;
  aster_pkg::prec_e prec_q;
  logic [$clog2(ACT_BITS)-1:0]  b;
  logic [$clog2(ADC_SHARE)-1:0] s;
  logic [1:0] dcnt;
  logic       zq;
  logic [1:0] nbits_m1;

  always_comb begin
    case (prec_q)
      aster_pkg::PREC_1:  nbits_m1 = 2'd0;
      aster_pkg::PREC_2:  nbits_m1 = 2'd1;
      default: nbits_m1 = 2'd3;
    endcase
  end

  assign busy      = (state != S_IDLE);
  assign mask_load = (state == S_LOAD);
  assign plane     = b;
  assign fire      = (state == S_READ);
  assign sample    = (state == S_READ);
  assign step      = s;
  assign acc_valid = (state == S_ACC);
  assign psum_zero = zq;
  assign shift     = 2'(b) & nbits_m1;
  assign fire_en   = (shift == nbits_m1);
  always_comb begin
    case (prec_q)
      aster_pkg::PREC_1:  tstep = 2'(b);
      aster_pkg::PREC_2:  tstep = 2'(b >> 1);
      default: tstep = 2'd0;
    endcase
  end
  assign pop  = (state == S_DONE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      prec_q <= aster_pkg::PREC_1;
      b      <= '0;
      s      <= '0;
      dcnt   <= '0;
      zq     <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          prec_q <= prec;
          b      <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          s     <= '0;
          zq    <= plane_zero;
          state <= plane_zero ? S_ACC : S_READ;
        end
        S_READ: begin
          if (s == ($clog2(ADC_SHARE))'(ADC_SHARE - 1)) state <= S_ACC;
          else s <= s + 1'b1;
        end
        S_ACC: begin
          if (b == ($clog2(ACT_BITS))'(ACT_BITS - 1)) begin
            dcnt  <= '0;
            state <= S_DRAIN;
          end else begin
            b     <= b + 1'b1;
            state <= S_LOAD;
          end
        end
        S_DRAIN: begin
          if (dcnt == 2'(DRAIN - 1)) state <= S_DONE;
          else dcnt <= dcnt + 1'b1;
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end
endmodule
