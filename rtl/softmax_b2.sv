// softmax_b2 -- approximate softmax computed with powers of two.
//
// The unit evaluates the softmax-like function
//     y_i = 2^x_i / sum_j 2^x_j
// in the base-2 log domain, so the division becomes a subtraction:
//     y_i = pow2( (x_i - m) - log2( sum_j 2^(x_j - m) ) ),   m = max_j x_j.
// Replacing e^x by 2^x removes both constant multipliers (log2 e before the
// exponential, ln 2 after the logarithm) of the natural-log formulation.
//
// Datapath: a maximum register, a subtractor that scales the inputs by the
// maximum, a mux that chooses either the scaled input or the scaled input
// minus the logarithm of the sum, the power-of-two unit pow2u, the
// exponential-sum register with its adder, and the logarithm unit log2u that
// reads the sum register.
//
// Operation (three passes over the same vector, streamed by the host, one
// element per clock when in_valid is high; `pass` tells which pass is active):
//   PASS_MAX  find m;
//   PASS_ACC  sum += pow2(x_i - m);        (the term for x_i = m is exactly 1,
//                                            so the sum is in [1, n])
//   PASS_OUT  y_i = pow2(x_i - m - log2u(sum)), registered: out_valid follows
//             the accepted input by one clock; `done` pulses with the last y.
// A vector of n elements therefore takes 3n accepted inputs plus one clock.
// `start` (with `size`: 10, 32 or 128 elements) begins a vector from any state.
// The max pass, the re-streaming handshake, the output register and all word
// widths are this design's choices; the mux/pow2/sum/log2 loop follows the
// published architecture.
module softmax_b2
  import capsnet_nl_pkg::*;
#(
  parameter int unsigned IN_W    = SM_IN_W,
  parameter int unsigned IN_FRAC = SM_IN_FRAC,
  parameter int unsigned E_FRAC  = SM_E_FRAC,
  parameter int unsigned SUM_W   = SM_SUM_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  sm_size_e          size,
  input  logic              in_valid,
  input  logic [IN_W-1:0]   x,          // signed, IN_FRAC fraction bits
  output logic              in_ready,
  output pass_e             pass,
  output logic              out_valid,
  output logic [E_FRAC:0]   y,          // unsigned, E_FRAC fraction bits, <= 1.0
  output logic              done
);
  localparam int unsigned LW = 9;        // log2 of the sum: up to 7.x, signed
  localparam int unsigned AW = IN_W + 2; // argument of pow2u
  localparam int unsigned CW = $clog2(SM_MAX_N + 1);

  logic signed [IN_W-1:0] max_q;
  logic        [SUM_W-1:0] sum_q;
  logic        [CW-1:0]    cnt_q, len_q;
  logic signed [IN_W:0]   d;             // x - m  (<= 0)
  logic signed [LW-1:0]   log2_sum;
  logic                   sum_zero;
  logic signed [AW-1:0]   arg;           // mux output
  logic        [E_FRAC:0] term;
  logic                   last;

  // scale by the maximum, then choose the pow2 argument
  always_comb begin
    d    = (IN_W+1)'($signed(x)) - (IN_W+1)'(max_q);
    arg  = (pass == PASS_OUT) ? AW'(d) - AW'(log2_sum) : AW'(d);
    last = (cnt_q == len_q - CW'(1));
  end

  pow2u #(.IN_W(AW), .IN_FRAC(IN_FRAC), .OUT_FRAC(E_FRAC)) u_pow2u (.a(arg), .y(term));

  log2u #(.IN_W(SUM_W), .IN_FRAC(E_FRAC), .OUT_W(LW), .OUT_FRAC(IN_FRAC))
    u_log2u (.f(sum_q), .y(log2_sum), .zero(sum_zero));

  assign in_ready = (pass != PASS_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass      <= PASS_IDLE;
      max_q     <= '0;
      sum_q     <= '0;
      cnt_q     <= '0;
      len_q     <= CW'(10);
      out_valid <= 1'b0;
      y         <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        pass  <= PASS_MAX;
        max_q <= {1'b1, {(IN_W-1){1'b0}}};     // most negative value
        sum_q <= '0;
        cnt_q <= '0;
        len_q <= CW'(sm_len(size));
      end else if (in_valid && in_ready) begin
        cnt_q <= last ? '0 : cnt_q + CW'(1);
        unique case (pass)
          PASS_MAX: begin
            if ($signed(x) > max_q) max_q <= $signed(x);
            if (last) pass <= PASS_ACC;
          end
          PASS_ACC: begin
            sum_q <= sum_q + SUM_W'(term);
            if (last) pass <= PASS_OUT;
          end
          PASS_OUT: begin
            y         <= term;
            out_valid <= 1'b1;
            if (last) begin
              pass <= PASS_IDLE;
              done <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // The host may only stream while the unit is in a pass.
  a_no_input_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !start) |-> in_ready);
  // The exponential sum always holds the term of the maximum, so log2 is defined.
  a_sum_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (pass == PASS_OUT) |-> !sum_zero);
endmodule
