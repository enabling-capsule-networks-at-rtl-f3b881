// squash -- approximate squash activation for capsule vectors.
//
// Computes y = ||x||^2/(1+||x||^2) * x/||x|| = c(||x||) * x for vectors of 4,
// 8, 16 or 32 components, with c(n) = n/(1+n^2) approximated piecewise
// (squash-exp or squash-pow2, parameter VARIANT). Two units, as published:
// the norm unit (squares, accumulator, two-range square-root table) and the
// squashing unit (coefficient and output multiplier), both fed with x.
//
// Operation: `start` with `size` opens a vector. The host streams the
// components once for the norm pass (PASS_ACC) and once more for the output
// pass (PASS_OUT), one per clock when in_valid is high and in_ready is set.
// Between the passes one clock (in_ready low) latches the norm into a
// register, so the output path is register -> coefficient -> multiplier.
// Outputs are registered: out_valid follows the accepted input by one clock,
// `done` pulses with the last output. A vector of n components takes 2n
// accepted inputs plus two clocks. The re-streaming handshake, the norm
// register and all widths are this design's choices.
module squash
  import capsnet_nl_pkg::*;
#(
  parameter squash_variant_e VARIANT = SQUASH_EXP
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  sq_size_e            size,
  input  logic                in_valid,
  input  logic [SQ_IN_W-1:0]  x,
  output logic                in_ready,
  output pass_e               pass,
  output logic                out_valid,
  output logic [SQ_OUT_W-1:0] y,
  output logic [NORM_W-1:0]   norm,      // norm of the current vector (valid in PASS_OUT)
  output logic                done
);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_NORM, S_OUT} state_e;
  localparam int unsigned CW = $clog2(SQ_MAX_N + 1);

  state_e               state;
  logic [CW-1:0]        cnt_q, len_q;
  logic                 last, acc_en, clear;
  logic [SQ_S_W-1:0]    s;
  logic [NORM_W-1:0]    norm_lut;
  logic [COEF_W-1:0]    coef;
  logic [SQ_OUT_W-1:0]  y_comb;

  assign in_ready = (state == S_ACC) || (state == S_OUT);
  assign last     = (cnt_q == len_q - CW'(1));
  assign clear    = start;
  assign acc_en   = (state == S_ACC) && in_valid && !start;

  always_comb begin
    unique case (state)
      S_ACC, S_NORM: pass = PASS_ACC;
      S_OUT:         pass = PASS_OUT;
      default:       pass = PASS_IDLE;
    endcase
  end

  squash_norm_unit u_norm (
    .clk, .rst_n, .clear, .acc_en, .x, .s, .norm(norm_lut)
  );

  squashing_unit #(.VARIANT(VARIANT)) u_squashing (
    .norm(norm), .x(x), .coef(coef), .y(y_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt_q     <= '0;
      len_q     <= CW'(4);
      norm      <= '0;
      out_valid <= 1'b0;
      y         <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        state <= S_ACC;
        cnt_q <= '0;
        len_q <= CW'(sq_len(size));
      end else begin
        unique case (state)
          S_ACC: if (in_valid) begin
            cnt_q <= last ? '0 : cnt_q + CW'(1);
            if (last) state <= S_NORM;
          end
          S_NORM: begin
            norm  <= norm_lut;
            state <= S_OUT;
          end
          S_OUT: if (in_valid) begin
            cnt_q     <= last ? '0 : cnt_q + CW'(1);
            y         <= y_comb;
            out_valid <= 1'b1;
            if (last) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_no_input_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !start) |-> in_ready);
endmodule
