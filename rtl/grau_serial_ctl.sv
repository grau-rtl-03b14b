// grau_serial_ctl: controller ("SU Ctl" and threshold counter) of the
// serialized GRAU.
//
// The serialized unit owns one comparator and one shifter unit and reuses
// them over several cycles per item. This state machine sequences that reuse:
//   IDLE   : in_ready; accept an item and latch the current precision
//   THRESH : one breakpoint comparison per cycle (thr_sel = 0 .. SEGMENTS-2);
//            1-bit items stop after 1 and 2-bit items after 3 comparisons
//   BYP    : 1/2-bit result (the breakpoint count) is presented for one cycle
//   LOAD   : read the settings buffer at the count, pre-shift the input
//   SHIFT  : EXPONENTS cycles, one shifter-unit step per setting bit
//   FIN    : hand the product to the sign/bias/clamp stage
// The paper names the SU Ctl and counter blocks but not their behaviour; the
// states, the per-cycle sequencing and the early stop for 1/2-bit outputs are
// this design's. Cycle counts: 1-bit result 2 cycles after acceptance,
// 2-bit after 4, 4/8-bit after SEGMENTS+EXPONENTS+3 (the output stage adds 2).
module grau_serial_ctl
  import grau_pkg::*;
#(
  parameter int SEGMENTS  = 6,
  parameter int EXPONENTS = 16,
  localparam int NT       = SEGMENTS - 1,
  localparam int MAXC     = (NT > EXPONENTS) ? NT : EXPONENTS,
  localparam int KW       = $clog2(MAXC) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  prec_e         prec,
  output logic          in_ready,
  output logic          accept,
  output logic          cmp_en,
  output logic [KW-1:0] thr_sel,
  output logic          load,
  output logic          shift_en,
  output logic          fin,
  output logic          byp_out,
  output prec_e         item_prec,
  output logic          busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_THRESH, S_BYP, S_LOAD, S_SHIFT, S_FIN
  } state_e;

  state_e        state;
  logic [KW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      item_prec <= PREC_8;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          state     <= S_THRESH;
          cnt       <= '0;
          item_prec <= prec;
        end
        S_THRESH: begin
          if ((item_prec == PREC_1 && cnt == KW'(0)) ||
              (item_prec == PREC_2 && cnt == KW'(2))) begin
            state <= S_BYP;
          end else if (cnt == KW'(NT - 1)) begin
            state <= S_LOAD;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_BYP:  state <= S_IDLE;
        S_LOAD: begin
          state <= S_SHIFT;
          cnt   <= '0;
        end
        S_SHIFT: begin
          if (cnt == KW'(EXPONENTS - 1)) state <= S_FIN;
          else                           cnt   <= cnt + 1'b1;
        end
        S_FIN:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    in_ready = (state == S_IDLE);
    accept   = in_ready && in_valid;
    cmp_en   = (state == S_THRESH);
    thr_sel  = cnt;
    load     = (state == S_LOAD);
    shift_en = (state == S_SHIFT);
    fin      = (state == S_FIN);
    byp_out  = (state == S_BYP);
    busy     = (state != S_IDLE);
  end

endmodule
