// fp64_div: iterative IEEE-754 double precision divider (FDIV).
//
// y = a / b, rounded to nearest (ties to even), subnormals flushed to zero.
// A radix-2 restoring divider: after 'start' it produces one quotient bit per
// clock, 54 bits (53 significand bits and a guard bit) with the non-zero
// remainder as sticky bit, then rounds. 'done' pulses for one cycle 56 clocks
// after 'start', with 'y' valid from then until the next 'start'; 'busy' is high
// in between. A 'start' while busy is ignored.
//
// The paper names FDIV as part of the Floating Point Arithmetic Unit and uses
// it for the reciprocals 1/p of Givens generation, but does not give its insides;
// the algorithm and its latency are this design's choice. Special cases: x/0
// gives Inf (0/0 NaN), 0/x gives 0, NaN or Inf/Inf gives NaN.
module fp64_div
  import ggr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  input  fp64_t b,
  output logic  busy,
  output logic  done,
  output fp64_t y
);
  localparam int QBITS = 54;

  logic [54:0] rem_q;
  logic [52:0] div_q;
  logic [53:0] quo_q;
  logic [5:0]  cnt_q;
  logic        sgn_q;
  logic signed [13:0] ex_q;
  logic        special_q;
  fp64_t       special_val_q;

  // operand decode for start
  logic        sa, sb;
  logic [10:0] ea, eb;
  logic [52:0] ma, mb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  always_comb begin
    sa = a[63]; sb = b[63];
    ea = a[62:52]; eb = b[62:52];
    ma = {1'b1, a[51:0]}; mb = {1'b1, b[51:0]};
    a_zero = (ea == 11'd0); b_zero = (eb == 11'd0);
    a_inf  = (ea == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (eb == 11'h7FF) && (b[51:0] == '0);
    a_nan  = (ea == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (eb == 11'h7FF) && (b[51:0] != '0);
  end

  // one restoring step
  logic [54:0] rem_sub;
  logic        qbit;
  always_comb begin
    qbit    = (rem_q >= {2'b00, div_q});
    rem_sub = qbit ? (rem_q - {2'b00, div_q}) : rem_q;
  end

  // rounding of the finished quotient
  logic        inc;
  logic [53:0] mant_r;
  logic signed [13:0] ex_r;
  fp64_t       y_d;
  always_comb begin
    inc    = quo_q[0] & ((rem_q != '0) | quo_q[1]);
    mant_r = {1'b0, quo_q[53:1]} + {53'd0, inc};
    ex_r   = ex_q;
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      ex_r   = ex_r + 14'sd1;
    end
    if (special_q)            y_d = special_val_q;
    else if (ex_r >= 14'sd2047) y_d = {sgn_q, 11'h7FF, 52'd0};
    else if (ex_r <= 14'sd0)  y_d = {sgn_q, 63'd0};
    else                      y_d = {sgn_q, ex_r[10:0], mant_r[51:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= FP64_ZERO;
      rem_q <= '0; div_q <= '0; quo_q <= '0; cnt_q <= '0;
      sgn_q <= 1'b0; ex_q <= '0; special_q <= 1'b0; special_val_q <= FP64_ZERO;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        sgn_q <= sa ^ sb;
        div_q <= mb;
        quo_q <= '0;
        cnt_q <= 6'(QBITS);
        special_q <= 1'b1;
        if (a_nan || b_nan || (a_inf && b_inf) || (a_zero && b_zero))
          special_val_q <= FP64_QNAN;
        else if (a_inf || b_zero)
          special_val_q <= {sa ^ sb, 11'h7FF, 52'd0};
        else if (a_zero || b_inf)
          special_val_q <= {sa ^ sb, 63'd0};
        else
          special_q <= 1'b0;
        if (ma >= mb) begin
          rem_q <= {2'b00, ma};
          ex_q  <= $signed({3'b000, ea}) - $signed({3'b000, eb}) + 14'sd1023;
        end else begin
          rem_q <= {1'b0, ma, 1'b0};
          ex_q  <= $signed({3'b000, ea}) - $signed({3'b000, eb}) + 14'sd1022;
        end
      end else if (busy) begin
        if (cnt_q != 6'd0) begin
          quo_q <= {quo_q[52:0], qbit};
          rem_q <= {rem_sub[53:0], 1'b0};
          cnt_q <= cnt_q - 6'd1;
        end else begin
          y    <= y_d;
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
