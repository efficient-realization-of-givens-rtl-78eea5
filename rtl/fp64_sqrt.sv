// fp64_sqrt: iterative IEEE-754 double precision square root (FSQRT).
//
// y = sqrt(a), rounded to nearest (ties to even), subnormals flushed to zero.
// Digit-by-digit (restoring) integer square root of the significand scaled by
// 2^54: one root bit per clock, 54 bits (53 significand bits and a guard bit),
// the non-zero remainder is the sticky bit. The exponent is halved after
// making it even. 'done' pulses one cycle 56 clocks after 'start'; 'y' stays
// valid until the next 'start'. A 'start' while busy is ignored.
//
// The paper names FSQRT in the Floating Point Arithmetic Unit and uses it for
// the norms p of Givens generation, but gives no insides; the algorithm and
// latency are this design's choice. sqrt(+-0) = +-0, sqrt(negative) = NaN,
// sqrt(+Inf) = +Inf.
module fp64_sqrt
  import ggr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  output logic  busy,
  output logic  done,
  output fp64_t y
);
  localparam int RBITS = 54;

  logic [107:0] rad_q;   // radicand bits still to be consumed, MSB first
  logic [57:0]  rem_q;
  logic [53:0]  root_q;
  logic [5:0]   cnt_q;
  logic [10:0]  ex_q;
  logic         special_q;
  fp64_t        special_val_q;

  logic [10:0] ea;
  logic        a_zero, a_inf, a_nan, a_neg;
  logic signed [12:0] eu;       // unbiased exponent
  logic [53:0] m;
  logic signed [12:0] eh;
  always_comb begin
    ea     = a[62:52];
    a_zero = (ea == 11'd0);
    a_inf  = (ea == 11'h7FF) && (a[51:0] == '0);
    a_nan  = (ea == 11'h7FF) && (a[51:0] != '0);
    a_neg  = a[63];
    eu     = $signed({2'b00, ea}) - 13'sd1023;
    if (eu[0]) begin
      m  = {a_zero ? 1'b0 : 1'b1, a[51:0], 1'b0};
      eh = (eu - 13'sd1) >>> 1;
    end else begin
      m  = {1'b0, 1'b1, a[51:0]};
      eh = eu >>> 1;
    end
  end

  logic [57:0] rem_n, trial;
  always_comb begin
    rem_n = {rem_q[55:0], rad_q[107:106]};
    trial = {2'b00, root_q, 2'b01};
  end

  logic        inc;
  logic [53:0] mant_r;
  logic [10:0] ex_r;
  always_comb begin
    inc    = root_q[0] & ((rem_q != '0) | root_q[1]);
    mant_r = {1'b0, root_q[53:1]} + {53'd0, inc};
    ex_r   = ex_q;
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      ex_r   = ex_r + 11'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= FP64_ZERO;
      rad_q <= '0; rem_q <= '0; root_q <= '0; cnt_q <= '0; ex_q <= '0;
      special_q <= 1'b0; special_val_q <= FP64_ZERO;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        rad_q  <= {m, 54'd0};
        rem_q  <= '0;
        root_q <= '0;
        cnt_q  <= 6'(RBITS);
        ex_q   <= 11'(eh + 13'sd1023);
        special_q <= 1'b1;
        if (a_nan || (a_neg && !a_zero)) special_val_q <= FP64_QNAN;
        else if (a_zero)                 special_val_q <= {a[63], 63'd0};
        else if (a_inf)                  special_val_q <= a;
        else                             special_q <= 1'b0;
      end else if (busy) begin
        if (cnt_q != 6'd0) begin
          rad_q <= {rad_q[105:0], 2'b00};
          if (rem_n >= trial) begin
            rem_q  <= rem_n - trial;
            root_q <= {root_q[52:0], 1'b1};
          end else begin
            rem_q  <= rem_n;
            root_q <= {root_q[52:0], 1'b0};
          end
          cnt_q <= cnt_q - 6'd1;
        end else begin
          y    <= special_q ? special_val_q : {1'b0, ex_r, mant_r[51:0]};
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
