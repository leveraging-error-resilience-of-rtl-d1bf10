// ls_div: the divider of the LS core, g_p = (mac_real + j mac_imag) / sac.
//
// The denominator is real, so the complex division is two real divisions sharing one divisor.
// Both run in parallel as radix-2 restoring dividers on magnitudes: the numerator magnitude is
// shifted left by DIV_SHIFT so that the quotient has the gain's binary point, one quotient bit is
// produced per clock, and the sign is put back at the end. Half the divisor is added to the
// shifted numerator magnitude first, so the quotient magnitude is rounded to nearest (halves up)
// at no extra clock; it is then saturated to the gain's word length W_Q. A divisor that is zero
// or negative saturates the result too. The published design gives only the division itself;
// the iterative divider and the rounding are this implementation's choice (it needs one
// subtractor per part instead of an array).
//
// Timing: start is sampled on a clock edge when busy is low and loads the operands; done pulses
// and q_re/q_im are valid exactly LATENCY = W_NUM + SHIFT clocks after that edge, and busy is high
// in between. q_re/q_im hold until the next result. en low freezes the divider.
module ls_div
  import ls_pkg::*;
#(
  parameter int W_NUM = W_ACC,
  parameter int W_Q   = W_G,
  parameter int SHIFT = DIV_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    start,
  input  logic signed [W_NUM-1:0] num_re,
  input  logic signed [W_NUM-1:0] num_im,
  input  logic signed [W_NUM-1:0] den,
  output logic                    busy,
  output logic                    done,
  output logic signed [W_Q-1:0]   q_re,
  output logic signed [W_Q-1:0]   q_im
);

  localparam int DW = W_NUM + SHIFT;              // dividend bits = quotient bits = latency
  localparam int CW = $clog2(DW + 1);
  localparam logic [DW-1:0] QMAX = DW'((64'd1 << (W_Q - 1)) - 64'd1);

  typedef struct packed {
    logic [DW-1:0]  dvd;   // remaining dividend bits, MSB first
    logic [W_NUM:0] rem;   // partial remainder
    logic [DW-1:0]  quo;   // quotient bits so far
    logic           neg;   // sign of the result
  } lane_t;

  lane_t          lre, lim, nre, nim;
  logic [W_NUM-1:0] dvs;
  logic [CW-1:0]  cnt;

  // |n| * 2^SHIFT + d / 2 fits in DW bits: |n| <= 2^(W_NUM-1) and d / 2 < 2^(W_NUM-2)
  function automatic lane_t load(input logic signed [W_NUM-1:0] n, input logic [W_NUM-1:0] d);
    lane_t l;
    logic [W_NUM-1:0] mag;
    mag   = n[W_NUM-1] ? W_NUM'(-n) : W_NUM'(n);
    l.dvd = {mag, {SHIFT{1'b0}}} + DW'(d >> 1);
    l.rem = '0;
    l.quo = '0;
    l.neg = n[W_NUM-1];
    return l;
  endfunction

  function automatic lane_t step(input lane_t l, input logic [W_NUM-1:0] d);
    lane_t o;
    logic [W_NUM:0] r;
    r     = {l.rem[W_NUM-1:0], l.dvd[DW-1]};
    o.dvd = l.dvd << 1;
    o.neg = l.neg;
    if (r >= {1'b0, d}) begin
      o.rem = r - {1'b0, d};
      o.quo = {l.quo[DW-2:0], 1'b1};
    end else begin
      o.rem = r;
      o.quo = {l.quo[DW-2:0], 1'b0};
    end
    return o;
  endfunction

  function automatic logic signed [W_Q-1:0] finish(input logic [DW-1:0] quo, input logic neg);
    logic [W_Q-1:0] m;
    m = (quo > QMAX) ? W_Q'(QMAX) : W_Q'(quo);
    return neg ? -m : m;
  endfunction

  logic [W_NUM-1:0] den_ok;   // a negative divisor is treated as zero
  assign den_ok = den[W_NUM-1] ? '0 : W_NUM'(den);

  always_comb begin
    nre = step(lre, dvs);
    nim = step(lim, dvs);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lre  <= '0;
      lim  <= '0;
      dvs  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      q_re <= '0;
      q_im <= '0;
    end else if (en) begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          lre  <= load(num_re, den_ok);
          lim  <= load(num_im, den_ok);
          dvs  <= den_ok;
          cnt  <= CW'(DW);
          busy <= 1'b1;
        end
      end else begin
        lre <= nre;
        lim <= nim;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          q_re <= finish(nre.quo, nre.neg);
          q_im <= finish(nim.quo, nim.neg);
        end
      end
    end
  end

endmodule
