// exp_unit: iterative exponential for the NPU vector unit (3D Gaussian
// splatting needs exp()).
//
// How it works (follows the paper's convergence method): the argument x is
// written as a sum of terms ln(1 + 2^-i), i = 0..ITERS-1, each used or not.
// R_remain starts at x, R_accum at 1.0. Every cycle a comparator checks
// R_remain against the head of the rotating shift register SR_sub
// (ln(1+2^-i)); when R_remain is not smaller the term is subtracted from
// R_remain and R_accum is multiplied by the head of SR_mul (1+2^-i). Both
// shift registers rotate by one entry per cycle. After ITERS cycles R_accum
// holds exp(x).
//
// Range: the paper computes [-1, 1] this way and reaches larger arguments
// by scaling with powers of two. Here every argument is divided by
// 2^SCALE = 8 on entry (an exact shift), so the whole Q3.12 input range
// [-8, 8) maps into [-1, 1); after the iterations R_accum is squared SCALE
// times (e^x = (e^(x/8))^8), one squaring per cycle, clamped at 8.0 where
// the Q3.12 output saturates anyway. The terms only reach ln-sum 1.56, so a
// negative scaled argument is range-reduced: it is replaced by
// x/8 + 2 ln 2 and R_accum divided by 4 before the squarings.
// The fixed SCALE (constant latency for all lanes), the iteration count
// (20, enough for 1 LSB after the squarings), Q3.12 input/output and 28
// internal fraction bits are this design's choices.
//
// Interface: pulse start with x (signed Q3.12, any value). busy is high for
// ITERS + SCALE cycles, then done pulses for one cycle with y (Q3.12,
// saturated at 7.99976). Latency start -> done = ITERS + SCALE + 1 cycles.
module exp_unit #(
  parameter int unsigned ITERS  = 20,
  parameter int unsigned SCALE  = 3,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 12,
  parameter int unsigned IFRAC  = 28
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] x,
  output logic                     busy,
  output logic                     done,
  output logic signed [DATA_W-1:0] y
);
  localparam int unsigned IW = IFRAC + 4;   // values stay below 16
  localparam int unsigned CW = $clog2(ITERS + SCALE + 1);

  typedef logic [IW-1:0] ival_t;

  // ln(1 + 2^-i) with 28 fraction bits (rounded); beyond i = 23 the term
  // equals 2^-i to this precision. Rescaled to IFRAC (IFRAC <= 28).
  function automatic ival_t ln_term(int i);
    logic [63:0] t;
    case (i)
      0 : t = 64'd186065279;
      1 : t = 64'd108841211;
      2 : t = 64'd59899641;
      3 : t = 64'd31617143;
      4 : t = 64'd16273798;
      5 : t = 64'd8260204;
      6 : t = 64'd4161873;
      7 : t = 64'd2089002;
      8 : t = 64'd1046533;
      9 : t = 64'd523777;
      10: t = 64'd262016;
      11: t = 64'd131040;
      12: t = 64'd65528;
      13: t = 64'd32766;
      14: t = 64'd16384;
      15: t = 64'd8192;
      16: t = 64'd4096;
      17: t = 64'd2048;
      18: t = 64'd1024;
      19: t = 64'd512;
      20: t = 64'd256;
      21: t = 64'd128;
      22: t = 64'd64;
      23: t = 64'd32;
      default: t = 64'd1 << (28 - i);
    endcase
    return ival_t'(t >> (28 - IFRAC));
  endfunction

  function automatic ival_t mul_term(int i);
    return ival_t'((64'd1 << IFRAC) + (64'd1 << (IFRAC - i)));
  endfunction

  localparam ival_t ONE     = ival_t'(64'd1 << IFRAC);
  localparam ival_t TWO_LN2 = ival_t'(64'd372130559 >> (28 - IFRAC));  // 2 ln 2

  // constant tables, evaluated at elaboration
  ival_t ln_tab  [ITERS];
  ival_t mul_tab [ITERS];
  for (genvar i = 0; i < ITERS; i++) begin : g_tab
    localparam ival_t LN_I  = ln_term(i);
    localparam ival_t MUL_I = mul_term(i);
    assign ln_tab[i]  = LN_I;
    assign mul_tab[i] = MUL_I;
  end

  ival_t           r_remain, r_accum;
  ival_t           sr_sub [ITERS];
  ival_t           sr_mul [ITERS];
  logic [CW-1:0]   cnt;
  logic            sq;       // squaring phase
  logic            neg;

  // comparator and datapath
  logic                cmp;
  logic [2*IW-1:0]     prod;
  assign cmp  = (r_remain >= sr_sub[0]);
  assign prod = r_accum * (sq ? r_accum : sr_mul[0]);

  // accumulator update: multiply on a taken term; after the last iteration
  // divide by 4 for a range-reduced negative argument; squares clamp at 8.0
  localparam logic [2*IW-1:0] CLAMP = 64'd8 << IFRAC;
  ival_t acc_it, acc_sq;
  always_comb begin
    acc_it = cmp ? ival_t'(prod >> IFRAC) : r_accum;
    if (cnt == CW'(ITERS - 1) && neg) acc_it = acc_it >> 2;
    acc_sq = ((prod >> IFRAC) > CLAMP) ? ival_t'(CLAMP) : ival_t'(prod >> IFRAC);
  end

  // argument alignment
  logic signed [IW:0]  x_ext;
  assign x_ext = (IW + 1)'(x) <<< (IFRAC - FRAC - SCALE);   // x / 2^SCALE

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      cnt      <= '0;
      sq       <= 1'b0;
      neg      <= 1'b0;
      r_remain <= '0;
      r_accum  <= '0;
      for (int i = 0; i < ITERS; i++) begin
        sr_sub[i] <= ln_tab[i];
        sr_mul[i] <= mul_tab[i];
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        cnt      <= '0;
        sq       <= 1'b0;
        neg      <= x[DATA_W-1];
        r_remain <= x[DATA_W-1] ? ival_t'(x_ext + (IW + 1)'(TWO_LN2)) : ival_t'(x_ext);
        r_accum  <= ONE;
        for (int i = 0; i < ITERS; i++) begin
          sr_sub[i] <= ln_tab[i];
          sr_mul[i] <= mul_tab[i];
        end
      end else if (busy && !sq) begin
        if (cmp) r_remain <= r_remain - sr_sub[0];
        r_accum <= acc_it;
        // rotate: the head moves to the tail
        for (int i = 0; i < ITERS - 1; i++) begin
          sr_sub[i] <= sr_sub[i+1];
          sr_mul[i] <= sr_mul[i+1];
        end
        sr_sub[ITERS-1] <= sr_sub[0];
        sr_mul[ITERS-1] <= sr_mul[0];
        cnt <= cnt + 1'b1;
        if (cnt == CW'(ITERS - 1)) begin
          if (SCALE == 0) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else sq <= 1'b1;
        end
      end else if (busy) begin
        r_accum <= acc_sq;
        cnt     <= cnt + 1'b1;
        if (cnt == CW'(ITERS + SCALE - 1)) begin
          busy <= 1'b0;
          sq   <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // output scaling: back to FRAC bits, saturate
  localparam ival_t YMAX = ival_t'((64'd1 << (DATA_W - 1)) - 1);
  ival_t y_full;
  assign y_full = r_accum >> (IFRAC - FRAC);
  assign y = (y_full > YMAX) ? DATA_W'(YMAX) : DATA_W'(y_full);

endmodule
