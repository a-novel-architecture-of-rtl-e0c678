// butterfly_unit -- radix-2 decimation-in-time butterfly with a complex
// twiddle multiplier, split over the two halves of the clock cycle.
//
// Function: top = A + W*B, bot = A - W*B, with A, B complex samples and W a
// complex twiddle factor W_N^k. This is the paper's butterfly: B is the input
// that is multiplied by the twiddle and the product is added to and
// subtracted from A.
//
// Timing, following the paper: the whole butterfly finishes within one clock
// cycle. Its inputs change just after the rising edge, when the stage bus and
// the register array update, and the multiplication is done during the high
// phase. On the falling edge the sum and difference are captured in the
// output register, so top/bot are valid from the falling edge to the next
// falling edge and the register array can take them on the next rising
// edge. Here the multiplier itself is combinational logic (four real
// multiplications, matching the four DSP slices per butterfly of the
// paper's 8-point build); only the add/subtract result is clocked.
//
// Arithmetic (this design's own choice; the paper gives no number format):
// the product is rounded half up to integer samples, W*B =
// round(B*W / 2**TW_FRAC); sums and differences wrap at DATA_W bits. No
// per-stage scaling is applied, so a log2N-stage transform needs about
// log2N+1 guard bits above the input magnitude to avoid wrap-around.
module butterfly_unit
  import fft_pkg::*;
(
  input  logic  clk,
  input  cplx_t a,     // un-multiplied input
  input  cplx_t b,     // input multiplied by the twiddle
  input  twid_t w,     // twiddle factor, TW_FRAC fraction bits
  output cplx_t top,   // a + w*b, updated on the falling edge
  output cplx_t bot    // a - w*b, updated on the falling edge
);

  localparam int MW = DATA_W + TW_W;        // one real product
  localparam int PW = MW + 1;               // sum of two real products

  logic signed [MW-1:0] rr, ii, ri, ir;     // the four real products
  logic signed [PW-1:0] prod_re, prod_im;
  sample_t              wb_re, wb_im;

  // Multiplication: high phase of the clock.
  always_comb begin
    rr      = MW'(b.re) * MW'(w.re);
    ii      = MW'(b.im) * MW'(w.im);
    ri      = MW'(b.re) * MW'(w.im);
    ir      = MW'(b.im) * MW'(w.re);
    prod_re = PW'(rr) - PW'(ii) + (PW'(1) <<< (TW_FRAC - 1));
    prod_im = PW'(ri) + PW'(ir) + (PW'(1) <<< (TW_FRAC - 1));
    wb_re   = sample_t'(prod_re >>> TW_FRAC);
    wb_im   = sample_t'(prod_im >>> TW_FRAC);
  end

  // Addition and subtraction: captured on the falling edge.
  always_ff @(negedge clk) begin
    top.re <= a.re + wb_re;
    top.im <= a.im + wb_im;
    bot.re <= a.re - wb_re;
    bot.im <= a.im - wb_im;
  end

endmodule
