// area_efficient_fft -- N-point radix-2 FFT processor with one reused column
// of N/2 butterflies.
//
// A conventional parallel radix-2 FFT lays out log2N columns of N/2
// butterflies. This processor builds one column and runs it log2N times:
// stage 0 takes the external samples x(0..N-1) in bit-reversed order; each
// stage's results are written into a register array and fed back through a
// stage-controlled routing network to the same butterflies; the results of
// the last stage go to the output port. A stage counter (control_unit)
// drives the input select line, the output select line and the stage bus
// that addresses the twiddle ROM and steers the routing network.
//
// Datapath, in order: source_selector (ISL muxes) -> routing_network ->
// N/2 x butterfly_unit (twiddles from twiddle_rom) -> output_selector (OSL
// demuxes) -> register_array -> back to source_selector.
//
// Interface and timing. One stage per clock cycle; a frame takes log2N
// cycles and frames can follow back to back.
//   * When ready is 1 (stage 0), drive x and raise start; x must stay stable
//     until the falling edge of that cycle, where the first butterfly results
//     are captured. The frame is accepted on the following rising edge.
//   * log2N-1 cycles later y_valid is 1 for one cycle and y holds the
//     transform Y(0..N-1) in natural order. y is captured by the butterflies
//     on the falling edge inside that cycle, so it is stable from mid-cycle
//     until the rising edge that ends it; sample it on that rising edge.
//     Outside that cycle y is zero.
//   * ready is 1 again in the cycle after the last stage; for N > 2 ready and
//     y_valid are never high together (checked by an assertion).
// Arithmetic: DATA_W-bit signed integer components, no per-stage scaling
// (Y(k) = sum x(n) W_N^nk up to rounding of each twiddle product); inputs
// need about log2N+1 guard bits. Start, reset, ready/y_valid and the number
// format are this design's own choices; the block structure, the
// single-cycle butterfly split over the two clock phases, the ROM
// organisation and the control sequence follow the paper.
module area_efficient_fft
  import fft_pkg::*;
#(
  parameter int N = 8,
  localparam int M   = $clog2(N),
  localparam int SBW = (M > 1) ? $clog2(M) : 1
) (
  input  logic  clk,
  input  logic  rst_n,     // synchronous, active low
  input  logic  start,     // accept x when ready
  input  cplx_t x [N],     // input samples x(0..N-1)
  output logic  ready,     // stage 0: a frame may be presented
  output cplx_t y [N],     // output bins Y(0..N-1), natural order
  output logic  y_valid    // y holds a result (last stage)
);

  logic [SBW-1:0] sb;
  logic           isl, osl;
  cplx_t          d   [N];
  cplx_t          fbq [N];
  cplx_t          fbd [N];
  cplx_t          a   [N/2];
  cplx_t          b   [N/2];
  cplx_t          top [N/2];
  cplx_t          bot [N/2];
  twid_t          w   [N/2];

  control_unit #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .sb, .isl, .osl, .ready
  );

  source_selector #(.N(N)) u_src (
    .isl, .x, .fb(fbq), .d
  );

  routing_network #(.N(N)) u_route (
    .sb, .d, .a, .b
  );

  twiddle_rom #(.N(N)) u_tw (
    .sb, .w
  );

  for (genvar j = 0; j < N/2; j++) begin : g_bf
    butterfly_unit u_bf (
      .clk, .a(a[j]), .b(b[j]), .w(w[j]), .top(top[j]), .bot(bot[j])
    );
  end

  output_selector #(.N(N)) u_out (
    .osl, .top, .bot, .fb(fbd), .y
  );

  register_array #(.N(N)) u_regs (
    .clk, .rst_n, .d(fbd), .q(fbq)
  );

  assign y_valid = osl;

  // Handshake rule: for N > 2 a result is never delivered in a cycle that
  // can accept a new frame, so ready and y_valid are never high together.
  a_valid_not_ready: assert property (
    @(posedge clk) disable iff (!rst_n) (M > 1) |-> !(y_valid && ready));

endmodule
