// control_unit -- stage counter that sequences the reused butterfly column.
//
// The processor has one column of N/2 butterflies and sends its outputs back
// to its own inputs log2N-1 times. This block counts the stages and derives
// the three control signals of the datapath:
//   sb  : stage bus, the number of the stage being computed (0..log2N-1);
//         it addresses the twiddle ROM and steers the routing network.
//   isl : input select line, 0 in stage 0 so the butterflies take the external
//         samples, 1 in every later stage so they take the register array.
//   osl : output select line, 1 only in the last stage, when the butterfly
//         results go to the output port instead of the register array.
// The counter advances on the rising clock edge, one stage per cycle, as the
// paper describes. Stage 0 is the idle state: the counter waits there until
// start is high (a frame is accepted on that edge), then runs stages
// 1..log2N-1 unconditionally and returns to 0. A new frame can be accepted in
// the cycle right after the last stage, so frames may follow back to back,
// one every log2N cycles. The start input, the synchronous active-low reset
// and the idle behaviour are this design's own choices; the paper's counter
// has only a clock. For N = 2 the single stage is both first and last.
module control_unit #(
  parameter int N  = 8,
  localparam int M  = $clog2(N),
  localparam int SBW = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,   // accept a frame when sb == 0
  output logic [SBW-1:0] sb,      // stage bus
  output logic           isl,     // 0: external input, 1: feedback
  output logic           osl,     // 1: results to the output port
  output logic           ready    // sb == 0: a frame may be presented
);

  localparam logic [SBW-1:0] LAST = SBW'(M - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sb <= '0;
    end else if (sb == '0) begin
      if (start && M > 1) sb <= SBW'(1);
    end else if (sb == LAST) begin
      sb <= '0;
    end else begin
      sb <= sb + SBW'(1);
    end
  end

  always_comb begin
    isl   = (sb != '0);
    osl   = (sb == LAST);
    ready = (sb == '0);
  end

  // The stage bus never leaves 0..log2N-1.
  a_sb_range: assert property (@(posedge clk) disable iff (!rst_n) sb <= LAST);

endmodule
