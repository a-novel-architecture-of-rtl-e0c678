// register_array -- feedback storage between two uses of the butterfly
// column.
//
// N complex registers. On every rising clock edge slot n takes d[n], the
// n-th butterfly output (slot 2j: sum output of butterfly j, slot 2j+1: its
// difference output) as routed by the output selector, and presents it on
// q[n] for the next stage. The butterflies update their outputs on the
// falling edge, so the rising edge that ends a stage captures that stage's
// results. With the default N = 8 and 18-bit components this is the paper's
// 288 register bits. The synchronous active-low reset that clears the
// registers is this design's own choice.
module register_array
  import fft_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t d [N],      // butterfly outputs, butterfly order
  output cplx_t q [N]       // stored samples, to the input selectors
);

  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (!rst_n) q[n] <= '0;
      else        q[n] <= d[n];
    end
  end

endmodule
