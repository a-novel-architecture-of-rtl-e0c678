// tb_control_unit -- checks the stage counter against a cycle model.
//
// Two instances, N = 8 (three stages, 2-bit stage bus) and N = 32 (five
// stages, 3-bit stage bus), are driven with a random start pattern. Each
// cycle the testbench's own counter model predicts sb; isl must be 0 only in
// stage 0, osl 1 only in the last stage, ready 1 only in stage 0. It also
// checks that a frame takes exactly log2N cycles from acceptance to the end
// of its output stage and that reset returns the counter to stage 0.
`timescale 1ns/1ps
module tb_control_unit;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  int   checks = 0, failures = 0;

  logic [1:0] sb8;  logic isl8,  osl8,  rdy8;
  logic [2:0] sb32; logic isl32, osl32, rdy32;

  control_unit #(.N(8))  u8  (.clk, .rst_n, .start, .sb(sb8),  .isl(isl8),  .osl(osl8),  .ready(rdy8));
  control_unit #(.N(32)) u32 (.clk, .rst_n, .start, .sb(sb32), .isl(isl32), .osl(osl32), .ready(rdy32));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t: %s", $time, what);
    end
  endfunction

  int m8 = 0, m32 = 0;            // model stage
  int acc8 = -1, acc32 = -1;      // cycle a frame was accepted
  int cyc = 0, frames8 = 0, frames32 = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (cyc = 0; cyc < 3000; cyc++) begin
      start = ($urandom_range(0, 2) != 0);
      if (cyc == 1500) rst_n = 1'b0;
      if (cyc == 1502) rst_n = 1'b1;
      @(negedge clk);
      check(int'(sb8) == m8,   $sformatf("N=8 sb %0d model %0d", sb8, m8));
      check(isl8 == (m8 != 0) && osl8 == (m8 == 2) && rdy8 == (m8 == 0), "N=8 isl/osl/ready");
      check(int'(sb32) == m32, $sformatf("N=32 sb %0d model %0d", sb32, m32));
      check(isl32 == (m32 != 0) && osl32 == (m32 == 4) && rdy32 == (m32 == 0), "N=32 isl/osl/ready");
      if (osl8 && acc8 >= 0)   begin check(cyc - acc8 == 2,  "N=8 frame not 3 cycles");  frames8++;  acc8 = -1;  end
      if (osl32 && acc32 >= 0) begin check(cyc - acc32 == 4, "N=32 frame not 5 cycles"); frames32++; acc32 = -1; end
      // model update for the coming rising edge
      if (!rst_n) begin m8 = 0; m32 = 0; acc8 = -1; acc32 = -1; end
      else begin
        if (m8 == 0)  begin if (start) begin m8 = 1;  acc8 = cyc;  end end
        else m8 = (m8 == 2) ? 0 : m8 + 1;
        if (m32 == 0) begin if (start) begin m32 = 1; acc32 = cyc; end end
        else m32 = (m32 == 4) ? 0 : m32 + 1;
      end
      @(posedge clk); #1;
    end
    check(frames8 > 100 && frames32 > 100, "too few frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
