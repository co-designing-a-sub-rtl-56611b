// tb_see_accel: end-to-end test of the accelerator at a reduced size.
//
// A 12x8 frame, four input channels, 4/8-channel blocks and expansion 2
// keep the run short. Four frames are processed: a dense one, one with an
// embedding stall, an empty one and a sparse one. See see_accel_tb_body.svh
// for the flow and the mechanisms that are counted.
module tb_see_accel;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int W = 12, H = 8, C_IN = 4, C1 = 4, C2 = 8, EXP = 2, NUM_MID = 1, PI = 2, NF = 4;
  localparam int DENS [NF] = '{60, 30, 0, 15};

`include "see_accel_tb_body.svh"

  see_accel #(.W(W), .H(H), .C_IN(C_IN), .C1(C1), .C2(C2), .EXP(EXP), .NUM_MID(NUM_MID), .PI(PI)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
