// tb_see_accel_full: end-to-end test of the accelerator at a reduced size.
//
// A 12x8 frame, four input channels, 4/8-channel blocks and expansion 2
// keep the run short. Four frames are processed: a dense one, one with an
// embedding stall, an empty one and a sparse one. See see_accel_tb_body.svh
// for the flow and the mechanisms that are counted.
module tb_see_accel_full;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int W = 80, H = 60, C_IN = 4, C1 = 16, C2 = 32, EXP = 4, NUM_MID = 1, PI = 4, NF = 2;
  localparam int DENS [NF] = '{5, 0};

`include "see_accel_tb_body.svh"

  see_accel dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
