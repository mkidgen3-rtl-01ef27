// tb_mkidgen3_full: the end-to-end test with the top at its default size:
// 2048 channels from 4096 OPFB bins (256 beats per frame, one fine sample
// per microsecond = 512 cycles), the 2^19-sample DAC table, 30-tap matched
// filters and 800 KiB photon buffers. It runs the same sequence and checks
// as tb_mkidgen3_top (see tb_mkidgen3_body.svh), except that a full-buffer
// swap is not required: filling 800 KiB takes 102400 photons.
module tb_mkidgen3_full;
  localparam bit FULL = 1;
  localparam int N_CH = 2048, N_BIN = 4096, CLK_PER_US = 512, PHOT_BUF_BYTES = 819200;
  `include "tb_mkidgen3_body.svh"

  mkidgen3_top dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
