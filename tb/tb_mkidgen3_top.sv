// tb_mkidgen3_top: end-to-end test of the whole readout at a reduced size.
//
// 64 channels from 128 OPFB bins (8 beats per frame, so one fine-channel
// sample every 16 cycles and CLK_PER_US = 16 to keep one sample per
// microsecond), a 256-sample DAC table and photon buffers of 16 records so
// that full-buffer swaps happen quickly. Everything else is at its default.
// The stimulus, the processor/memory models and the checks are in
// tb_mkidgen3_body.svh; every mechanism of the design (trigger, swap on a
// full buffer and on the interval, drops, postage stamp, capture of each
// source, PPS alignment, DAC loop, bin duplication) is counted and must
// occur.
module tb_mkidgen3_top;
  localparam bit FULL = 0;
  localparam int N_CH = 64, N_BIN = 128, CLK_PER_US = 16, PHOT_BUF_BYTES = 128;
  `include "tb_mkidgen3_body.svh"

  mkidgen3_top #(.N_CH(N_CH), .N_BIN(N_BIN), .DAC_SAMPLES(256), .CLK_PER_US(CLK_PER_US),
                 .PHOT_BUF_BYTES(PHOT_BUF_BYTES)) dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
