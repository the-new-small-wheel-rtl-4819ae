// tb_nsw_full: runs the end-to-end sector test on nsw_sector_trigger at its full paper size
// (4700 pad-trigger patterns, 24 pad TDS, 8 x 12 strip TDS with 128 channels, 32 ART ASICs,
// 16 MM finder regions): the design is instantiated without parameter overrides, with the
// same stimulus, checks and mechanism coverage as tb_nsw_sector_trigger, over 1200 BC.
module tb_nsw_full;
  tb_nsw_sector_trigger #(.FULL(1)) u_tb ();
endmodule
