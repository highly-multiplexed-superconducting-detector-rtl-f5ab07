// tb_mkid_readout_top: end-to-end test of the readout at a reduced size.
//
// 64 filter-bank bins, 32 channels (4 beats per frame), 4 matched-filter
// taps and a 64-word DAC table; everything else as in the full design.
// The stimulus and all checks are in tb_top_env.
module tb_mkid_readout_top;
  import mkid_pkg::*;
  localparam int NB = 64, NC = 32, TAPS = 4, DD = 64;

  logic clk, rst, adc_valid, opfb_valid, opfb_last, cfg_we;
  logic [127:0] adc_i, adc_q, dac_i, dac_q;
  iq_t [OPFB_LANES-1:0] opfb_data;
  logic [23:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic iqcap_wr_valid, iqcap_wr_ready, adccap_wr_valid, adccap_wr_ready;
  logic photon_wr_valid, photon_wr_ready;
  logic [31:0] iqcap_wr_addr, adccap_wr_addr, photon_wr_addr;
  logic [255:0] iqcap_wr_data, adccap_wr_data, photon_wr_data, lut_wdata;
  logic iqcap_busy, iqcap_done, adccap_busy, adccap_done, iq_switch_active;
  logic [31:0] iqcap_overflow, adccap_overflow, photon_wr_ptr, photon_dropped;
  logic [31:0] photon_written, time_us;
  logic dac_clk, dac_rst, lut_we, dac_run, dac_valid;
  logic [$clog2(DD)-1:0] lut_addr;
  logic [$clog2(DD):0] dac_len;

  mkid_readout_top #(.NBINS(NB), .NCHAN(NC), .MF_TAPS(TAPS), .DAC_DEPTH(DD)) dut (.*);
  tb_top_env #(.NB(NB), .NC(NC), .TAPS(TAPS), .DD(DD)) env (.*);
endmodule
