// daq_pkg: shared constants of the muon-tomography back-end DAQ.
//
// The numbers here follow the published design: two clock domains (500 MHz
// sampling clock from the on-chip PLL, 50 MHz board clock for the controller
// and UART), one bit per channel per 2 ns sample, a 128 ns input delay and a
// 260 ns trigger window, i.e. 130 samples. One FPGA reads the two 8-channel
// NINO boards of an X/Y strip pair, hence 16 channels. The FIFO depth and the
// UART bit rate are not published; they are choices of this implementation
// (a power-of-two depth covering one window, and the common 115200 Bd),
// as is the size of the buffer a master keeps for a slave's events.
package daq_pkg;
  localparam int unsigned SAMPLE_PERIOD_NS   = 2;    // 500 MHz sampling clock
  localparam int unsigned CTRL_PERIOD_NS     = 20;   // 50 MHz board clock
  localparam int unsigned NINO_CHANNELS      = 8;    // channels per NINO board
  localparam int unsigned BOARDS_PER_FPGA    = 2;    // X and Y readout planes
  localparam int unsigned DEF_CHANNELS       = NINO_CHANNELS * BOARDS_PER_FPGA;
  localparam int unsigned DELAY_NS           = 128;
  localparam int unsigned WINDOW_NS          = 260;
  localparam int unsigned DEF_DELAY_SAMPLES  = DELAY_NS / SAMPLE_PERIOD_NS;   // 64
  localparam int unsigned DEF_WINDOW_SAMPLES = WINDOW_NS / SAMPLE_PERIOD_NS;  // 130
  localparam int unsigned DEF_WINDOW_CYCLES  = WINDOW_NS / CTRL_PERIOD_NS;    // 13
  localparam int unsigned DEF_FIFO_DEPTH     = 256;
  localparam int unsigned DEF_CLKS_PER_BIT   = 434;  // 50 MHz / 115200 Bd
  localparam int unsigned DEF_LINK_DEPTH     = 512;  // slave bytes buffered by a master
endpackage
