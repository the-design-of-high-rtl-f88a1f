// daq_pkg: constants and types shared by the FPGA side of the FPGA-to-ARM11
// memory-bus link: the 16-bit data and address bus widths, the 32 KB FIFO
// and its depth in 16-bit words, and the bus word type.
package daq_pkg;
  localparam int unsigned DATA_W     = 16;      // data bus width, bits
  localparam int unsigned ADDR_W     = 16;      // address bus width, bits
  localparam int unsigned FIFO_BYTES = 32768;   // 32 KB FIFO
  localparam int unsigned FIFO_DEPTH = FIFO_BYTES / (DATA_W / 8);

  typedef logic [DATA_W-1:0] word_t;
endpackage
