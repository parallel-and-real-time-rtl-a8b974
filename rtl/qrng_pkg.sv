// qrng_pkg: constants shared by the four-channel Toeplitz post-processing design.
//
// Sizes that come from the published design: four channels, 16-bit ADC samples at
// 250 MS/s, Toeplitz matrices of 1729 x 2464 (channels 0 and 1) and 1729 x 2432
// (channels 2 and 3). Own choices: the processing clock of 125 MHz, which makes the
// per-cycle raw word k = C*a/J = 32 bits (k divides every matrix size given), the
// number of stored seeds per channel (4), the LFSR width (16), the 128-bit DMA
// word and the host address map.
package qrng_pkg;

  localparam int unsigned NUM_CH   = 4;     // parallel extractors
  localparam int unsigned ADC_W    = 16;    // ADC sample width a
  localparam int unsigned K        = 32;    // raw bits per processing clock
  localparam int unsigned M_BITS   = 1729;  // output rows m (all channels)
  localparam int unsigned B_SEEDS  = 4;     // seeds stored per channel (b)
  localparam int unsigned X_LFSR   = 16;    // LFSR width x
  localparam int unsigned DMA_W    = 128;   // DMA / DDR3 data width
  localparam int unsigned HOST_W   = 32;    // host AXI4 data width (= K)

  typedef int unsigned ch_uint_t [NUM_CH];
  localparam ch_uint_t N_CH = '{2464, 2464, 2432, 2432};

  // Host address map (byte addresses on the host AXI4 port).
  //   addr[31] = 1            : DDR3 window (reads forwarded to the DDR3 controller)
  //   addr[31] = 0, addr[20]=0: level-1 seed memory, channel addr[19:18], word addr[17:2]
  //   addr[31] = 0, addr[20]=1: control/status registers, register addr[7:2]
  localparam int unsigned REG_CTRL      = 0;  // [3:0] start sub-seed generation (self clearing), [8] extract enable
  localparam int unsigned REG_STATUS    = 1;  // [3:0] busy, [7:4] seeds ready, [11:8] update request,
                                              // [15:12] packer overflow, [19:16] raw FIFO overflow
  localparam int unsigned REG_THRESH_LO = 2;  // seed-update threshold, hash count, bits 31:0
  localparam int unsigned REG_THRESH_HI = 3;  // bits 47:32
  localparam int unsigned REG_DMA_PTR   = 4;  // DMA write pointer (byte offset in the ring)
  localparam int unsigned REG_HASH_CNT0 = 8;  // 8..11: hashes done per channel since last regeneration (low 32 bits)

  // 24 h of hashes at 125 MHz with n/k = 77: 125e6 / 77 * 86400
  localparam longint unsigned THRESH_DEFAULT = 64'd140_259_740_260;

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
