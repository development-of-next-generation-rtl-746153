// llrf_pkg: shared constants and types of the multiharmonic LLRF controller.
//
// The system runs on one 144 MHz clock. The 1 MHz control clock (CTRL) and the
// 1 MHz pattern clock (PATN) are carried as one-cycle enable strobes in that
// clock domain. Signal words are two's-complement: ADC/DAC samples, I/Q
// amplitudes and setpoints are 16 bit, phase and frequency words are 32 bit
// with 2^32 = one turn (full circle), so a frequency word is the phase step per
// 144 MHz cycle.
//
// The numbers that come from the paper: 144 MHz system clock, 1 MHz control and
// pattern clocks, 32-bit revolution frequency word, eight harmonics h=1..8, two
// cavities per driver module, six driver modules for twelve cavities, 16-bit
// I/Q data blocks, 40 data blocks per frame of which 32 carry two cavities'
// I/Q. The configuration address map and the word formats are this design's.
package llrf_pkg;

  localparam int unsigned SYS_CLK_HZ   = 144_000_000;
  localparam int unsigned CTRL_DIV_DEF = 144;     // 144 MHz / 144 = 1 MHz control clock
  localparam int unsigned PATN_DIV_DEF = 144;     // 1 MHz pattern clock
  localparam int unsigned NHARM        = 8;       // harmonics h = 1..8
  localparam int unsigned NCAV_DRV     = 2;       // cavities per driver module
  localparam int unsigned NDRV         = 6;       // driver modules (12 cavities)
  localparam int unsigned NCAV         = NCAV_DRV * NDRV;
  localparam int unsigned FRAME_BLOCKS = 40;      // data blocks per frame
  localparam int unsigned PATTERN_DEPTH_DEF = 40_000; // 40 ms (25 Hz) at 1 MHz
  localparam int unsigned LUT_ABITS    = 10;      // frequency LUT: 1024 entries
  localparam int unsigned GAIN_ONE     = 16384;   // gain words: Q2.14, 1.0 = 16384

  typedef logic signed [15:0] sample_t;   // ADC/DAC sample, I or Q amplitude
  typedef logic        [31:0] phase_t;    // phase, 2^32 = 2*pi
  typedef logic        [31:0] freq_t;     // frequency word, phase step per clock
  typedef logic        [15:0] gain_t;     // unsigned Q2.14

  typedef struct packed {
    sample_t i;
    sample_t q;
  } iq_t;

  // One word of the modelled Aurora user interface: sof marks the sequence
  // number word, eof the last data block.
  typedef struct packed {
    logic        valid;
    logic        sof;
    logic        eof;
    logic [15:0] data;
  } link_word_t;

  // Signals distributed on AMC backplane ports 17-20 by the common function
  // module (Fig. 5/8/9). The two clocks are one-cycle strobes.
  typedef struct packed {
    logic       trig_25hz;
    logic       trig_beam;
    logic       trig_meas;
    logic       ctrl_stb;
    logic       patn_stb;
    logic       ab;
    logic [1:0] mode;
    logic       f1_ser;     // serial 32-bit revolution frequency
  } bp_bus_t;

  // Host configuration write (stands in for the EPICS IOC register access).
  typedef struct packed {
    logic        we;
    logic [31:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Address map: addr[31:28] unit, 0 common, 1 communication, 2..7 driver 0..5.
  // In a driver: addr[27] cavity, addr[26:24] harmonic index (h-1),
  // addr[23:20] item, addr[15:0] register or table index.
  localparam logic [3:0] UNIT_COMMON = 4'd0;
  localparam logic [3:0] UNIT_COMM   = 4'd1;
  localparam logic [3:0] UNIT_DRV0   = 4'd2;

  localparam logic [3:0] ITEM_REG      = 4'd0;
  localparam logic [3:0] ITEM_IQ_PAT   = 4'd1;
  localparam logic [3:0] ITEM_GAIN_PAT = 4'd2;
  localparam logic [3:0] ITEM_PH_LUT   = 4'd3;
  localparam logic [3:0] ITEM_GAIN_LUT = 4'd4;

  // Registers of a harmonic feedback block (ITEM_REG, addr[3:0]).
  localparam logic [3:0] REG_HN       = 4'd0;
  localparam logic [3:0] REG_KP       = 4'd1;
  localparam logic [3:0] REG_KI       = 4'd2;
  localparam logic [3:0] REG_ROT_ANG  = 4'd3;
  localparam logic [3:0] REG_ROT_GAIN = 4'd4;

  // Registers of the common function module (ITEM_REG) and its frequency pattern (item 1).
  localparam logic [3:0] REG_CTRL_DIV = 4'd0;
  localparam logic [3:0] REG_PATN_DIV = 4'd1;
  localparam logic [3:0] ITEM_FREQ_PAT = 4'd1;

  // Registers of the communication module.
  localparam logic [3:0] REG_NCAV      = 4'd0;
  localparam logic [3:0] REG_LINK_MASK = 4'd1;

  function automatic logic [31:0] drv_addr(input logic [3:0] drv, input logic cav,
                                           input logic [2:0] harm, input logic [3:0] item,
                                           input logic [15:0] idx);
    drv_addr = {UNIT_DRV0 + drv, cav, harm, item, 4'd0, idx};
  endfunction

  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       sat16 = 16'sh7fff;
    else if (v < -48'sd32768) sat16 = 16'sh8000;
    else                      sat16 = v[15:0];
  endfunction

endpackage
