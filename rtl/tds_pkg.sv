// tds_pkg: constants and types shared by the Trigger Data Serializer (TDS) RTL.
// The TDS has two modes. In pad mode it reports, every 25 ns bunch crossing (BC),
// which of 104 detector pads fired. In strip mode it buffers 6-bit charges of 128
// strips and, on a trigger, reads out the strips of one band. Channel counts, the
// 12-bit BCID, the 4-bit frame headers and the 19-bit strip data unit follow the
// paper; the configuration structs are this design's own grouping of the settings
// that an I2C block would write (the I2C block itself is not part of this RTL).
package tds_pkg;

  localparam int N_PAD    = 104;   // pad channels (two 64-channel ASDs, 104 used)
  localparam int N_STRIP  = 128;   // strip channels
  localparam int BCID_W   = 12;    // bunch-crossing identifier width
  localparam int CHARGE_W = 6;     // ASD ADC resolution
  localparam int BAND_W   = 13;    // band-phi ID width on the pad-trigger link
  localparam int N_BAND   = 17;    // strips enabled per trigger (13 + 2 + 2)
  localparam int N_READ   = 14;    // strips sent per trigger
  localparam int FRAME_W  = 30;    // serializer word, loaded at 160 MHz
  localparam int STRIP_IDX_W = 7;  // log2(N_STRIP)

  localparam logic [3:0] HDR_DATA = 4'b1010;
  localparam logic [3:0] HDR_NULL = 4'b0110;

  // One "charge strip data unit": charge, BCID tag of the leading edge, and the
  // FLAG telling that the hit came early in its BC (may belong to the previous BC).
  typedef struct packed {
    logic [CHARGE_W-1:0] charge;
    logic [BCID_W-1:0]   bcid;
    logic                flag;
  } strip_unit_t;  // 19 bits

  typedef enum logic [1:0] {
    TM_NORMAL     = 2'd0,  // external ASD inputs, external triggers
    TM_GLOBAL     = 2'd1,  // internal pattern generator and internal triggers
    TM_BYPASS     = 2'd2,  // one channel straight to the selectors
    TM_FRAME_GEN  = 2'd3   // TDS-Router training frames
  } strip_test_e;

  typedef struct packed {
    logic [7:0]  timeout;      // ring-buffer NULL timer, in BCs (0 = off)
    logic [2:0]  win_ext;      // matching window = 25 ns + win_ext * 6.25 ns (0..4)
    strip_test_e test_mode;
    logic [6:0]  bypass_ch;    // channel probed in bypass mode
    logic [11:0] pat_bcid;     // BCID at which the pattern generator fires
    logic [13:0] pat_en;       // pattern generator enable per channel 0..13
    logic [3:0]  trig_delay;   // internal trigger comes this many BCs after pat_bcid
    logic [BAND_W-1:0] int_bandphi; // band-phi ID of internal triggers
  } strip_cfg_t;

endpackage
