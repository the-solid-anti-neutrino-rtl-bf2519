// solid_pkg: types and constants shared by the plane readout firmware.
// Samples are 14-bit ADC counts at 40 MS/s (as in the detector); the 48-bit
// time stamp counts sample clocks since the last sync. Readout words are 32
// bits; their format and the record layouts below are this design's choice.
package solid_pkg;
  localparam int SAMPLE_W = 14;
  localparam int TS_W     = 48;
  localparam int WORD_W   = 32;

  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef logic [TS_W-1:0]     ts_t;
  typedef logic [WORD_W-1:0]   word_t;

  // Channel input source (source multiplexer ahead of the latency buffer).
  typedef enum logic [1:0] {SRC_ADC = 2'd0, SRC_PLAYBACK = 2'd1, SRC_PATTERN = 2'd2} src_sel_e;

  // Readout word kinds, bits [31:30] of every channel word.
  typedef enum logic [1:0] {W_NONE = 2'b00, W_BLKHDR = 2'b01, W_SAMPLE = 2'b10, W_TRAILER = 2'b11} word_kind_e;

  // Trigger kinds.
  typedef enum logic [1:0] {TT_RANDOM = 2'd0, TT_NEUTRON = 2'd1, TT_REMOTE = 2'd2} trig_type_e;

  typedef struct packed {
    logic       valid;
    trig_type_e ttype;
    ts_t        ts;
  } trig_t;

  // Readout time window, inclusive at both ends.
  typedef struct packed {
    ts_t t_start;
    ts_t t_end;
  } ro_window_t;

  // 64-bit header records: trigger record tag 4'hA, event record tag 4'hB.
  localparam logic [3:0] REC_TRIG  = 4'hA;
  localparam logic [3:0] REC_EVENT = 4'hB;
  typedef struct packed {
    logic [3:0] tag;
    logic [1:0] kind;   // trigger type
    logic [9:0] spare;
    ts_t        ts;
  } rec_t;

  // Word on a board-to-board trigger link (parallel side of the transceiver).
  localparam logic [7:0] LINK_TRIG = 8'h5A;
  typedef struct packed {
    logic [7:0] marker;  // LINK_TRIG for a trigger, 0 when idle
    logic [7:0] spare;
    ts_t        ts;
  } link_word_t;

  // IPbus slave bus (as in the IPbus firmware suite: master-to-slave and back).
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        strobe;
    logic        write;
  } ipb_wbus_t;
  typedef struct packed {
    logic [31:0] rdata;
    logic        ack;
    logic        err;
  } ipb_rbus_t;

  // Run-time configuration, written over IPbus (see ctrl_regs for the map).
  typedef struct packed {
    src_sel_e    src;
    logic        descr_en;
    logic [3:0]  bitslip;
    logic        zs_en;
    sample_t     zs_thr;
    logic        rand_en;
    logic [31:0] rand_rate;
    logic        neutron_en;
    logic [1:0]  remote_en;
    sample_t     pedestal;
    sample_t     peak_thr;
    logic [8:0]  npk_thr;
    logic        pat_mode;
    sample_t     pat_value;
    logic        pb_run;
    logic [7:0]  pb_len;
  } cfg_t;

  // Status seen over IPbus.
  typedef struct packed {
    ts_t         ts;
    logic [31:0] n_sync;
    logic [31:0] n_trig;
    logic [31:0] n_vetoed;
    logic [31:0] n_events;
    logic [31:0] n_remote;
    logic [31:0] dt_total;
    logic [31:0] dt_throttle;
    logic [31:0] dt_busy;
    logic [31:0] dt_bp;
    logic [31:0] hdr_words;
    logic [31:0] data_words;
  } stat_t;

  function automatic word_t mk_word(word_kind_e k, logic [29:0] payload);
    return {k, payload};
  endfunction
endpackage
