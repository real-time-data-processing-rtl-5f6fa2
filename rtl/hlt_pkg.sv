// hlt_pkg: types and constants shared by the C-RORC readout firmware and
// its TPC hardware cluster finder (HWCF).
//
// The detector numbers follow the paper: 10-bit ADC samples, 1000 time bins
// per readout, 159 pad rows per sector, 12 optical links and 6 cluster finder
// instances per C-RORC. The word formats of the link stream, of the internal
// tokens and of the cluster output are this design's own choice.
//
// Raw link word (32 bit), one per link clock, with a separate end-of-event flag:
//   channel header : [31]=1, [30:23] pad row, [22:15] pad in row
//   ADC sample     : [31]=0, [19:10] time bin, [9:0] ADC value
// Samples of one channel follow its header in increasing time-bin order and
// channels of one row arrive in increasing pad order.
package hlt_pkg;

  // Detector geometry and digitisation (paper, Sec. 1)
  localparam int unsigned ADC_W     = 10;   // 10-bit ADC
  localparam int unsigned TIME_BINS = 1000; // time bins per readout
  localparam int unsigned TIME_W    = 10;
  localparam int unsigned PAD_ROWS  = 159;  // pad rows per sector
  localparam int unsigned ROW_W     = 8;
  localparam int unsigned PAD_W     = 8;    // pads per row < 256 (assumed)

  // Board (paper, Table 1 and Sec. 3.2)
  localparam int unsigned NUM_LINKS = 12;
  localparam int unsigned NUM_HWCF  = 6;

  // Stream and host-write widths
  localparam int unsigned LINK_W    = 32;
  localparam int unsigned HOST_W    = 128;  // bits per host write beat
  localparam int unsigned ADDR_W    = 64;

  // Gain calibration: unsigned fixed point, GAIN_FRAC fractional bits (1.0 = 4096)
  localparam int unsigned GAIN_W    = 13;
  localparam int unsigned GAIN_FRAC = 12;

  // Charges and moment sums
  localparam int unsigned Q_W       = 12;   // gain-corrected sample charge
  localparam int unsigned QSUM_W    = 24;   // total charge of a cluster
  localparam int unsigned M1_W      = 40;   // sum q*x
  localparam int unsigned M2_W      = 48;   // sum q*x*x

  // Fractional bits of the centre of gravity
  localparam int unsigned COG_FRAC  = 6;

  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [PAD_W-1:0] pad;
  } chan_t;

  // Token between extractor and peak finder: one gain-corrected sample, or
  // the end of a channel (eoc), which may also close the event (eoe).
  typedef struct packed {
    logic              eoc;
    logic              eoe;
    chan_t             ch;
    logic [TIME_W-1:0] t;
    logic [Q_W-1:0]    q;
  } sample_tok_t;

  // Token between peak finder and merger: one time-direction candidate (a
  // charge peak on one pad) or an end-of-channel marker.
  typedef struct packed {
    logic              eoc;
    logic              eoe;
    chan_t             ch;
    logic [TIME_W-1:0] tpk;   // time bin of the charge maximum
    logic [Q_W-1:0]    qmax;  // largest sample charge
    logic [QSUM_W-1:0] q;     // sum q
    logic [M1_W-1:0]   qt;    // sum q*t
    logic [M2_W-1:0]   qt2;   // sum q*t*t
  } cand_tok_t;

  // Token between merger and centre-of-gravity unit: a finished cluster's
  // moments, or the end-of-event marker (eoe) with no cluster.
  typedef struct packed {
    logic              eoe;
    logic [ROW_W-1:0]  row;
    logic [Q_W-1:0]    qmax;
    logic [QSUM_W-1:0] q;
    logic [M1_W-1:0]   qp;
    logic [M2_W-1:0]   qp2;
    logic [M1_W-1:0]   qt;
    logic [M2_W-1:0]   qt2;
  } moments_t;

  // Finished cluster. Positions carry COG_FRAC fractional bits, variances
  // 2*COG_FRAC fractional bits.
  typedef struct packed {
    logic [ROW_W-1:0]              row;
    logic [PAD_W+COG_FRAC-1:0]     pad;
    logic [TIME_W+COG_FRAC-1:0]    t;
    logic [19:0]                   sig2_pad;
    logic [19:0]                   sig2_t;
    logic [QSUM_W-1:0]             q;
    logic [Q_W-1:0]                qmax;
  } cluster_t;  // 8+14+16+20+20+24+12 = 114 bits

  // Per-channel configuration of the C-RORC, as set by the host.
  typedef struct packed {
    logic              src_replay;     // 1: data come from the replay unit, 0: from the link
    logic              cf_enable;      // 1: run the cluster finder (channels < NUM_HWCF only)
    logic              replay_enable;
    logic              replay_loop;
    logic [31:0]       replay_start;   // word addresses in on-board memory
    logic [31:0]       replay_end;
    logic [31:0]       replay_period;  // cycles between replayed event starts
    logic [ADDR_W-1:0] buf_base;       // host event ring buffer
    logic [31:0]       buf_size;
    logic [31:0]       sw_rdptr;
    logic [ADDR_W-1:0] rep_base;       // host report ring
    logic [15:0]       rep_entries;
  } chan_cfg_t;

  localparam int unsigned CLUSTER_WORDS = 4; // 32-bit words per cluster on the output
  localparam logic [3:0]  TRAILER_TAG   = 4'hE;

endpackage
