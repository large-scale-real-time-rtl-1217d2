// tpc_pkg: types and constants shared by the TPC data-processing user logic.
//
// The pipeline carries, per optical link, a "link data stream" with two
// channels per clock cycle, and one "time info stream" common to all links.
// Each channel slot holds the 12-bit sample (the 10-bit SAMPA ADC value
// extended by two fractional bits, format I10F2), the channel's pedestal and
// threshold, and the flags Zero, StreamActive and Rejected. The time info
// stream holds Channel-ID, Bunch-Crossing, Sync-BC, Trigger-Type and the
// one-bit flags First TB, TB Start, TB End, Resync and ADC valid. A time-bin
// occupies 48 clock cycles at 240 MHz, of which 40 carry samples.
// The field names and the 12-bit sample follow the paper; the field widths
// of Bunch-Crossing (12), Sync-BC (12) and Trigger-Type (32), the
// configuration bus and the field order are this design's choices.
package tpc_pkg;

  localparam int unsigned NUM_LINKS      = 20;  // optical links per readout card
  localparam int unsigned CH_PER_LINK    = 80;  // channels per link
  localparam int unsigned TB_CYCLES      = 48;  // clock cycles per time-bin (240 MHz / 5 MHz)
  localparam int unsigned VALID_CYCLES   = 40;  // cycles per time-bin carrying samples
  localparam int unsigned BC_PER_ORBIT   = 3564;
  localparam int unsigned BC_PER_TB      = 8;   // 40 MHz bunch clock / 5 MHz sampling

  typedef logic [11:0] sample_t;           // I10F2

  typedef struct packed {
    sample_t     sample;
    logic [11:0] pedestal;                 // I10F2
    logic [11:0] threshold;                // I10F2
    logic        zero;
    logic        stream_active;
    logic        rejected;
  } chan_data_t;

  // two channels per cycle: index 0 = even channel 2*Channel-ID, 1 = odd
  typedef chan_data_t [1:0] link_data_t;

  typedef struct packed {
    logic [5:0]  channel_id;               // cycle index in the time-bin, 0..39
    logic [11:0] bunch_crossing;           // BC of the time-bin start
    logic [11:0] sync_bc;                  // BC at which the last SYNC was seen
    logic [31:0] trigger_type;             // OR of trigger bits seen during the time-bin
    logic        first_tb;
    logic        tb_start;
    logic        tb_end;
    logic        resync;
    logic        adc_valid;
  } time_info_t;

  // trigger-type bits used by this design (ALICE trigger word positions)
  localparam int unsigned TRG_ORBIT = 0;
  localparam int unsigned TRG_HB    = 1;

  // Configuration write bus shared by all parameter memories.
  typedef enum logic [2:0] {
    CFG_PEDESTAL  = 3'd0,   // data[11:0]  I10F2
    CFG_THRESHOLD = 3'd1,   // data[11:0]  I10F2
    CFG_INV_K     = 3'd2,   // data[7:0]   1/k_pad, I2F6
    CFG_K         = 3'd3,   // data[7:0]   k_pad,   I2F6
    CFG_ITF_KX    = 3'd4,   // data[31:0]  k_x, IEEE-754 single
    CFG_ITF_K2    = 3'd5    // data[31:0]  k_2, IEEE-754 single
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [4:0]  link;
    logic [5:0]  addr;      // Channel-ID
    logic        odd;       // 0: channel 2*addr, 1: channel 2*addr+1
    logic [31:0] data;
  } cfg_wr_t;

  // decoder -> aligner intermediate stream
  typedef struct packed {
    logic        valid;
    logic        tb_first;     // first pair of a time-bin (channels 0 and 1)
    logic [9:0]  s0;           // even channel
    logic [9:0]  s1;           // odd channel
  } dec_stream_t;

  // static control registers of the user logic
  typedef struct packed {
    logic [15:0] t_wait;          // resync: wait before the decoder reset
    logic [15:0] t_align;         // aligner: reference time to read-out
    logic        pg_enable;       // pattern generator
    logic [2:0]  pg_mode;
    logic [11:0] pg_const;
    logic [31:0] pg_lfsr_thresh;
    logic [19:0] cmc_offset;      // I12F8
    logic [7:0]  cmc_t1;          // signed ADC counts
    logic [7:0]  cmc_t2;          // signed ADC counts
    logic [10:0] cmc_match_dist;  // I7F4
    logic [3:0]  cmc_n_min;
    logic        cm_enable;       // apply the common-mode correction
    logic        ped_bypass;
    logic [11:0] sample_offset;   // I10F2
    logic        debug_en;
    logic [6:0]  debug_channel;
    logic        itf_bypass;
    logic [31:0] itf_offset;      // IEEE-754 single
    logic        zs_enable;
    logic        idc_enable;
    logic        idc_trig_mode;
    logic [7:0]  idc_n_orbits;
    logic [31:0] idc_trig_mask;
    logic        dp_enable;
    logic        dp_force_static;
  } ul_ctrl_t;

endpackage
