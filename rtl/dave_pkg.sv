// dave_pkg: types and constants shared by the DAVE trigger-card firmware.
//
// The card runs all of its firmware on one clock, the LHC bunch-crossing (BC)
// clock of about 40.08 MHz that the on-board clock multiplexer/PLL delivers.
// This package holds the board's fixed I/O counts (eight LEMO data inputs and
// outputs, 16 auxiliary-header and 32 daughter-card I/O pins), the host
// register-bus structs that connect the VME/USB interface to the register
// block, the register address map, the output/counter source codes and the
// configuration and status bundles that the register block exchanges with
// the functional blocks.
//
// The I/O counts follow the hardware description (8+8 LEMO, 4 LVDS + 12 LVTTL
// on the auxiliary header, 8 LVDS + 24 LVTTL on the 40-pin header). The
// register map, the bus structs, the default settings and the source codes
// are this design's own choices: the published description names a register
// block but does not list its registers.
package dave_pkg;

  // ---------------------------------------------------------------- board I/O
  localparam int unsigned N_LEMO   = 8;                   // LEMO data in / out
  localparam int unsigned N_AUX    = 16 + 32;             // aux header + 40-pin header
  localparam int unsigned N_IO     = N_LEMO + N_AUX;      // 56 inputs, 56 outputs
  localparam int unsigned N_LED    = 15;
  localparam int unsigned N_BKT    = 4;                   // leaky buckets (complex deadtime)
  localparam int unsigned N_CNT    = 4;                   // generic counters
  localparam int unsigned BCID_W   = 12;
  localparam int unsigned SRAM_AW  = 22;                  // 4M words
  localparam int unsigned SRAM_DW  = 16;                  // data lines wired to the FPGA

  // Fixed roles of the first LEMO inputs (this design's assignment).
  localparam int unsigned IN_TRIG  = 0;                   // external trigger
  localparam int unsigned IN_BUSY  = 1;                   // system BUSY
  localparam int unsigned IN_ORBIT = 2;                   // external orbit / BCR
  localparam int unsigned IN_ECR   = 3;                   // external ECR

  // ------------------------------------------------------------ register bus
  // One request is a single-cycle strobe; the slave answers with a one-cycle
  // ack (and read data) some cycles later. A master keeps one request open.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [7:0]  addr;     // 16-bit word address
    logic [15:0] wdata;
  } hbus_req_t;

  typedef struct packed {
    logic        ack;
    logic [15:0] rdata;
  } hbus_rsp_t;

  // ------------------------------------------------------------ register map
  localparam logic [7:0] R_ID        = 8'h00;  // RO  16'hDA7E
  localparam logic [7:0] R_VERSION   = 8'h01;  // RO
  localparam logic [7:0] R_SWITCH    = 8'h02;  // RO  {serial, modification}
  localparam logic [7:0] R_BOARD     = 8'h03;  // RO  {base A31-A24, prog reset, 3'b0, mode}
  localparam logic [7:0] R_CTRL      = 8'h04;  // RW  control bits, see CTRL_*
  localparam logic [7:0] R_PULSE     = 8'h05;  // WO  one-cycle commands, see PLS_*
  localparam logic [7:0] R_LED       = 8'h06;  // RW  [14:0]
  localparam logic [7:0] R_ORBIT_LEN = 8'h07;  // RW  BCs per orbit
  localparam logic [7:0] R_VETO      = 8'h08;  // RW  {after[7:0], before[7:0]}
  localparam logic [7:0] R_RND_LO    = 8'h09;  // RW  random-trigger threshold
  localparam logic [7:0] R_RND_HI    = 8'h0A;
  localparam logic [7:0] R_SIMPLE_DT = 8'h0B;  // RW  simple deadtime in BCs
  localparam logic [7:0] R_TRIG_MASK = 8'h0C;  // RW  trigger source enables, see TS_*
  localparam logic [7:0] R_TRIG_TYPE = 8'h0D;  // RW  8-bit trigger type
  localparam logic [7:0] R_ECR_PER   = 8'h0E;  // RW  periodic ECR interval in orbits
  localparam logic [7:0] R_BKT_EN    = 8'h0F;  // RW  leaky-bucket enables
  localparam logic [7:0] R_BKT_SIZE  = 8'h10;  // RW  0x10..0x13 bucket size
  localparam logic [7:0] R_BKT_RATE  = 8'h14;  // RW  0x14..0x17 BCs per leaked token
  localparam logic [7:0] R_CNT_SEL   = 8'h18;  // RW  4 x 4-bit counter sources
  localparam logic [7:0] R_PRST_FN   = 8'h19;  // RW  PLS_* commands issued by the programmable reset button
  localparam logic [7:0] R_IN_EN     = 8'h1C;  // RW  0x1C..0x1F input enables
  localparam logic [7:0] R_OUT_SEL   = 8'h20;  // RW  0x20..0x2D 4 x 4-bit sources each
  localparam logic [7:0] R_OUT_EN    = 8'h30;  // RW  0x30..0x33 output enables
  localparam logic [7:0] R_OUT_LVL   = 8'h34;  // RW  0x34..0x37 static output levels
  localparam logic [7:0] R_SEQ_ADR_L = 8'h38;  // RW  SRAM host pointer (write loads it)
  localparam logic [7:0] R_SEQ_ADR_H = 8'h39;
  localparam logic [7:0] R_SEQ_DATA  = 8'h3A;  // W: SRAM write + increment, R: last read word
  localparam logic [7:0] R_SEQ_ST_L  = 8'h3B;  // RW  playback start address
  localparam logic [7:0] R_SEQ_ST_H  = 8'h3C;
  localparam logic [7:0] R_SEQ_LEN_L = 8'h3D;  // RW  playback length in words (0 = 4M)
  localparam logic [7:0] R_SEQ_LEN_H = 8'h3E;
  localparam logic [7:0] R_STATUS    = 8'h40;  // RO  see ST_*
  localparam logic [7:0] R_L1ID_L    = 8'h41;  // RO  {ECR count, 24-bit event count}
  localparam logic [7:0] R_L1ID_H    = 8'h42;
  localparam logic [7:0] R_BCID      = 8'h43;
  localparam logic [7:0] R_L1A_CNT   = 8'h44;  // RO  0x44/0x45
  localparam logic [7:0] R_LOST_CNT  = 8'h46;  // RO  0x46/0x47 triggers refused
  localparam logic [7:0] R_ORB_CNT   = 8'h48;  // RO  0x48/0x49
  localparam logic [7:0] R_SEQ_WP    = 8'h4A;  // RO  0x4A/0x4B record write pointer
  localparam logic [7:0] R_IN_STATE  = 8'h4C;  // RO  0x4C..0x4F synchronised inputs
  localparam logic [7:0] R_GCNT      = 8'h50;  // RO  0x50..0x57 generic counters

  localparam logic [15:0] ID_VALUE      = 16'hDA7E;
  localparam logic [15:0] VERSION_VALUE = 16'h0100;

  // R_CTRL bits
  localparam int unsigned CTRL_CLK80     = 0;  // on-board clock ~80 MHz instead of ~40 MHz
  localparam int unsigned CTRL_TRIG_EN   = 1;
  localparam int unsigned CTRL_ORBIT_EXT = 2;  // orbit from input IN_ORBIT
  localparam int unsigned CTRL_BUSY_GATE = 3;
  localparam int unsigned CTRL_BCR_VETO  = 4;
  localparam int unsigned CTRL_ECR_PER   = 5;
  localparam int unsigned CTRL_SEQ_STOP  = 6;  // BUSY stops recording
  localparam int unsigned CTRL_SEQ_LOOP  = 7;
  localparam int unsigned CTRL_SEQ_MODE  = 8;  // [9:8]
  localparam int unsigned CTRL_ECR_EXT   = 10; // ECR from input IN_ECR

  // R_PULSE bits
  localparam int unsigned PLS_ECR     = 0;
  localparam int unsigned PLS_TRIG    = 1;
  localparam int unsigned PLS_OUT     = 2;
  localparam int unsigned PLS_CNT_CLR = 3;
  localparam int unsigned PLS_SEQ_RD  = 4;

  // R_STATUS bits
  localparam int unsigned ST_DEAD     = 0;
  localparam int unsigned ST_SIMPLE   = 1;
  localparam int unsigned ST_COMPLEX  = 2;
  localparam int unsigned ST_VETO     = 3;
  localparam int unsigned ST_BUSY     = 4;
  localparam int unsigned ST_REC      = 5;
  localparam int unsigned ST_PLAY     = 6;
  localparam int unsigned ST_WRAP     = 7;
  localparam int unsigned ST_HOST_BSY = 8;
  localparam int unsigned ST_HOST_VLD = 9;
  localparam int unsigned ST_UNDERRUN = 10;
  localparam int unsigned ST_BUSY_BLK = 11;

  // Trigger source bits (R_TRIG_MASK)
  localparam int unsigned TS_RANDOM = 0;
  localparam int unsigned TS_EXT    = 1;
  localparam int unsigned TS_SW     = 2;
  localparam int unsigned TS_PLAY   = 3;

  typedef enum logic [1:0] {
    SEQ_IDLE   = 2'd0,
    SEQ_RECORD = 2'd1,
    SEQ_PLAY   = 2'd2
  } seq_mode_e;

  // Internal signals that can be routed to an output or counted.
  typedef enum logic [3:0] {
    SRC_ZERO    = 4'd0,
    SRC_L1A     = 4'd1,
    SRC_BCR     = 4'd2,
    SRC_ECR     = 4'd3,
    SRC_RANDOM  = 4'd4,
    SRC_DEAD    = 4'd5,
    SRC_VETO    = 4'd6,
    SRC_BUSY    = 4'd7,
    SRC_PB_L1A  = 4'd8,
    SRC_PB_BCR  = 4'd9,
    SRC_PB_ECR  = 4'd10,
    SRC_SWPULSE = 4'd11,
    SRC_LEVEL   = 4'd12,  // the output's static level bit
    SRC_REC     = 4'd13,
    SRC_LOST    = 4'd14,
    SRC_ONE     = 4'd15
  } src_e;

  // Record word: {ECR, BCR, L1A, delta}, delta = BCs since the previous word.
  localparam int unsigned SEQ_DELTA_W = 13;
  localparam logic [SEQ_DELTA_W-1:0] SEQ_DELTA_MAX = '1;

  // ---------------------------------------------------- configuration bundle
  typedef struct packed {
    logic                       clk_sel_80;
    logic                       trig_en;
    logic                       orbit_ext;
    logic                       busy_gate;
    logic                       bcr_veto;
    logic                       ecr_periodic;
    logic                       ecr_ext;
    logic                       seq_stop_on_busy;
    logic                       seq_loop;
    logic [1:0]                 seq_mode;
    logic [N_LED-1:0]           leds;
    logic [BCID_W-1:0]          orbit_len;
    logic [7:0]                 veto_before;
    logic [7:0]                 veto_after;
    logic [31:0]                rnd_thresh;
    logic [7:0]                 simple_dt;
    logic [3:0]                 trig_mask;
    logic [7:0]                 trig_type;
    logic [15:0]                ecr_period;
    logic [N_BKT-1:0]           bkt_en;
    logic [N_BKT-1:0][7:0]      bkt_size;
    logic [N_BKT-1:0][15:0]     bkt_rate;
    logic [N_CNT-1:0][3:0]      cnt_sel;
    logic [N_IO-1:0]            in_en;
    logic [N_IO-1:0][3:0]       out_sel;
    logic [N_IO-1:0]            out_en;
    logic [N_IO-1:0]            out_lvl;
    logic [SRAM_AW-1:0]         seq_start;
    logic [SRAM_AW-1:0]         seq_len;
  } cfg_t;

  // One-cycle commands from host writes.
  typedef struct packed {
    logic                ecr;
    logic                trig;
    logic                out;
    logic                cnt_clr;
    logic                seq_rd;        // SRAM read at host pointer
    logic                seq_wr;        // SRAM write of seq_wdata at host pointer
    logic [15:0]         seq_wdata;
    logic                seq_ptr_ld;    // load host pointer with seq_ptr
    logic [SRAM_AW-1:0]  seq_ptr;
  } cmd_t;

  // Status gathered from the functional blocks.
  typedef struct packed {
    logic [15:0]              flags;        // ST_* bits
    logic [31:0]              l1id;
    logic [BCID_W-1:0]        bcid;
    logic [31:0]              l1a_cnt;
    logic [31:0]              lost_cnt;
    logic [31:0]              orbit_cnt;
    logic [SRAM_AW-1:0]       seq_wptr;
    logic [SRAM_AW-1:0]       seq_hptr;
    logic [15:0]              seq_rdata;
    logic [N_IO-1:0]          in_state;
    logic [N_CNT-1:0][31:0]   gcnt;
  } status_t;

endpackage
