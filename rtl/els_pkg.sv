// els_pkg: types and constants shared by the ELS pixel-preprocessing FPGA.
//
// The camera (CXG) has 6400 pixels (80 x 80) read out over 8 serial links.
// Each photon arrives as a 32-bit raw word; the FPGA derives from it an
// energy band (one of 8), the energy strips (of 4) it belongs to, and a
// detector zone (one of 9), and builds a 16-bit preprocessed photon holding
// the pixel number and the energy band. Those counts (8 links, 8 bands,
// 4 strips, 9 zones, 36 counters, 80 x 80 pixels, 32-bit raw and 16-bit
// preprocessed photons) follow the paper. The bit layout of the raw word,
// the register map, the pointer-RAM map and the AHB subset are this
// design's own choices.
package els_pkg;

  localparam int unsigned N_LINKS  = 8;
  localparam int unsigned N_BANDS  = 8;
  localparam int unsigned N_STRIPS = 4;
  localparam int unsigned N_ZONES  = 9;
  localparam int unsigned N_COUNTERS = N_STRIPS * N_ZONES;   // 36
  localparam int unsigned DET_SIDE = 80;
  localparam int unsigned N_PIXELS = DET_SIDE * DET_SIDE;    // 6400

  // Raw photon as delivered by a camera link (field layout assumed).
  typedef struct packed {
    logic [12:0] pixel;    // 0 .. 6399, pixel = 80*y + x
    logic [11:0] energy;   // pulse height
    logic [6:0]  tstamp;   // fine time stamp, carried through untouched
  } raw_photon_t;

  // Raw photon tagged with the link it came in on.
  typedef struct packed {
    logic [2:0]  link;
    raw_photon_t ph;
  } tagged_photon_t;

  // 16-bit preprocessed photon: pixel number and energy band.
  typedef struct packed {
    logic [12:0] pixel;
    logic [2:0]  eband;
  } prep_photon_t;

  // Result of the classification of one photon.
  typedef struct packed {
    logic [2:0]  eband;
    logic [3:0]  strips;   // bit s set: photon belongs to energy strip s
    logic [3:0]  zone;     // 0 .. 8
    logic [12:0] pixel;
  } class_t;

  // Configuration written by the CPU through the control/status registers.
  typedef struct packed {
    logic                 acq;          // acquisition mode
    logic                 layer;        // shadowgram layer being filled (hidden layer)
    logic [7:0]           link_en;
    logic [7:0]           emu_en;
    logic [6:0][11:0]     thr;          // thr[i] = lower energy bound of band i+1
    logic [7:0][3:0]      strip_map;    // strip_map[b] = strips containing band b
    logic [6:0]           zone_x1, zone_x2, zone_y1, zone_y2;
    logic [31:0]          frame_cycles; // clock cycles per time frame
    logic [15:0]          swap_frames;  // time frames per shadowgram swap period
    logic [31:0]          emu_word;
    logic [15:0]          emu_period;   // link bit slots between emulated photons
    logic [1:0]           irq_mask;
  } cfg_t;

  // AHB-Lite subset: single transfers, no bursts, no protection signals.
  typedef enum logic [1:0] {HT_IDLE = 2'b00, HT_BUSY = 2'b01, HT_NONSEQ = 2'b10, HT_SEQ = 2'b11} htrans_e;
  localparam logic [2:0] HSIZE_HALF = 3'b001;
  localparam logic [2:0] HSIZE_WORD = 3'b010;

  typedef struct packed {
    htrans_e     htrans;
    logic [31:0] haddr;
    logic        hwrite;
    logic [2:0]  hsize;
    logic [31:0] hwdata;
  } ahb_m2s_t;

  typedef struct packed {
    logic        hready;
    logic        hresp;
    logic [31:0] hrdata;
  } ahb_s2m_t;

  // Slave address map (byte address bits [9:8] select the region).
  localparam logic [1:0] REGION_REGS = 2'd0;
  localparam logic [1:0] REGION_RPTR = 2'd1;
  localparam logic [1:0] REGION_CNT  = 2'd2;
  localparam logic [1:0] REGION_WC   = 2'd3;

  // Control/status register word indices.
  localparam logic [5:0] R_CTRL        = 6'd0;
  localparam logic [5:0] R_STATUS      = 6'd1;
  localparam logic [5:0] R_IRQ_ACK     = 6'd2;
  localparam logic [5:0] R_IRQ_MASK    = 6'd3;
  localparam logic [5:0] R_THR01       = 6'd4;
  localparam logic [5:0] R_THR23       = 6'd5;
  localparam logic [5:0] R_THR45       = 6'd6;
  localparam logic [5:0] R_THR6        = 6'd7;
  localparam logic [5:0] R_STRIP_MAP   = 6'd8;
  localparam logic [5:0] R_ZONE_X      = 6'd9;
  localparam logic [5:0] R_ZONE_Y      = 6'd10;
  localparam logic [5:0] R_FRAME_CYC   = 6'd11;
  localparam logic [5:0] R_SWAP_FRAMES = 6'd12;
  localparam logic [5:0] R_FRAME_COUNT = 6'd13;
  localparam logic [5:0] R_EMU_WORD    = 6'd14;
  localparam logic [5:0] R_EMU_PERIOD  = 6'd15;

  // Pointer-RAM word indices (64 words of 32 bits, SDRAM byte addresses).
  localparam logic [5:0] RP_RAW_BASE = 6'd0;   // + link
  localparam logic [5:0] RP_RAW_END  = 6'd8;   // + link, exclusive
  localparam logic [5:0] RP_RAW_CUR  = 6'd16;  // + link
  localparam logic [5:0] RP_PH_BASE  = 6'd24;
  localparam logic [5:0] RP_PH_END   = 6'd25;
  localparam logic [5:0] RP_PH_CUR   = 6'd26;
  localparam logic [5:0] RP_SHADOW   = 6'd32;  // + 4*layer + strip

  // Word-count indices: 0..7 raw rings, 8 photon ring.
  localparam int unsigned N_WC = N_LINKS + 1;

endpackage
