// pfi_pkg -- constants and types shared by the split-parallel router and its
// HBM switches (Parallel Frame Interleaving, PFI).
//
// The numbers follow the reference design: 16 ribbons of 64 fibres, 16 WDM
// wavelengths of 40 Gb/s per fibre, 16 HBM switches, a 2.5 GHz switch clock,
// 2048-bit SRAM words, 4 KB batches, 512 KB frames, 128 HBM channels, 64 banks,
// bank interleaving groups of 4 banks and 1 KB segments per channel.
// Data-path widths are fixed here so that every block and testbench agrees on
// the packet and slice formats; the counts (ports, depths, frame length) are
// module parameters.
//
// Internal byte-stream format (this design's choice, the reference design does
// not define one): every 4 KB batch starts with a 4-byte batch header whose
// byte 0 is the number of the input that built it; every packet is preceded by
// a 4-byte descriptor whose bytes 0-1 hold the packet length; packets are
// stored rounded up to a multiple of 4 bytes. All fields are little-endian:
// byte b of a word sits at bits [8b+7:8b].
//
// Lint notes: T_CH is kept to document the reference channel count even
// though modules derive it as N x channels per module; flow_hash reads only
// the header bytes of the 1024-bit word, the rest of the word is unused by
// design.
package pfi_pkg;

  // ---- reference-design dimensions ----
  localparam int N_PORTS      = 16;    // N: ribbons, switch ports
  localparam int F_FIBERS     = 64;    // F: fibres per ribbon
  localparam int H_SWITCHES   = 16;    // H: parallel HBM switches
  localparam int W_LAMBDA     = 16;    // W: wavelengths per fibre
  localparam int ALPHA        = F_FIBERS / H_SWITCHES;   // 4 waveguides per switch port

  // ---- data-path widths at the 2.5 GHz clock ----
  localparam int FIBER_W      = 256;   // W*R = 640 Gb/s per waveguide
  localparam int FIBER_BYTES  = FIBER_W / 8;
  localparam int LINE_W       = 1024;  // P = 2.56 Tb/s per switch port
  localparam int LINE_BYTES   = LINE_W / 8;
  localparam int SLICE_W      = 2048;  // SRAM word = batch slice = k/N
  localparam int SLICE_BYTES  = SLICE_W / 8;
  localparam int CH_PER_MOD   = 8;     // T/N HBM channels behind one SRAM module
  localparam int CH_W         = SLICE_W / CH_PER_MOD;  // 256 bits per channel per cycle

  // ---- HBM organisation ----
  localparam int T_CH         = 128;   // channels of B=4 HBM4 stacks
  localparam int L_BANKS      = 64;
  localparam int GAMMA        = 4;     // banks per interleaving group
  localparam int SEG_BYTES    = 1024;  // S, per channel
  localparam int SEG_CYC      = SEG_BYTES * 8 / CH_W;   // 32 cycles per segment
  localparam int FRAME_BATCHES = GAMMA * SEG_CYC;       // K/k = 128

  localparam int DEST_W       = 4;     // wide enough for N_PORTS
  localparam int LEN_W        = 16;
  localparam int HASH_W       = 16;
  localparam int MAX_PKT      = 2048;  // largest packet in bytes (assumed)
  localparam int HDR_BYTES    = 4;     // batch header and packet descriptor size

  // Packet word on one waveguide (after O/E), 32 bytes per cycle.
  typedef struct packed {
    logic                 valid;
    logic                 sop;
    logic                 eop;
    logic [5:0]           nbytes;   // 1..32 valid bytes, from byte 0
    logic [DEST_W-1:0]    dest;     // output port, valid with sop
    logic [LEN_W-1:0]     len;      // packet length in bytes, valid with sop
    logic [3:0]           lambda;   // egress wavelength tag (egress only)
    logic [FIBER_W-1:0]   data;
  } fiber_word_t;

  // Packet word on a switch port, 128 bytes per cycle.
  typedef struct packed {
    logic                 valid;
    logic                 sop;
    logic                 eop;
    logic [7:0]           nbytes;   // 1..128
    logic [DEST_W-1:0]    dest;
    logic [LEN_W-1:0]     len;
    logic [HASH_W-1:0]    hash;     // flow hash (egress only)
    logic [LINE_W-1:0]    data;
  } line_word_t;

  // Batch slice on a cyclical crossbar.
  typedef struct packed {
    logic                 valid;
    logic                 last;     // slice N-1 of its batch
    logic [DEST_W-1:0]    dest;
    logic [SLICE_W-1:0]   data;
  } slice_t;

  // HBM row commands (ACT/PRE) and column commands (WR/RD), issued to all
  // T channels at once.
  typedef enum logic [1:0] {ROW_NOP = 2'd0, ROW_ACT = 2'd1, ROW_PRE = 2'd2} row_op_e;
  typedef enum logic [1:0] {COL_NOP = 2'd0, COL_WR = 2'd1, COL_RD = 2'd2} col_op_e;

  typedef struct packed {
    row_op_e     op;
    logic [5:0]  bank;
    logic [13:0] row;
  } hbm_row_cmd_t;

  typedef struct packed {
    col_op_e     op;
    logic [5:0]  bank;
    logic [5:0]  col;     // 256-bit beat within the row
  } hbm_col_cmd_t;

  // Round a byte count up to a multiple of 4.
  function automatic logic [LEN_W-1:0] pad4(input logic [LEN_W-1:0] n);
    return (n + LEN_W'(3)) & ~LEN_W'(3);
  endfunction

  // Flow hash over the IPv4 5-tuple (protocol byte 9, addresses bytes 12-19,
  // ports bytes 20-23, header without options). XOR-folding of the 104 key
  // bits with a rotate per 16-bit piece.
  function automatic logic [HASH_W-1:0] flow_hash(input logic [LINE_W-1:0] d);
    logic [103:0] key;
    logic [HASH_W-1:0] h;
    key = {d[9*8 +: 8], d[12*8 +: 96]};
    h = 16'h9e37;
    for (int i = 0; i < 7; i++) begin
      logic [15:0] piece;
      piece = (i == 6) ? {8'h00, key[96 +: 8]} : key[16*i +: 16];
      h = {h[10:0], h[15:11]} ^ piece ^ 16'(i * 16'h3c6b);
    end
    return h;
  endfunction

endpackage
