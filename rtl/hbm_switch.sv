// hbm_switch -- one N x N HBM switch running Parallel Frame Interleaving.
//
// Data path, input to output:
//   lane_merge   alpha waveguides -> one 128-byte/cycle packet stream per input
//   input_port   per-output queues, 4 KB batches, batch FIFO      (block 1)
//   cyclic_xbar  input side: batch slice s of input i to module s
//   tail_sram    N modules, per-output queues, 512 KB frames      (block 2)
//   hbm_ctrl     bank-interleaved frame writes and cyclic reads   (blocks 3, 4)
//   [B HBM4 stacks, outside: hbm_* ports, T = 8N channels]
//   head_sram    N modules, per-output queues                      (block 5)
//   cyclic_xbar  output side: module m to output (m - ph) mod N
//   output_port  packets back out of batches, flow hash            (block 6)
//   lane_split   packets over alpha waveguides and W wavelengths
// A free-running counter ph (0..N-1) is the common phase of both crossbars,
// the input ports' slots and the head SRAM's read pattern. Everything runs on
// one clock (2.5 GHz in the reference design); the HBM interface is given at
// that clock, 256 bits per channel per cycle, i.e. before the PHY's 4:1
// serialisation onto 64 pins at 10 Gb/s.
//
// Default sizes are the reference design's: N = 16, 4 waveguides per port,
// 2048-bit SRAM words, 128-batch frames, 128 channels, 64 banks, groups of 4.
//
// Lint notes: statistics outputs of the sub-blocks that this switch does not
// export (batches, frames and words per port, idle read turns) are left
// unconnected on purpose.
module hbm_switch
  import pfi_pkg::*;
#(
  parameter int N             = 16,
  parameter int NL            = ALPHA,
  parameter int SEG           = pfi_pkg::SEG_CYC,
  parameter int ROW_BITS      = 14,
  parameter int IN_Q_BATCHES  = 2,
  parameter int TAIL_Q_FRAMES = 2,
  parameter int HEAD_Q_FRAMES = 2,
  parameter int OUT_BATCHES   = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fiber_word_t     fib_i  [N][NL],
  output fiber_word_t     fib_o  [N][NL],
  output hbm_row_cmd_t    hbm_row_o,
  output hbm_col_cmd_t    hbm_col_o,
  output logic [CH_W-1:0] hbm_wdata_o [N*CH_PER_MOD],
  input  logic [CH_W-1:0] hbm_rdata_i [N*CH_PER_MOD],
  input  logic            hbm_rvalid_i,
  output logic [31:0]     drops_o,         // packets dropped at the inputs
  output logic [31:0]     frames_wr_o,
  output logic [31:0]     frames_rd_o,
  output logic [31:0]     pkts_out_o
);
  localparam int FB = SEG * GAMMA;          // batches per frame
  localparam int PW = $clog2(N);

  logic [PW-1:0] ph;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ph <= '0;
    else        ph <= (ph == PW'(N - 1)) ? '0 : ph + 1'b1;

  line_word_t        line_in  [N];
  line_word_t        line_out [N];
  slice_t            in_sl [N], tail_wr [N], head_rd [N], out_sl [N];
  logic [N-1:0]      bstart, tail_space, head_space, out_ready, out_grant;
  logic [DEST_W-1:0] bdest [N];
  logic [31:0]       drops_m [N], drops_p [N], pkts [N];
  logic [NL-1:0]     lane_space [N];

  logic              fr_valid, fr_pop, tail_rd_en, fr_done, head_resv, head_wr_en;
  logic [DEST_W-1:0] fr_dest, tail_rd_dest, fr_done_dest, head_resv_dest, head_wr_dest;
  logic [SLICE_W-1:0] tail_rdata [N];
  logic [SLICE_W-1:0] head_wdata [N];

  for (genvar i = 0; i < N; i++) begin : g_in
    lane_merge #(.NL(NL)) u_merge (
      .clk, .rst_n, .fib_i (fib_i[i]), .line_o (line_in[i]), .drops_o (drops_m[i]));
    input_port #(.N(N), .Q_BATCHES(IN_Q_BATCHES), .MY_ID(i)) u_in (
      .clk, .rst_n, .line_i (line_in[i]), .ph_i (ph), .tail_space_i (tail_space),
      .bstart_o (bstart[i]), .bdest_o (bdest[i]), .slice_o (in_sl[i]),
      .drops_o (drops_p[i]), .batches_o ());
  end

  cyclic_xbar #(.N(N), .DIR(1'b0)) u_xbar_in (.ph_i (ph), .in_i (in_sl), .out_o (tail_wr));

  tail_sram #(.N(N), .FRAME_BATCHES(FB), .Q_FRAMES(TAIL_Q_FRAMES)) u_tail (
    .clk, .rst_n, .wr_i (tail_wr), .bstart_i (bstart), .bdest_i (bdest),
    .space_o (tail_space), .fr_valid_o (fr_valid), .fr_dest_o (fr_dest), .fr_pop_i (fr_pop),
    .rd_en_i (tail_rd_en), .rd_dest_i (tail_rd_dest), .rdata_o (tail_rdata),
    .fr_done_i (fr_done), .fr_done_dest_i (fr_done_dest), .frames_o ());

  hbm_ctrl #(.N(N), .SEG(SEG), .ROW_BITS(ROW_BITS)) u_ctrl (
    .clk, .rst_n,
    .fr_valid_i (fr_valid), .fr_dest_i (fr_dest), .fr_pop_o (fr_pop),
    .tail_rd_en_o (tail_rd_en), .tail_rd_dest_o (tail_rd_dest), .tail_rdata_i (tail_rdata),
    .fr_done_o (fr_done), .fr_done_dest_o (fr_done_dest),
    .head_space_i (head_space), .head_resv_o (head_resv), .head_resv_dest_o (head_resv_dest),
    .head_wr_en_o (head_wr_en), .head_wr_dest_o (head_wr_dest), .head_wdata_o (head_wdata),
    .hbm_row_o, .hbm_col_o, .hbm_wdata_o, .hbm_rdata_i, .hbm_rvalid_i,
    .frames_wr_o, .frames_rd_o, .idle_turns_o ());

  head_sram #(.N(N), .FRAME_BATCHES(FB), .Q_FRAMES(HEAD_Q_FRAMES)) u_head (
    .clk, .rst_n, .ph_i (ph),
    .wr_en_i (head_wr_en), .wr_dest_i (head_wr_dest), .wdata_i (head_wdata),
    .resv_i (head_resv), .resv_dest_i (head_resv_dest), .space_o (head_space),
    .out_ready_i (out_ready), .grant_o (out_grant), .rd_o (head_rd));

  cyclic_xbar #(.N(N), .DIR(1'b1)) u_xbar_out (.ph_i (ph), .in_i (head_rd), .out_o (out_sl));

  for (genvar o = 0; o < N; o++) begin : g_out
    output_port #(.N(N), .BATCHES(OUT_BATCHES), .NLANES(NL)) u_out (
      .clk, .rst_n, .slice_i (out_sl[o]), .grant_i (out_grant[o]), .ready_o (out_ready[o]),
      .lane_space_i (lane_space[o]), .line_o (line_out[o]), .pkts_o (pkts[o]));
    lane_split #(.NL(NL)) u_split (
      .clk, .rst_n, .line_i (line_out[o]), .space_o (lane_space[o]), .fib_o (fib_o[o]),
      .words_o ());
  end

  always_comb begin
    drops_o    = '0;
    pkts_out_o = '0;
    for (int i = 0; i < N; i++) begin
      drops_o    = drops_o + drops_m[i] + drops_p[i];
      pkts_out_o = pkts_out_o + pkts[i];
    end
  end
endmodule
