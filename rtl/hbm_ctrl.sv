// hbm_ctrl -- Parallel Frame Interleaving (PFI) controller of one HBM switch.
//
// Time is divided into frame interleaving cycles of CYC = 2*GAMMA*SEG_CYC +
// G_WTR + G_RTW clock cycles. Each cycle has a write phase (tc = 0 ..
// GAMMA*SEG_CYC-1) in which the frame at the head of the tail SRAM's frame FIFO
// is written, then, after G_WTR idle cycles, a read phase (tc = RB ..) in which
// one frame is read for the output whose cyclic turn it is, then G_RTW idle
// cycles. A phase consists of GAMMA segments: segment s moves SEG_CYC beats of
// 256 bits on every one of the T channels in parallel, all into bank
// (first bank of the group + s). A bank is activated one segment ahead of its
// data (ACT at data start - SEG_CYC) and precharged one cycle after its data
// (PRE at data end + 1), so the GAMMA banks of a group are opened and closed in
// a staggered way while the data bus never idles inside a phase (the pattern of
// Fig. 4 of the reference design). SEG_CYC and the gaps are even, so ACT always
// falls on an even and PRE on an odd cycle of the phase: the single row
// command bus never carries two commands at once. With ACTs SEG_CYC cycles
// apart, at most four fall in any window shorter than 4*SEG_CYC cycles (51.2
// ns at the defaults), which is the four-activation rule the segment size is
// chosen for.
//
// No bookkeeping: the n-th frame of output j goes to bank interleaving group
// n mod (L/GAMMA); within the bank it takes segment-size sub-row
// (n div G) mod SUBROWS of row j*REGION_ROWS + (n div (G*SUBROWS)) mod
// REGION_ROWS, so each output owns a static HBM region and two counters per
// output (frames written, frames read) are the whole state. Frames are read in
// the order they were written, which keeps packets in order.
//
// Interfaces: tail SRAM (frame FIFO pop, lockstep slice reads one cycle before
// each write beat, fr_done when a frame has been read out), head SRAM (frame
// room reservation at the read decision, one write of N slices per returned
// beat), HBM (row and column commands common to all channels, T x 256-bit
// write data, read data with rvalid after the memory's read latency).
// The read latency is not assumed: returned beats are matched by order.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. The address helpers compute in the frame-counter width
// and cast to the bank, row and column widths, which is intended too. The
// integer pointers of the command loop use only their low bits.
// The parameter GAMMA shares its name with the package constant that is its
// default; the parameter is the one used.
module hbm_ctrl
  import pfi_pkg::*;
#(
  parameter int N             = 16,
  parameter int GAMMA         = pfi_pkg::GAMMA,
  parameter int L             = L_BANKS,
  parameter int SEG           = pfi_pkg::SEG_CYC,
  parameter int ROW_BITS      = 14,
  parameter int SUBROWS       = 2,
  parameter int G_WTR         = 2,
  parameter int G_RTW         = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // tail SRAM
  input  logic                  fr_valid_i,
  input  logic [DEST_W-1:0]     fr_dest_i,
  output logic                  fr_pop_o,
  output logic                  tail_rd_en_o,
  output logic [DEST_W-1:0]     tail_rd_dest_o,
  input  logic [SLICE_W-1:0]    tail_rdata_i  [N],
  output logic                  fr_done_o,
  output logic [DEST_W-1:0]     fr_done_dest_o,
  // head SRAM
  input  logic [N-1:0]          head_space_i,
  output logic                  head_resv_o,
  output logic [DEST_W-1:0]     head_resv_dest_o,
  output logic                  head_wr_en_o,
  output logic [DEST_W-1:0]     head_wr_dest_o,
  output logic [SLICE_W-1:0]    head_wdata_o  [N],
  // HBM channels (all T = N*CH_PER_MOD channels share the commands)
  output hbm_row_cmd_t          hbm_row_o,
  output hbm_col_cmd_t          hbm_col_o,
  output logic [CH_W-1:0]       hbm_wdata_o   [N*CH_PER_MOD],
  input  logic [CH_W-1:0]       hbm_rdata_i   [N*CH_PER_MOD],
  input  logic                  hbm_rvalid_i,
  // statistics
  output logic [31:0]           frames_wr_o,
  output logic [31:0]           frames_rd_o,
  output logic [31:0]           idle_turns_o
);
  localparam int T           = N * CH_PER_MOD;
  localparam int G           = L / GAMMA;               // interleaving groups
  localparam int PH          = GAMMA * SEG;              // beats per phase = frame slice words
  localparam int CYC         = 2 * PH + G_WTR + G_RTW;
  localparam int RB          = PH + G_WTR;               // first read beat
  localparam int REGION_ROWS = (1 << ROW_BITS) / N;
  localparam int CAP         = G * SUBROWS * REGION_ROWS; // frames per output region
  localparam int NW          = $clog2(CAP);
  localparam int TW          = $clog2(CYC);
  localparam int QW          = $clog2(N);

  if (SEG % 2 != 0 || G_WTR % 2 != 0 || G_RTW < 2 || G_RTW % 2 != 0) begin : g_bad_timing
    $error("hbm_ctrl: SEG and G_WTR must be even, G_RTW even and >= 2");
  end

  logic [TW-1:0]     tc;
  logic [NW-1:0]     wn [N];        // frames written per output (mod CAP)
  logic [NW-1:0]     rn [N];        // frames read per output
  logic [NW:0]       cnt [N];       // frames held in HBM per output
  logic [QW-1:0]     rturn;         // output whose read turn comes next

  logic              wv, rv;        // current write / read frame valid
  logic [DEST_W-1:0] wdest, rdest;
  logic [NW-1:0]     wfn, rfn;      // frame numbers

  // address of frame n of output j
  function automatic logic [5:0] group_bank0(input logic [NW-1:0] n);
    return 6'((n % NW'(G)) * GAMMA);
  endfunction
  function automatic logic [13:0] frame_row(input logic [DEST_W-1:0] j, input logic [NW-1:0] n);
    return 14'(int'(j) * REGION_ROWS + int'((n / NW'(G * SUBROWS)) % NW'(REGION_ROWS)));
  endfunction
  function automatic logic [5:0] frame_col0(input logic [NW-1:0] n);
    return 6'(((n / NW'(G)) % NW'(SUBROWS)) * SEG);
  endfunction

  // decision points
  logic wdec, rdec, wdo, rdo;
  assign wdec = (tc == TW'(CYC - SEG - 1));
  assign rdec = (tc == TW'(RB - SEG - 1));
  assign wdo  = wdec && fr_valid_i && (cnt[fr_dest_i] != (NW+1)'(CAP));
  assign rdo  = rdec && (cnt[rturn] != '0) && head_space_i[rturn];

  assign fr_pop_o         = wdo;
  assign head_resv_o      = rdo;
  assign head_resv_dest_o = rturn;

  // ---- row command bus ----
  always_comb begin
    hbm_row_o = '{op: ROW_NOP, bank: '0, row: '0};
    for (int k = 0; k < GAMMA; k++) begin
      int wa, wp, ra, rp;
      wa = (k * SEG - SEG + CYC) % CYC;
      wp = k * SEG + SEG + 1;
      ra = RB + k * SEG - SEG;
      rp = RB + k * SEG + SEG + 1;
      if (wv && tc == TW'(wa)) hbm_row_o = '{op: ROW_ACT, bank: group_bank0(wfn) + 6'(k), row: frame_row(wdest, wfn)};
      if (wv && tc == TW'(wp)) hbm_row_o = '{op: ROW_PRE, bank: group_bank0(wfn) + 6'(k), row: '0};
      if (rv && tc == TW'(ra)) hbm_row_o = '{op: ROW_ACT, bank: group_bank0(rfn) + 6'(k), row: frame_row(rdest, rfn)};
      if (rv && tc == TW'(rp)) hbm_row_o = '{op: ROW_PRE, bank: group_bank0(rfn) + 6'(k), row: '0};
    end
  end

  // ---- column commands, issued one cycle ahead and registered ----
  // beat index of the column command that goes out next cycle
  logic [TW-1:0] tn;
  logic          w_issue, r_issue;
  int            wb, rbt;
  always_comb begin
    tn      = (tc == TW'(CYC - 1)) ? '0 : tc + 1'b1;
    wb      = int'(tn);
    rbt     = int'(tn) - RB;
    w_issue = wv && (int'(tn) < PH);
    r_issue = rv && (int'(tn) >= RB) && (int'(tn) < RB + PH);
  end
  assign tail_rd_en_o   = w_issue;
  assign tail_rd_dest_o = wdest;
  assign fr_done_o      = w_issue && (wb == PH - 1);
  assign fr_done_dest_o = wdest;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hbm_col_o <= '{op: COL_NOP, bank: '0, col: '0};
    else if (w_issue)
      hbm_col_o <= '{op: COL_WR, bank: group_bank0(wfn) + 6'(wb / SEG), col: frame_col0(wfn) + 6'(wb % SEG)};
    else if (r_issue)
      hbm_col_o <= '{op: COL_RD, bank: group_bank0(rfn) + 6'(rbt / SEG), col: frame_col0(rfn) + 6'(rbt % SEG)};
    else hbm_col_o <= '{op: COL_NOP, bank: '0, col: '0};
  end

  // write data: module m's 2048-bit word feeds its CH_PER_MOD channels
  always_comb
    for (int c = 0; c < T; c++)
      hbm_wdata_o[c] = tail_rdata_i[c / CH_PER_MOD][(c % CH_PER_MOD) * CH_W +: CH_W];

  // ---- returned read beats go to the head SRAM, matched by order ----
  logic [DEST_W-1:0] rq [2];
  logic              rq_wp, rq_rp;
  logic [$clog2(PH+1)-1:0] rbeat;
  assign head_wr_en_o   = hbm_rvalid_i;
  assign head_wr_dest_o = rq[rq_rp];
  always_comb
    for (int m = 0; m < N; m++)
      for (int c = 0; c < CH_PER_MOD; c++)
        head_wdata_o[m][c * CH_W +: CH_W] = hbm_rdata_i[m * CH_PER_MOD + c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tc <= '0; rturn <= '0;
      wv <= 1'b0; rv <= 1'b0; wdest <= '0; rdest <= '0; wfn <= '0; rfn <= '0;
      for (int j = 0; j < N; j++) begin
        wn[j] <= '0; rn[j] <= '0; cnt[j] <= '0;
      end
      rq_wp <= 1'b0; rq_rp <= 1'b0; rbeat <= '0;
      frames_wr_o <= '0; frames_rd_o <= '0; idle_turns_o <= '0;
    end else begin
      tc <= tn;
      if (wdec) begin
        wv <= wdo;
        if (wdo) begin
          wdest <= fr_dest_i;
          wfn   <= wn[fr_dest_i];
          wn[fr_dest_i] <= wn[fr_dest_i] + 1'b1;
        end
      end
      if (rdec) begin
        rv    <= rdo;
        rturn <= (rturn == QW'(N - 1)) ? '0 : rturn + 1'b1;
        if (rdo) begin
          rdest <= rturn;
          rfn   <= rn[rturn];
          rn[rturn] <= rn[rturn] + 1'b1;
          rq[rq_wp] <= rturn;
          rq_wp <= ~rq_wp;
          frames_rd_o <= frames_rd_o + 1;
        end else idle_turns_o <= idle_turns_o + 1;
      end
      // a frame counts as stored once its last beat is issued
      for (int j = 0; j < N; j++)
        cnt[j] <= cnt[j] + ((fr_done_o && wdest == DEST_W'(j)) ? 1'b1 : 1'b0)
                         - ((rdo && rturn == QW'(j)) ? 1'b1 : 1'b0);
      if (fr_done_o) frames_wr_o <= frames_wr_o + 1;
      if (hbm_rvalid_i) begin
        if (int'(rbeat) == PH - 1) begin
          rbeat <= '0;
          rq_rp <= ~rq_rp;
        end else rbeat <= rbeat + 1'b1;
      end
    end
  end

  a_wr_data_ready: assert property (@(posedge clk) disable iff (!rst_n)
    fr_pop_o |-> fr_valid_i);
endmodule
