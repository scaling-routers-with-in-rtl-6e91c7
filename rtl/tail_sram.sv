// tail_sram -- tail SRAM of an HBM switch: frame aggregation in N SRAM
// modules.
//
// Module m receives, through the input cyclical crossbar, slice m of every
// batch and stores it in the per-output queue of that batch's output. Because
// every batch visits modules 0..N-1 in consecutive cycles, all modules hold the
// same sequence of batches, module m lagging module 0 by m cycles. A batch is
// complete when its last slice lands in module N-1; when an output has
// collected FRAME_BATCHES (K/k = 128) complete batches, a frame is formed and its
// output number enters the shared frame FIFO. The HBM controller pops the FIFO
// and reads the frame slice out of all modules in lockstep (rd_en_i: one word
// per module per cycle, rdata_o one cycle later); fr_done_i frees the frame's
// room when its last word has been read.
//
// Room is accounted in batches per output (Q_FRAMES frame slices per region,
// this design's choice): space_o[d] says one more batch fits, and a batch is
// reserved when an input port signals its start (bstart_i), so a batch is never
// refused once it leaves its input.
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. The parameter FRAME_BATCHES shares its name with the
// package constant that is its default; the parameter is the one used. The
// VOQ SRAMs' empty flags are left unconnected on purpose: this module keeps
// its own per-queue counts.
module tail_sram
  import pfi_pkg::*;
#(
  parameter int N             = 16,
  parameter int FRAME_BATCHES = pfi_pkg::FRAME_BATCHES,
  parameter int Q_FRAMES      = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  slice_t                  wr_i       [N],
  input  logic [N-1:0]            bstart_i,
  input  logic [DEST_W-1:0]       bdest_i    [N],
  output logic [N-1:0]            space_o,
  output logic                    fr_valid_o,
  output logic [DEST_W-1:0]       fr_dest_o,
  input  logic                    fr_pop_i,
  input  logic                    rd_en_i,
  input  logic [DEST_W-1:0]       rd_dest_i,
  output logic [SLICE_W-1:0]      rdata_o    [N],
  input  logic                    fr_done_i,
  input  logic [DEST_W-1:0]       fr_done_dest_i,
  output logic [31:0]             frames_o
);
  localparam int DEPTH = Q_FRAMES * FRAME_BATCHES;
  localparam int CW    = $clog2(DEPTH) + 1;
  localparam int FFD   = N * Q_FRAMES;
  localparam int FFW   = $clog2(FFD);
  localparam int BCW   = $clog2(FRAME_BATCHES) + 1;

  for (genvar m = 0; m < N; m++) begin : g_mod
    voq_sram #(.NQ(N), .DEPTH(DEPTH), .W(SLICE_W)) u_mod (
      .clk, .rst_n,
      .wr_en (wr_i[m].valid), .wr_q (wr_i[m].dest), .wdata (wr_i[m].data),
      .rd_en (rd_en_i), .rd_q (rd_dest_i), .rdata (rdata_o[m]),
      .empty ()
    );
  end

  logic [CW-1:0]     resv [N];   // batches reserved or stored per output
  logic [BCW-1:0]    bcnt [N];   // complete batches of the forming frame
  logic [DEST_W-1:0] ffifo [FFD];
  logic [FFW-1:0]    ff_wp, ff_rp;
  logic [FFW:0]      ff_cnt;

  // at most one input starts a batch per cycle (one crossbar slot per cycle)
  logic              st_v;
  logic [DEST_W-1:0] st_d;
  always_comb begin
    st_v = 1'b0;
    st_d = '0;
    for (int i = 0; i < N; i++)
      if (bstart_i[i]) begin
        st_v = 1'b1;
        st_d = bdest_i[i];
      end
  end

  logic              done_v;
  logic [DEST_W-1:0] done_d;
  logic              frame_v;
  assign done_v  = wr_i[N-1].valid && wr_i[N-1].last;
  assign done_d  = wr_i[N-1].dest;
  assign frame_v = done_v && (bcnt[done_d] == BCW'(FRAME_BATCHES - 1));

  always_comb
    for (int q = 0; q < N; q++) space_o[q] = resv[q] < CW'(DEPTH);

  assign fr_valid_o = (ff_cnt != '0);
  assign fr_dest_o  = ffifo[ff_rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) begin
        resv[q] <= '0;
        bcnt[q] <= '0;
      end
      ff_wp <= '0; ff_rp <= '0; ff_cnt <= '0;
      frames_o <= '0;
    end else begin
      for (int q = 0; q < N; q++)
        resv[q] <= resv[q] + ((st_v && st_d == DEST_W'(q)) ? CW'(1) : CW'(0))
                           - ((fr_done_i && fr_done_dest_i == DEST_W'(q)) ? CW'(FRAME_BATCHES) : CW'(0));
      if (done_v) bcnt[done_d] <= frame_v ? '0 : bcnt[done_d] + 1'b1;
      if (frame_v) begin
        ffifo[ff_wp] <= done_d;
        ff_wp <= (ff_wp == FFW'(FFD - 1)) ? '0 : ff_wp + 1'b1;
        frames_o <= frames_o + 1;
      end
      if (fr_pop_i) ff_rp <= (ff_rp == FFW'(FFD - 1)) ? '0 : ff_rp + 1'b1;
      ff_cnt <= ff_cnt + (frame_v ? 1'b1 : 1'b0) - (fr_pop_i ? 1'b1 : 1'b0);
    end
  end

  a_one_start: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bstart_i));
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) fr_pop_i |-> fr_valid_o);
  a_reserve_ok: assert property (@(posedge clk) disable iff (!rst_n) st_v |-> space_o[st_d]);
endmodule
