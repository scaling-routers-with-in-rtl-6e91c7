// input_port -- input port SRAM of an HBM switch: per-output queues, batch
// formation and the batch FIFO that feeds the input cyclical crossbar.
//
// Packets arrive as 128-byte line words (line_word_t, one packet at a time,
// output number and length on the first word). Each packet is appended, behind
// a 4-byte descriptor holding its length, to the byte stream of its output's
// queue. The stream is cut into 4 KB batches of N 256-byte slices; packets may
// straddle two batches, as in the reference design. Every batch opens with a
// 4-byte header holding this port's number (MY_ID), which the output ports need
// to rejoin straddling packets; header, descriptor and the rounding of packets
// to 4 bytes are this design's choices.
//
// Per output, a 2048-bit assembly register collects bytes; a full slice is
// written into that output's region of a voq_sram (Q_BATCHES batches deep).
// When slice N-1 of a batch is written, the output number enters the batch
// FIFO. A packet that would not fit in its queue is dropped whole at its first
// word (drops_o).
//
// Sending: this port's crossbar slot is the cycle with (MY_ID + ph) mod N = 0.
// One cycle earlier, if the batch FIFO is not empty and the tail SRAM has room
// for that output (tail_space_i), the port pulses bstart_o/bdest_o (the tail
// SRAM reserves the room) and reads the batch's slices in N consecutive
// cycles; slice s leaves on slice_o in the cycle where (MY_ID + ph) mod N = s,
// so it reaches tail SRAM module s. A batch therefore leaves in N cycles while
// one forms in at least 32 cycles at line rate: the SRAM serves one write and
// one read per cycle (2P in total).
//
// Lint notes: counters are updated as cnt + (x ? 1'b1 : 1'b0) - (y ? 1'b1 :
// 1'b0); the 1-bit terms are zero-extended to the counter width by the
// language, which is what is meant, so the width-expansion warnings on these
// lines are expected. The hash field of the incoming line word is not needed
// here (it is recomputed at the output). The VOQ SRAMs' empty flags are left
// unconnected on purpose: this module keeps its own per-queue counts.
module input_port
  import pfi_pkg::*;
#(
  parameter int N         = 16,
  parameter int Q_BATCHES = 2,
  parameter int MY_ID     = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  line_word_t           line_i,
  input  logic [$clog2(N)-1:0] ph_i,
  input  logic [N-1:0]         tail_space_i,
  output logic                 bstart_o,
  output logic [DEST_W-1:0]    bdest_o,
  output slice_t               slice_o,
  output logic [31:0]          drops_o,
  output logic [31:0]          batches_o
);
  localparam int DEPTH = Q_BATCHES * N;     // slices per output region
  localparam int PW    = $clog2(N);
  localparam int FW    = $clog2(SLICE_BYTES) + 1;
  localparam int SW    = $clog2(DEPTH) + 1;
  localparam int BFD   = N * Q_BATCHES;      // batch FIFO depth
  localparam int BFW   = $clog2(BFD);

  // ---------------- per-output packing state ----------------
  logic [SLICE_W-1:0] acc   [N];
  logic [FW-1:0]      fill  [N];
  logic [PW-1:0]      sidx  [N];
  logic [SW-1:0]      stored[N];

  logic              in_pkt, dropping;
  logic [DEST_W-1:0] cur_dest;

  // batch FIFO of output numbers
  logic [DEST_W-1:0] bfifo [BFD];
  logic [BFW-1:0]    bf_wp, bf_rp;
  logic [BFW:0]      bf_cnt;

  // current word
  logic [DEST_W-1:0] d;
  logic              take, accept_new;
  logic [SW+1:0]     need_slices;
  logic [8:0]        nadd;           // bytes appended this cycle (<= 132)
  logic [LINE_W+31:0] add;
  logic [2*SLICE_W-1:0] comb;
  logic [FW+1:0]     tot;
  logic              wr_slice, batch_done;

  always_comb begin
    d           = line_i.sop ? line_i.dest : cur_dest;
    need_slices = '0;
    accept_new  = 1'b0;
    if (line_i.valid && line_i.sop) begin
      // descriptor + padded packet + at most one batch header it may cross
      need_slices = (SW+2)'((32'(fill[d]) + 32'(HDR_BYTES) * 2 + 32'(pad4(line_i.len))
                    + 32'(SLICE_BYTES - 1)) / 32'(SLICE_BYTES));
      accept_new  = (32'(need_slices) + 32'(stored[d])) <= DEPTH;
    end
    take = line_i.valid && (line_i.sop ? accept_new : (in_pkt && !dropping));

    // bytes to append: data (padded to 4 bytes), preceded by the descriptor on sop
    begin
      logic [LINE_W-1:0] data_m;
      logic [7:0] nb;
      nb = line_i.nbytes;
      for (int b = 0; b < LINE_BYTES; b++)
        data_m[8*b +: 8] = (b < int'(nb)) ? line_i.data[8*b +: 8] : 8'h00;
      if (line_i.sop) begin
        add  = {data_m, 16'h0000, line_i.len};
        nadd = 9'(pad4(LEN_W'(nb))) + 9'(HDR_BYTES);
      end else begin
        add  = {32'h0, data_m};
        nadd = 9'(pad4(LEN_W'(nb)));
      end
    end
    comb       = {{SLICE_W{1'b0}}, acc[d]} | ({{(2*SLICE_W-LINE_W-32){1'b0}}, add} << (8 * fill[d]));
    tot        = (FW+2)'(fill[d]) + (FW+2)'(nadd);
    wr_slice   = take && (tot >= (FW+2)'(SLICE_BYTES));
    batch_done = wr_slice && (sidx[d] == PW'(N - 1));
  end

  // ---------------- sender ----------------
  logic              sending;
  logic [PW-1:0]     scnt;
  logic [DEST_W-1:0] sdest;
  logic              pre_slot, rd_en, rd_en_q, rd_last_q;
  logic [DEST_W-1:0] rd_dest_q;
  logic [SLICE_W-1:0] rdata;

  assign pre_slot = (PW'(MY_ID) + ph_i + PW'(1)) == '0 || (N == 1);
  always_comb begin
    bstart_o = 1'b0;
    bdest_o  = bfifo[bf_rp];
    if (!sending && pre_slot && bf_cnt != '0 && tail_space_i[bfifo[bf_rp]])
      bstart_o = 1'b1;
  end
  assign rd_en = bstart_o || sending;

  voq_sram #(.NQ(N), .DEPTH(DEPTH), .W(SLICE_W)) u_sram (
    .clk, .rst_n,
    .wr_en (wr_slice), .wr_q (d), .wdata (comb[SLICE_W-1:0]),
    .rd_en (rd_en), .rd_q (bstart_o ? bdest_o : sdest), .rdata (rdata),
    .empty ()
  );

  always_comb begin
    slice_o       = '0;
    slice_o.valid = rd_en_q;
    slice_o.last  = rd_last_q;
    slice_o.dest  = rd_dest_q;
    slice_o.data  = rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) begin
        acc[q]    <= SLICE_W'(MY_ID);
        fill[q]   <= FW'(HDR_BYTES);
        sidx[q]   <= '0;
        stored[q] <= '0;
      end
      in_pkt <= 1'b0; dropping <= 1'b0; cur_dest <= '0;
      bf_wp <= '0; bf_rp <= '0; bf_cnt <= '0;
      sending <= 1'b0; scnt <= '0; sdest <= '0;
      rd_en_q <= 1'b0; rd_last_q <= 1'b0; rd_dest_q <= '0;
      drops_o <= '0; batches_o <= '0;
    end else begin
      // packet framing / admission
      if (line_i.valid && line_i.sop) begin
        cur_dest <= line_i.dest;
        dropping <= !accept_new;
        in_pkt   <= !line_i.eop;
        if (!accept_new) drops_o <= drops_o + 1;
      end else if (line_i.valid && line_i.eop) begin
        in_pkt <= 1'b0;
      end

      // packing
      if (take) begin
        if (wr_slice) begin
          if (batch_done) begin
            acc[d]  <= (comb[2*SLICE_W-1:SLICE_W] << 32) | SLICE_W'(MY_ID);
            fill[d] <= FW'(tot - (FW+2)'(SLICE_BYTES) + (FW+2)'(HDR_BYTES));
            sidx[d] <= '0;
          end else begin
            acc[d]  <= comb[2*SLICE_W-1:SLICE_W];
            fill[d] <= FW'(tot - (FW+2)'(SLICE_BYTES));
            sidx[d] <= sidx[d] + 1'b1;
          end
        end else begin
          acc[d]  <= comb[SLICE_W-1:0];
          fill[d] <= FW'(tot);
        end
      end

      // slice occupancy per output
      for (int q = 0; q < N; q++)
        stored[q] <= stored[q] + ((wr_slice && d == DEST_W'(q)) ? 1'b1 : 1'b0)
                               - ((rd_en && (bstart_o ? bdest_o : sdest) == DEST_W'(q)) ? 1'b1 : 1'b0);

      // batch FIFO
      if (batch_done) begin
        bfifo[bf_wp] <= d;
        bf_wp <= (bf_wp == BFW'(BFD - 1)) ? '0 : bf_wp + 1'b1;
        batches_o <= batches_o + 1;
      end
      if (bstart_o) bf_rp <= (bf_rp == BFW'(BFD - 1)) ? '0 : bf_rp + 1'b1;
      bf_cnt <= bf_cnt + (batch_done ? 1'b1 : 1'b0) - (bstart_o ? 1'b1 : 1'b0);

      // sender
      rd_en_q   <= rd_en;
      rd_dest_q <= bstart_o ? bdest_o : sdest;
      rd_last_q <= rd_en && ((bstart_o ? '0 : scnt + 1'b1) == PW'(N - 1)) && (N > 1 || bstart_o);
      if (bstart_o) begin
        sending <= (N > 1);
        sdest   <= bdest_o;
        scnt    <= '0;
      end else if (sending) begin
        scnt <= scnt + 1'b1;
        if (scnt + 1'b1 == PW'(N - 1)) sending <= 1'b0;
      end
    end
  end

  a_slot_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    bstart_o |-> pre_slot);
endmodule
