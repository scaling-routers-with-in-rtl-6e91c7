// tb_tail_sram -- tail SRAM with N = 4 modules and 4-batch frames.
// Random inputs start batches (one start per cycle, only when space_o allows);
// slice m of a batch is written into module m, m cycles after slice 0, as the
// input crossbar does. The testbench plays the HBM controller: it pops formed
// frames, reads them in lockstep from all modules and releases them with
// fr_done_i, sometimes after a long pause so that the queues fill up. Checked:
// frame order and output numbers, every word of every frame (slice m of batch
// j of the frame in module m), space_o going low and recovering, no start
// without space, frames_o count.
module tb_tail_sram;
  import pfi_pkg::*;
  localparam int N = 4, FB = 4, QF = 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  slice_t            wr [N];
  logic [N-1:0]      bstart;
  logic [DEST_W-1:0] bdest [N];
  logic [N-1:0]      space;
  logic              fr_valid, fr_pop, rd_en, fr_done;
  logic [DEST_W-1:0] fr_dest, rd_dest, fr_done_dest;
  logic [SLICE_W-1:0] rdata [N];
  logic [31:0]       frames;

  tail_sram #(.N(N), .FRAME_BATCHES(FB), .Q_FRAMES(QF)) dut (
    .clk, .rst_n, .wr_i (wr), .bstart_i (bstart), .bdest_i (bdest), .space_o (space),
    .fr_valid_o (fr_valid), .fr_dest_o (fr_dest), .fr_pop_i (fr_pop),
    .rd_en_i (rd_en), .rd_dest_i (rd_dest), .rdata_o (rdata),
    .fr_done_i (fr_done), .fr_done_dest_i (fr_done_dest), .frames_o (frames));

  function automatic logic [SLICE_W-1:0] word(int uid, int m);
    return {64{uid[15:0], 8'(m), 8'hA5}};
  endfunction

  // batch pipeline: stage s holds the batch whose slice s is written this cycle
  logic        pv [N];
  int          pd [N], pu [N];
  int          batch_q [N][$];    // completed batches per output, in order
  int          frame_q [$];       // expected frame outputs
  int          pending [N];       // batches per output not yet in a frame
  int          uid = 1, nframes_rd = 0, full_seen = 0;
  bit          paused = 0;

  always_comb
    for (int m = 0; m < N; m++) begin
      wr[m] = '0;
      wr[m].valid = pv[m];
      wr[m].last  = (m == N - 1);
      wr[m].dest  = DEST_W'(pd[m]);
      wr[m].data  = word(pu[m], m);
    end

  // source side
  initial begin
    for (int m = 0; m < N; m++) begin pv[m] = 0; pd[m] = 0; pu[m] = 0; bdest[m] = '0; end
    bstart = '0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      // the batch started last cycle enters module 0; older ones move on
      if (pv[N-1]) begin
        batch_q[pd[N-1]].push_back(pu[N-1]);
        pending[pd[N-1]]++;
        if (pending[pd[N-1]] == FB) begin frame_q.push_back(pd[N-1]); pending[pd[N-1]] = 0; end
      end
      for (int m = N - 1; m > 0; m--) begin pv[m] = pv[m-1]; pd[m] = pd[m-1]; pu[m] = pu[m-1]; end
      pv[0] = bstart != '0;
      if (bstart != '0) begin
        for (int i = 0; i < N; i++) if (bstart[i]) pd[0] = int'(bdest[i]);
        pu[0] = uid++;
      end
      bstart = '0;
      if (($urandom() % 4) != 0) begin
        int i, d;
        i = $urandom() % N; d = $urandom() % N;
        if (space[d]) begin bstart[i] = 1'b1; bdest[i] = DEST_W'(d); end
        else full_seen++;
      end
    end
  end

  // start checks
  always @(posedge clk)
    if (rst_n && bstart != '0) begin
      checks++;
      for (int i = 0; i < N; i++)
        if (bstart[i] && !space[bdest[i]]) begin failures++; $display("FAIL start without space"); end
    end

  // reader (plays the HBM controller)
  initial begin
    fr_pop = 0; rd_en = 0; rd_dest = '0; fr_done = 0; fr_done_dest = '0;
    wait (rst_n);
    forever begin
      @(negedge clk); #1;
      fr_pop = 0; rd_en = 0; fr_done = 0;
      // every few frames pause long enough for the queues to fill
      if (nframes_rd % 5 == 4 && frame_q.size() > 0 && !paused) begin repeat (300) @(negedge clk); paused = 1; #1; end
      if (nframes_rd % 5 != 4) paused = 0;
      if (fr_valid) begin
        int d;
        d = int'(fr_dest);
        checks++;
        if (frame_q.size() == 0 || frame_q[0] != d) begin
          failures++; $display("FAIL frame for output %0d not expected", d);
        end
        if (frame_q.size() != 0) void'(frame_q.pop_front());
        fr_pop = 1;
        for (int j = 0; j < FB; j++) begin
          int u;
          if (j > 0) begin @(negedge clk); #1; fr_pop = 0; end
          rd_en = 1; rd_dest = DEST_W'(d);
          fr_done = (j == FB - 1); fr_done_dest = DEST_W'(d);
          u = batch_q[d].size() ? batch_q[d].pop_front() : -1;
          @(posedge clk); #1;
          for (int m = 0; m < N; m++) begin
            checks++;
            if (rdata[m] != word(u, m)) begin
              failures++; $display("FAIL frame to %0d batch %0d module %0d data", d, j, m);
            end
          end
        end
        nframes_rd++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nframes_rd >= 60);
    repeat (20) @(posedge clk);
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL space_o never went low"); end
    checks++;
    if (int'(frames) < nframes_rd) begin failures++; $display("FAIL frames_o %0d < %0d", frames, nframes_rd); end
    $display("frames=%0d read=%0d refused_starts=%0d", frames, nframes_rd, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
