// tb_head_sram -- head SRAM with N = 4 modules and 4-batch frames.
// The testbench plays the HBM controller (reserve a frame when space_o allows,
// then write its FRAME_BATCHES beats, one word per module per beat, with random
// gaps) and the output ports (random out_ready_i). Checked: batches leave per
// output in arrival order, module m sends slice m of a batch m cycles after
// module 0, only in the crossbar slot of that output (module m reads for output
// (m - 1 - ph) mod N), never without out_ready_i, grant_o matches module 0,
// space_o blocks reservations when a region is full, and every batch comes out.
module tb_head_sram;
  import pfi_pkg::*;
  localparam int N = 4, FB = 4, QF = 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]         ph;
  logic               wr_en, resv;
  logic [DEST_W-1:0]  wr_dest, resv_dest;
  logic [SLICE_W-1:0] wdata [N];
  logic [N-1:0]       space, out_ready, grant;
  slice_t             rd [N];

  head_sram #(.N(N), .FRAME_BATCHES(FB), .Q_FRAMES(QF)) dut (
    .clk, .rst_n, .ph_i (ph), .wr_en_i (wr_en), .wr_dest_i (wr_dest), .wdata_i (wdata),
    .resv_i (resv), .resv_dest_i (resv_dest), .space_o (space),
    .out_ready_i (out_ready), .grant_o (grant), .rd_o (rd));

  function automatic logic [SLICE_W-1:0] word(int uid, int m);
    return {64{uid[15:0], 8'(m), 8'h5A}};
  endfunction

  always @(posedge clk)
    if (!rst_n) ph <= '0; else ph <= ph + 1'b1;

  int written_q [N][$];          // batches written per output, in order
  int expect_q  [N][$];          // per module m: uid expected next for output o
  int pend_uid  [$], pend_m [$], pend_t [$], pend_o [$];
  int uid = 1, nwritten = 0, nsent = 0, cyc = 0, blocked = 0;
  int granted [N];

  // writer: reserve, then FB beats
  initial begin
    wr_en = 0; resv = 0; wr_dest = '0; resv_dest = '0;
    for (int m = 0; m < N; m++) wdata[m] = '0;
    wait (rst_n);
    repeat (2) @(negedge clk);
    for (int f = 0; f < 80; f++) begin
      int d;
      d = (f < 20) ? 1 : $urandom() % N;      // first frames all to output 1
      while (!space[d]) begin blocked++; @(negedge clk); end
      resv = 1; resv_dest = DEST_W'(d);
      @(negedge clk);
      resv = 0;
      for (int j = 0; j < FB; j++) begin
        repeat ($urandom() % 2) @(negedge clk);
        wr_en = 1; wr_dest = DEST_W'(d);
        for (int m = 0; m < N; m++) wdata[m] = word(uid, m);
        written_q[d].push_back(uid);
        uid++; nwritten++;
        @(negedge clk);
        wr_en = 0;
      end
    end
  end

  // output side: random readiness, output 1 stalls at first
  always @(negedge clk) begin
    for (int o = 0; o < N; o++) out_ready[o] = ($urandom() % 4) != 0;
    if (cyc < 400) out_ready[1] = 1'b0;
  end

  // checker: a grant at cycle t for output o means module m delivers slice m
  // of the next batch of o at cycle t+1+m
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      for (int o = 0; o < N; o++) begin
        checks++;
        if (grant[o] && !out_ready[o]) begin failures++; $display("FAIL grant without out_ready"); end
        if (grant[o]) begin
          checks++;
          if (o != (N - 1 - int'(ph)) % N) begin failures++; $display("FAIL grant to %0d at phase %0d", o, ph); end
          if (written_q[o].size() == 0) begin failures++; $display("FAIL grant with nothing written"); end
          else begin
            int u;
            u = written_q[o].pop_front();
            for (int m = 0; m < N; m++) begin
              pend_uid.push_back(u); pend_m.push_back(m); pend_t.push_back(cyc + 1 + m); pend_o.push_back(o);
            end
            granted[o]++;
          end
        end
      end
      // compare module outputs for this cycle (values registered at previous edge)
      for (int m = 0; m < N; m++) begin
        int hit;
        hit = -1;
        for (int k = 0; k < pend_uid.size(); k++)
          if (pend_m[k] == m && pend_t[k] == cyc) hit = k;
        checks++;
        if (hit < 0) begin
          if (rd[m].valid) begin failures++; $display("FAIL module %0d unexpected read at %0d", m, cyc); end
        end else begin
          if (!rd[m].valid || int'(rd[m].dest) != pend_o[hit] || rd[m].data != word(pend_uid[hit], m)
              || rd[m].last != (m == N - 1)) begin
            failures++; $display("FAIL module %0d slice of batch %0d", m, pend_uid[hit]);
          end
          // crossbar slot: module m to output o needs (o + ph) mod N == m
          checks++;
          if (((pend_o[hit] + int'(ph)) % N) != m) begin failures++; $display("FAIL slot of module %0d", m); end
          pend_uid.delete(hit); pend_m.delete(hit); pend_t.delete(hit); pend_o.delete(hit);
          nsent++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nwritten == 80 * FB);
    repeat (400) @(posedge clk);
    checks++;
    if (nsent != 80 * FB * N) begin failures++; $display("FAIL %0d slices sent of %0d", nsent, 80 * FB * N); end
    checks++;
    if (blocked == 0) begin failures++; $display("FAIL space_o never blocked a reservation"); end
    $display("written=%0d slices=%0d blocked=%0d", nwritten, nsent, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
