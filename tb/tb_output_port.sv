// tb_output_port -- output port with N = 4 inputs feeding it.
// The testbench builds, per input, the byte stream the input port produces
// (4-byte descriptor, packet padded to 4 bytes) and cuts it into batches of N 256-byte slices
// that start with the 4-byte batch header naming the input, so packets
// straddle batches. Batches of randomly chosen inputs are granted at most once
// every N cycles (one crossbar slot per N cycles) when ready_o allows and
// arrive as N consecutive slices. lane_space_i is random. Checked: every
// packet leaves whole, in order per input, with the right length, byte count
// and flow hash, only when its egress lane has room, and words of a packet
// are contiguous.
module tb_output_port;
  import pfi_pkg::*;
  localparam int N = 4, NL = 4;
  localparam int BB = N * SLICE_BYTES;     // batch bytes (N slices)
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  slice_t        sl;
  logic          grant, ready;
  logic [NL-1:0] lane_space;
  line_word_t    lo;
  logic [31:0]   pkts;

  output_port #(.N(N), .BATCHES(2), .PKT_WORDS(32), .RDY_DEPTH(64), .NLANES(NL)) dut (
    .clk, .rst_n, .slice_i (sl), .grant_i (grant), .ready_o (ready),
    .lane_space_i (lane_space), .line_o (lo), .pkts_o (pkts));

  byte stream [N][$];
  byte pkts_q  [N][$][$];     // packets per input, in order, inside whole batches
  byte pend_q  [N][$][$];     // packets generated but not yet fully batched
  int  pend_end [N][$];       // stream offset where each pending packet ends
  int  consumed [N];          // bytes of stream already batched
  int  nbatches = 0, nout = 0, ngen = 0;

  task automatic gen_pkt(int src);
    byte p [$];
    int len;
    len = 60 + $urandom() % 1400;
    for (int i = 0; i < len; i++) p.push_back(byte'($urandom()));
    stream[src].push_back(byte'(len)); stream[src].push_back(byte'(len >> 8));
    stream[src].push_back(8'h00);      stream[src].push_back(8'h00);
    for (int i = 0; i < len; i++) stream[src].push_back(p[i]);
    for (int i = len; i < ((len + 3) & ~3); i++) stream[src].push_back(8'h00);
    pend_q[src].push_back(p);
    pend_end[src].push_back(consumed[src] + stream[src].size());
    ngen++;
  endtask

  // driver: grants and slices
  initial begin
    sl = '0; grant = 0;
    wait (rst_n);
    @(negedge clk);
    for (int b = 0; b < 300; b++) begin
      int src;
      logic [8*BB-1:0] bb;
      src = $urandom() % N;
      while (stream[src].size() < BB - 4) gen_pkt(src);
      bb = '0;
      bb[7:0] = 8'(src);
      for (int i = 0; i < BB - 4; i++) bb[8*(4 + i) +: 8] = stream[src].pop_front();
      consumed[src] += BB - 4;
      while (pend_end[src].size() && pend_end[src][0] <= consumed[src]) begin
        pkts_q[src].push_back(pend_q[src].pop_front());
        void'(pend_end[src].pop_front());
      end
      while (!(ready && ($urandom() % 3 != 0))) @(negedge clk);
      grant = 1;
      @(negedge clk);
      grant = 0;
      for (int m = 0; m < N; m++) begin
        sl = '0; sl.valid = 1; sl.last = (m == N - 1); sl.dest = '0;
        sl.data = bb[m * SLICE_W +: SLICE_W];
        @(negedge clk);
      end
      sl = '0;
      nbatches++;
    end
  end

  always @(negedge clk) lane_space = NL'($urandom());

  // monitor
  byte cur [$];
  int  cur_len = -1, cur_nw = 0;
  logic [HASH_W-1:0] cur_hash;
  logic [LINE_W-1:0] first;
  always @(posedge clk) begin
    if (rst_n && lo.valid) begin
      if (lo.sop) begin
        checks++;
        if (cur_len >= 0) begin failures++; $display("FAIL sop inside a packet"); end
        if (!lane_space[lo.hash % NL]) begin failures++; $display("FAIL started on a full lane"); end
        cur.delete(); cur_len = int'(lo.len); cur_hash = lo.hash; first = lo.data; cur_nw = 0;
      end
      checks++;
      if (cur_len < 0) begin failures++; $display("FAIL word outside a packet"); end
      for (int b = 0; b < int'(lo.nbytes); b++) cur.push_back(lo.data[8*b +: 8]);
      cur_nw++;
      if (lo.eop && cur_len >= 0) begin
        int src;
        src = -1;
        checks++;
        if (cur.size() != cur_len) begin failures++; $display("FAIL packet bytes %0d len %0d", cur.size(), cur_len); end
        checks++;
        if (cur_hash != flow_hash(first)) begin failures++; $display("FAIL hash"); end
        for (int s = 0; s < N; s++)
          if (src < 0 && pkts_q[s].size() && pkts_q[s][0] == cur) src = s;
        checks++;
        if (src < 0) begin failures++; $display("FAIL packet of %0d bytes not the next of any input", cur_len); end
        else void'(pkts_q[src].pop_front());
        nout++;
        cur_len = -1;
      end
    end
  end

  initial begin
    int left;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nbatches == 300);
    repeat (2000) @(posedge clk);
    left = 0;
    for (int s = 0; s < N; s++) left += pkts_q[s].size();
    checks++;
    if (left != 0) begin failures++; $display("FAIL %0d whole packets never came out", left); end
    checks++;
    if (int'(pkts) != nout) begin failures++; $display("FAIL pkts_o %0d vs %0d", pkts, nout); end
    $display("batches=%0d packets out=%0d generated=%0d", nbatches, nout, ngen);
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
