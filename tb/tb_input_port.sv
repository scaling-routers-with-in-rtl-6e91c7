// tb_input_port -- input port with random packets for N = 4 outputs.
// The batches leaving on the crossbar side are collected per output, checked
// for slot alignment (slice s when (MY_ID + ph) mod N = s), batch headers and
// tail-space respect, then parsed back (descriptor, padded packet, packets
// straddling batches) and compared byte for byte with what was sent. A second
// phase withholds tail space so that queues fill and packets are dropped;
// accepted packets must still come out intact and in order.
module tb_input_port;
  import pfi_pkg::*;
  localparam int N = 4, ID = 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [1:0] ph;
  line_word_t line;
  logic [N-1:0] tail_space;
  logic bstart; logic [DEST_W-1:0] bdest;
  slice_t sl;
  logic [31:0] drops, batches;

  input_port #(.N(N), .Q_BATCHES(4), .MY_ID(ID)) dut (
    .clk, .rst_n, .line_i (line), .ph_i (ph), .tail_space_i (tail_space),
    .bstart_o (bstart), .bdest_o (bdest), .slice_o (sl), .drops_o (drops), .batches_o (batches));

  // sent packets per output
  byte sent [N][$][$];
  byte stream [N][$];
  int  sidx = 0, cur_dest = -1, nsent = 0;

  always @(posedge clk) begin
    if (!rst_n) ph <= '0; else ph <= ph + 1'b1;
    if (rst_n && bstart) begin
      checks++;
      if (!tail_space[bdest]) begin failures++; $display("FAIL batch started without tail space"); end
    end
    if (rst_n && sl.valid) begin
      checks++;
      if (((ID + int'(ph)) % N) != sidx) begin failures++; $display("FAIL slice %0d at phase %0d", sidx, ph); end
      if (sidx == 0) cur_dest = int'(sl.dest);
      else if (int'(sl.dest) != cur_dest) begin failures++; $display("FAIL dest changed inside batch"); end
      checks++;
      if (sl.last != (sidx == N - 1)) begin failures++; $display("FAIL last flag"); end
      if (sidx == 0) begin
        checks++;
        if (sl.data[7:0] != 8'(ID)) begin failures++; $display("FAIL batch header %0d", sl.data[7:0]); end
        for (int b = 4; b < SLICE_BYTES; b++) stream[cur_dest].push_back(sl.data[8*b +: 8]);
      end else
        for (int b = 0; b < SLICE_BYTES; b++) stream[cur_dest].push_back(sl.data[8*b +: 8]);
      sidx = (sidx + 1) % N;
    end
  end

  task automatic send_pkt(int dest, int len, int gap);
    byte p [$];
    int words;
    for (int i = 0; i < len; i++) p.push_back(byte'($urandom()));
    words = (len + LINE_BYTES - 1) / LINE_BYTES;
    for (int w = 0; w < words; w++) begin
      line = '0;
      line.valid = 1'b1; line.sop = (w == 0); line.eop = (w == words - 1);
      line.nbytes = 8'((w == words - 1) ? len - w * LINE_BYTES : LINE_BYTES);
      line.dest = DEST_W'(dest); line.len = LEN_W'(len);
      for (int b = 0; b < LINE_BYTES; b++)
        line.data[8*b +: 8] = (w * LINE_BYTES + b < len) ? p[w * LINE_BYTES + b] : 8'($urandom());
      @(negedge clk);
    end
    line = '0;
    sent[dest].push_back(p);
    nsent++;
    repeat (gap) @(posedge clk);
  endtask

  // parse one output's stream and compare with the sent packets, skipping
  // packets that were dropped (they never appear); returns packets matched
  function automatic int check_dest(int d);
    int pos = 0, k = 0, matched = 0;
    while (pos + 4 <= stream[d].size()) begin
      int len, plen;
      len = int'({stream[d][pos+1], stream[d][pos]}) & 16'hffff;
      plen = (len + 3) & ~3;
      if (pos + 4 + plen > stream[d].size()) break;
      // find it among the sent packets (drops skip some)
      while (k < sent[d].size() && sent[d][k].size() != len) k++;
      checks++;
      if (k >= sent[d].size()) begin failures++; $display("FAIL output %0d: unexpected packet len %0d", d, len); break; end
      for (int b = 0; b < len; b++)
        if (stream[d][pos + 4 + b] != sent[d][k][b]) begin
          failures++; $display("FAIL output %0d packet %0d byte %0d", d, k, b); break;
        end
      matched++; k++;
      pos += 4 + plen;
    end
    return matched;
  endfunction

  initial begin
    int total;
    line = '0;
    tail_space = '1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: random traffic, tail always has room
    for (int i = 0; i < 400; i++) send_pkt($urandom() % N, 40 + $urandom() % 700, $urandom() % 3);
    repeat (200) @(posedge clk);
    checks++;
    if (drops != 0) begin failures++; $display("FAIL %0d drops with room available", drops); end
    // phase 2: no tail space for output 2, flood it
    tail_space = 4'b1011;
    for (int i = 0; i < 60; i++) send_pkt(2, 1000 + $urandom() % 500, 0);
    checks++;
    if (drops == 0) begin failures++; $display("FAIL no drop with a full queue"); end
    tail_space = '1;
    repeat (300) @(posedge clk);
    total = 0;
    for (int d = 0; d < N; d++) total += check_dest(d);
    checks++;
    if (total < 300) begin failures++; $display("FAIL only %0d packets came back", total); end
    $display("sent=%0d batches=%0d drops=%0d matched=%0d", nsent, batches, drops, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
