// tb_lane_merge -- merge of 4 waveguides into one switch-port stream.
// Each waveguide sends random packets (32-byte words, length and output on
// the first word, random gaps). A first phase uses large packets with gaps
// (the port keeps up, nothing may be dropped); a second phase floods all
// lanes with minimum-size packets, which arrive faster than one port word per
// cycle, so whole packets must be dropped. Checked: every packet on the port
// is whole, contiguous, correctly framed and carries the right output and
// length; per waveguide the packets leave in order; the packets missing are
// exactly drops_o.
module tb_lane_merge;
  import pfi_pkg::*;
  localparam int NL = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fiber_word_t fib [NL];
  line_word_t  lo;
  logic [31:0] drops;

  lane_merge #(.NL(NL), .FIFO_WORDS(32)) dut (.clk, .rst_n, .fib_i (fib), .line_o (lo), .drops_o (drops));

  byte sent_q [NL][$][$];
  int  dest_q [NL][$];
  int  nsent = 0, nrecv = 0, nmissing = 0, phase = 1;
  int  done_lanes = 0;

  task automatic lane_src(int l, int npk);
    for (int k = 0; k < npk; k++) begin
      byte p [$];
      int len, d, words;
      len = (phase == 1) ? 200 + $urandom() % 1300 : 40 + $urandom() % 20;
      d = $urandom() % 16;
      p.push_back(byte'(l)); p.push_back(byte'(k)); p.push_back(byte'(k >> 8));
      for (int i = 3; i < len; i++) p.push_back(byte'($urandom()));
      sent_q[l].push_back(p); dest_q[l].push_back(d); nsent++;
      words = (len + FIBER_BYTES - 1) / FIBER_BYTES;
      for (int w = 0; w < words; w++) begin
        fib[l] = '0;
        fib[l].valid = 1; fib[l].sop = (w == 0); fib[l].eop = (w == words - 1);
        fib[l].nbytes = 6'((w == words - 1) ? len - w * FIBER_BYTES : FIBER_BYTES);
        fib[l].dest = DEST_W'(d); fib[l].len = LEN_W'(len);
        for (int b = 0; b < FIBER_BYTES; b++)
          fib[l].data[8*b +: 8] = (w * FIBER_BYTES + b < len) ? p[w * FIBER_BYTES + b] : 8'h00;
        @(negedge clk);
      end
      fib[l] = '0;
      if (phase == 1) repeat ($urandom() % 8 + 3) @(negedge clk);
    end
  endtask

  // monitor
  byte cur [$];
  int  cur_len = -1, cur_dest;
  always @(posedge clk) begin
    if (rst_n && lo.valid) begin
      if (lo.sop) begin
        checks++;
        if (cur_len >= 0) begin failures++; $display("FAIL sop inside packet"); end
        cur.delete(); cur_len = int'(lo.len); cur_dest = int'(lo.dest);
      end
      for (int b = 0; b < int'(lo.nbytes); b++) cur.push_back(lo.data[8*b +: 8]);
      if (lo.eop) begin
        int l;
        l = int'(cur[0]);
        checks++;
        if (cur.size() != cur_len) begin failures++; $display("FAIL length %0d vs %0d", cur.size(), cur_len); end
        checks++;
        if (l < 0 || l >= NL) begin failures++; $display("FAIL bad lane tag"); end
        else begin
          while (sent_q[l].size() && sent_q[l][0] != cur) begin
            void'(sent_q[l].pop_front()); void'(dest_q[l].pop_front()); nmissing++;
          end
          checks++;
          if (sent_q[l].size() == 0) begin failures++; $display("FAIL packet not sent or out of order"); end
          else begin
            if (dest_q[l][0] != cur_dest) begin failures++; $display("FAIL dest"); end
            void'(sent_q[l].pop_front()); void'(dest_q[l].pop_front());
          end
        end
        nrecv++;
        cur_len = -1;
      end
    end
  end

  initial begin
    for (int l = 0; l < NL; l++) fib[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NL; l++)
      fork
        automatic int ll = l;
        begin lane_src(ll, 60); done_lanes++; end
      join_none
    wait (done_lanes == NL);
    repeat (200) @(negedge clk);
    checks++;
    if (drops != 0) begin failures++; $display("FAIL %0d drops at light load", drops); end
    phase = 2; done_lanes = 0;
    for (int l = 0; l < NL; l++)
      fork
        automatic int ll = l;
        begin lane_src(ll, 200); done_lanes++; end
      join_none
    wait (done_lanes == NL);
    repeat (300) @(posedge clk);
    for (int l = 0; l < NL; l++) nmissing += sent_q[l].size();
    checks++;
    if (drops == 0) begin failures++; $display("FAIL no drop under overload"); end
    checks++;
    if (nmissing != int'(drops)) begin failures++; $display("FAIL missing %0d vs drops %0d", nmissing, drops); end
    $display("sent=%0d received=%0d drops=%0d", nsent, nrecv, drops);
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
