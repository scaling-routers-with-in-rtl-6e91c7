// tb_lane_split -- spreading of one switch output over 4 waveguides.
// The testbench acts as the output port: it sends random packets as 128-byte
// words with a random flow hash, starting a packet only when space_o of its
// waveguide (hash mod 4) is set, as the output port does, and back to back
// otherwise. Checked per waveguide: packets come out whole and in order as
// 32-byte words, on waveguide hash mod 4 with wavelength (hash div 4) mod 16,
// sop/eop/len framing, and words_o counts the port words.
module tb_lane_split;
  import pfi_pkg::*;
  localparam int NL = 4, W = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  line_word_t    li;
  logic [NL-1:0] space;
  fiber_word_t   fo [NL];
  logic [31:0]   words;

  lane_split #(.NL(NL), .W(W), .FIFO_WORDS(32)) dut (
    .clk, .rst_n, .line_i (li), .space_o (space), .fib_o (fo), .words_o (words));

  byte exp_q [NL][$][$];
  int  lam_q [NL][$];
  int  nsent = 0, nrecv = 0, nwords = 0, waited = 0;

  initial begin
    li = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 600; k++) begin
      byte p [$];
      int len, nw, l;
      logic [HASH_W-1:0] h;
      // skewed hashes so that one waveguide is overloaded
      h = ($urandom() % 3 == 0) ? HASH_W'($urandom()) : HASH_W'({$urandom()} << 2);
      len = 40 + $urandom() % 1500;
      p.delete();
      for (int i = 0; i < len; i++) p.push_back(byte'($urandom()));
      l = int'(h) % NL;
      while (!space[l]) begin waited++; @(negedge clk); end
      exp_q[l].push_back(p); lam_q[l].push_back((int'(h) / NL) % W);
      nw = (len + LINE_BYTES - 1) / LINE_BYTES;
      for (int w = 0; w < nw; w++) begin
        li = '0; li.valid = 1; li.sop = (w == 0); li.eop = (w == nw - 1);
        li.nbytes = 8'((w == nw - 1) ? len - w * LINE_BYTES : LINE_BYTES);
        li.len = LEN_W'(len); li.hash = h;
        for (int b = 0; b < LINE_BYTES; b++)
          li.data[8*b +: 8] = (w * LINE_BYTES + b < len) ? p[w * LINE_BYTES + b] : 8'h00;
        nwords++;
        @(negedge clk);
      end
      li = '0;
      nsent++;
    end
    repeat (2000) @(posedge clk);
    checks++;
    if (nrecv != nsent) begin failures++; $display("FAIL received %0d of %0d", nrecv, nsent); end
    checks++;
    if (int'(words) != nwords) begin failures++; $display("FAIL words_o"); end
    checks++;
    if (waited == 0) begin failures++; $display("FAIL space_o never held a packet back"); end
    $display("sent=%0d received=%0d waited=%0d", nsent, nrecv, waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte cur [NL][$];
  int  clen [NL];
  bit  inp [NL];
  always @(posedge clk)
    if (rst_n)
      for (int l = 0; l < NL; l++)
        if (fo[l].valid) begin
          if (fo[l].sop) begin
            checks++;
            if (inp[l]) begin failures++; $display("FAIL lane %0d sop inside packet", l); end
            inp[l] = 1; cur[l].delete(); clen[l] = int'(fo[l].len);
            checks++;
            if (lam_q[l].size() == 0 || int'(fo[l].lambda) != lam_q[l][0]) begin
              failures++; $display("FAIL lane %0d wavelength", l);
            end
          end
          for (int b = 0; b < int'(fo[l].nbytes); b++) cur[l].push_back(fo[l].data[8*b +: 8]);
          if (fo[l].eop) begin
            checks++;
            if (exp_q[l].size() == 0 || exp_q[l][0] != cur[l] || cur[l].size() != clen[l]) begin
              failures++; $display("FAIL lane %0d packet content/order got %0d len %0d exp %0d", l, cur[l].size(), clen[l], exp_q[l].size() ? exp_q[l][0].size() : -1);
            end
            if (exp_q[l].size()) begin void'(exp_q[l].pop_front()); void'(lam_q[l].pop_front()); end
            inp[l] = 0;
            nrecv++;
          end
        end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
