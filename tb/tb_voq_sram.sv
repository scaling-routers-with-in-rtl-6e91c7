// tb_voq_sram -- SRAM module with 4 queues of 8 words of 32 bits.
// Random writes and reads (never a write into a full queue nor a read of an
// empty one, as the owners guarantee), including write and read of the same
// queue in one cycle and queues filled to the brim. Checked against a model
// queue per output: read data (one cycle after rd_en), empty flags.
module tb_voq_sram;
  localparam int NQ = 4, DEPTH = 8, W = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          wr_en, rd_en;
  logic [1:0]    wr_q, rd_q;
  logic [W-1:0]  wdata, rdata;
  logic [NQ-1:0] empty;

  voq_sram #(.NQ(NQ), .DEPTH(DEPTH), .W(W)) dut (
    .clk, .rst_n, .wr_en, .wr_q, .wdata, .rd_en, .rd_q, .rdata, .empty);

  logic [W-1:0] model [NQ][$];
  logic [W-1:0] exp_d;
  bit           exp_v = 0;
  int           nfull = 0;

  initial begin
    wr_en = 0; rd_en = 0; wr_q = '0; rd_q = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      int q, r;
      @(negedge clk);
      // expected read data of the previous cycle
      if (exp_v) begin
        checks++;
        if (rdata !== exp_d) begin failures++; $display("FAIL read data %h expected %h", rdata, exp_d); end
      end
      for (int k = 0; k < NQ; k++) begin
        checks++;
        if (empty[k] != (model[k].size() == 0)) begin failures++; $display("FAIL empty flag of queue %0d", k); end
      end
      // read first (so that a same-queue write may use the freed word)
      r = $urandom() % NQ;
      rd_en = (model[r].size() != 0) && (($urandom() % 100) < ((c / 1000) % 2 ? 30 : 60));
      rd_q = 2'(r);
      exp_v = rd_en;
      if (rd_en) exp_d = model[r].pop_front();
      q = $urandom() % NQ;
      wr_en = (model[q].size() < DEPTH) && ($urandom() % 2 == 0);
      wr_q = 2'(q);
      wdata = $urandom();
      if (wr_en) model[q].push_back(wdata);
      if (model[q].size() == DEPTH) nfull++;
    end
    @(negedge clk);
    wr_en = 0; rd_en = 0;
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL no queue was ever full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
