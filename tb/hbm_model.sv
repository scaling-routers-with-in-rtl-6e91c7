// hbm_model -- behavioural model of the B HBM4 stacks behind one HBM switch
// (T channels driven in lockstep). Not synthesizable: storage is a sparse
// associative array, so only what is written costs memory.
//
// Row commands ACT/PRE and column commands WR/RD arrive at the 2.5 GHz switch
// clock; each WR/RD moves one 256-bit beat per channel. Read data returns
// RL cycles after the RD command with rvalid. The model checks the bank rules
// the frame interleaving schedule must respect and counts violations in
// errors: ACT to an open bank, ACT earlier than tRP after PRE, more than four
// ACTs within tFAW, WR/RD to a closed bank or earlier than tRCD after ACT.
// Timing values are typical HBM figures in 2.5 GHz cycles (12 ns, 12 ns,
// 40 ns), not taken from a datasheet.
module hbm_model
  import pfi_pkg::*;
#(
  parameter int T     = 128,
  parameter int RL    = 20,
  parameter int TRCD  = 30,
  parameter int TRP   = 30,
  parameter int TFAW  = 100
) (
  input  logic            clk,
  input  logic            rst_n,
  input  hbm_row_cmd_t    row_i,
  input  hbm_col_cmd_t    col_i,
  input  logic [CH_W-1:0] wdata_i [T],
  output logic [CH_W-1:0] rdata_o [T],
  output logic            rvalid_o
);
  logic [CH_W-1:0] mem [longint];
  bit              open_b  [L_BANKS];
  logic [13:0]     row_b   [L_BANKS];
  longint          act_t   [L_BANKS];
  longint          pre_t   [L_BANKS];
  longint          acts [4];
  longint          now;
  int              errors, n_act, n_pre, n_wr, n_rd, max_open;
  bit              rv_p [RL];
  longint          ra_p [RL];

  function automatic longint key(int ch, int bank, logic [13:0] row, logic [5:0] col);
    return ((longint'(ch) * L_BANKS + bank) * 16384 + longint'(row)) * 64 + longint'(col);
  endfunction

  initial begin
    now = 0; errors = 0; n_act = 0; n_pre = 0; n_wr = 0; n_rd = 0; max_open = 0;
    for (int b = 0; b < L_BANKS; b++) begin
      open_b[b] = 0; act_t[b] = -1000; pre_t[b] = -1000; row_b[b] = '0;
    end
    for (int k = 0; k < 4; k++) acts[k] = -100000;
    for (int k = 0; k < RL; k++) begin rv_p[k] = 0; ra_p[k] = 0; end
  end

  always @(posedge clk) begin
    int nopen;
    now++;
    if (rst_n) begin
      case (row_i.op)
        ROW_ACT: begin
          n_act++;
          if (open_b[row_i.bank]) begin errors++; $display("HBM: ACT to open bank %0d at %0d", row_i.bank, now); end
          if (now - pre_t[row_i.bank] < TRP) begin errors++; $display("HBM: tRP violated bank %0d", row_i.bank); end
          if (now - acts[0] < TFAW) begin errors++; $display("HBM: tFAW violated at %0d", now); end
          acts[0] = acts[1]; acts[1] = acts[2]; acts[2] = acts[3]; acts[3] = now;
          open_b[row_i.bank] = 1; row_b[row_i.bank] = row_i.row; act_t[row_i.bank] = now;
        end
        ROW_PRE: begin
          n_pre++;
          if (!open_b[row_i.bank]) begin errors++; $display("HBM: PRE to closed bank %0d", row_i.bank); end
          open_b[row_i.bank] = 0; pre_t[row_i.bank] = now;
        end
        default: ;
      endcase
      nopen = 0;
      for (int b = 0; b < L_BANKS; b++) nopen += int'(open_b[b]);
      if (nopen > max_open) max_open = nopen;
      // read pipeline
      rvalid_o <= rv_p[RL-1];
      for (int c = 0; c < T; c++)
        rdata_o[c] <= mem.exists(ra_p[RL-1] + longint'(c) * L_BANKS * 16384 * 64)
                      ? mem[ra_p[RL-1] + longint'(c) * L_BANKS * 16384 * 64] : '0;
      for (int k = RL - 1; k > 0; k--) begin rv_p[k] = rv_p[k-1]; ra_p[k] = ra_p[k-1]; end
      rv_p[0] = 0;
      if (col_i.op == COL_WR || col_i.op == COL_RD) begin
        if (!open_b[col_i.bank] || now - act_t[col_i.bank] < TRCD) begin
          errors++; $display("HBM: column command to bank %0d not ready at %0d", col_i.bank, now);
        end
        if (col_i.op == COL_WR) begin
          n_wr++;
          for (int c = 0; c < T; c++) mem[key(c, col_i.bank, row_b[col_i.bank], col_i.col)] = wdata_i[c];
        end else begin
          n_rd++;
          rv_p[0] = 1;
          ra_p[0] = key(0, col_i.bank, row_b[col_i.bank], col_i.col);
        end
      end
    end else begin
      rvalid_o <= 1'b0;
    end
  end
endmodule
