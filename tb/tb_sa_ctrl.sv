// tb_sa_ctrl: self-checking test of the sub-accelerator sequencer, as T-SA and as B-SA.
// For random split points, modes and block counts it checks, cycle by cycle: the row
// ownership mask, the skewed I/W buffer read enables and addresses, the tags one cycle
// later (valid / first block / last cycle of a block), the drain window with its O-buffer
// addresses, and the flush/done pulses. It also checks the tile latency:
// 1 + (nblk*S + R + COLS) feed cycles + R drain cycles + 1 before done, and the two
// options: accumulate=1 suppresses the first-block tag, drain_en=0 skips the drain.
module tb_sa_ctrl;
  import dacapo_pkg::*;
  localparam int ROWS = 16, COLS = 16, IAW = 8, WAW = 8, OAW = 7, RW = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  logic [RW-1:0] r_tsa;
  mx_mode_t mode;
  logic start = 0, accumulate = 0, drain_en = 1;
  logic [IAW-1:0] nblk, i_base;
  logic [WAW-1:0] w_base;
  logic [OAW-1:0] o_base;
  int checks = 0, failures = 0;

  logic [1:0] busy, done, drain, o_we, pcu_valid, pcu_flush;
  logic [ROWS-1:0] own [2], i_re [2], tv [2], tf [2], tl [2];
  logic [IAW-1:0] i_raddr [2][ROWS];
  logic [COLS-1:0] w_re [2];
  logic [WAW-1:0] w_raddr [2][COLS];
  logic [OAW-1:0] o_waddr [2];

  for (genvar b = 0; b < 2; b++) begin : g_dut
    sa_ctrl #(.BOTTOM(b[0]), .ROWS(ROWS), .COLS(COLS), .IAW(IAW), .WAW(WAW), .OAW(OAW)) dut (
      .clk(clk), .rst_n(rst_n), .r_tsa(r_tsa), .mode(mode), .start(start), .nblk(nblk),
      .i_base(i_base), .w_base(w_base), .o_base(o_base),
      .accumulate(accumulate), .drain_en(drain_en), .busy(busy[b]), .done(done[b]),
      .own(own[b]), .i_re(i_re[b]), .i_raddr(i_raddr[b]), .w_re(w_re[b]), .w_raddr(w_raddr[b]),
      .tag_valid(tv[b]), .tag_first(tf[b]), .tag_last(tl[b]), .drain(drain[b]), .o_we(o_we[b]),
      .o_waddr(o_waddr[b]), .pcu_valid(pcu_valid[b]), .pcu_flush(pcu_flush[b]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    int R [2];
    int S, L, tfeed, cyc;
    logic [ROWS-1:0] exp_re_prev [2], exp_first_prev [2], exp_last_prev [2];
    r_tsa = 0; mode = MX4; nblk = 0; i_base = 0; w_base = 0; o_base = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 24; n++) begin
      @(negedge clk);
      r_tsa  = RW'($urandom_range(1, ROWS - 1));
      mode   = mx_mode_t'(n % 3);
      nblk   = IAW'($urandom_range(1, 4));
      i_base = IAW'($urandom_range(0, 50));
      w_base = WAW'($urandom_range(0, 50));
      o_base = OAW'($urandom_range(0, 50));
      accumulate = (n % 4 == 1);
      drain_en   = (n % 4 != 2);
      R[0] = int'(r_tsa); R[1] = ROWS - int'(r_tsa);
      S = steps_of(mode);
      L = int'(nblk) * S;
      start = 1;
      @(negedge clk);
      start = 0;
      tfeed = L + ROWS + COLS;   // covers both SAs' feed windows
      for (int b = 0; b < 2; b++) begin exp_re_prev[b] = '0; exp_first_prev[b] = '0; exp_last_prev[b] = '0; end
      cyc = 0;
      // both sequencers run the same tile; follow each one's schedule
      while (cyc < L + ROWS + COLS + ROWS + 4) begin
        for (int b = 0; b < 2; b++) begin
          int fe, de;
          logic [ROWS-1:0] ere, efi, ela;
          fe = L + R[b] + COLS;          // feed cycles
          de = drain_en ? fe + R[b] : fe;   // end of drain
          ere = '0; efi = '0; ela = '0;
          for (int i = 0; i < ROWS; i++) begin
            int p, j;
            p = b ? ROWS - 1 - i : i;
            chk(own[b][p] == (i < R[b]), "ownership");
            j = cyc - i;
            if (cyc < fe && i < R[b] && j >= 0 && j < L) begin
              ere[p] = 1;
              efi[p] = (j < S) && !accumulate;
              ela[p] = (j % S == S - 1);
              chk(i_raddr[b][p] == i_base + IAW'(j), "I read address");
            end
          end
          chk(i_re[b] == ere, $sformatf("I read enables sa=%0d cyc=%0d", b, cyc));
          chk(tv[b] == exp_re_prev[b], "tag valid one cycle after read");
          chk((tf[b] & tv[b]) == (exp_first_prev[b] & exp_re_prev[b]), "first tag");
          chk((tl[b] & tv[b]) == (exp_last_prev[b] & exp_re_prev[b]), "last tag");
          exp_re_prev[b] = ere; exp_first_prev[b] = efi; exp_last_prev[b] = ela;
          for (int c = 0; c < COLS; c++) begin
            int j;
            j = cyc - c;
            chk(w_re[b][c] == (cyc < fe && j >= 0 && j < L), "W read enable");
            if (cyc < fe && j >= 0 && j < L) chk(w_raddr[b][c] == w_base + WAW'(j), "W read address");
          end
          chk(drain[b] == (cyc >= fe && cyc < de), $sformatf("drain window sa=%0d cyc=%0d", b, cyc));
          chk(o_we[b] == drain[b] && pcu_valid[b] == drain[b], "O write with drain");
          if (drain[b]) chk(o_waddr[b] == o_base + OAW'(cyc - fe), "O write address");
          chk(done[b] == (cyc == de + 1) && pcu_flush[b] == (cyc == de + 1), $sformatf("done pulse sa=%0d cyc=%0d", b, cyc));
          chk(busy[b] == (cyc <= de), "busy");
        end
        @(negedge clk);
        cyc++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
