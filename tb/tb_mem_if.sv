// tb_mem_if: self-checking test of the programmable memory interface.
// Random commands (both SAs, activations and weights, all MX modes) are packed by the
// testbench's own encoder. Every buffer write is checked for the right physical buffer
// (B-SA rows counted from the bottom, weights to the top or bottom bank), the address
// sequence, the number of words (1/4/16 per block) and each lane's sign, micro-exponent
// and 2-bit mantissa slice, computed from the element values by the documented layout.
module tb_mem_if;
  import dacapo_pkg::*;
  localparam int ROWS = 16, COLS = 16, AW = 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_sa, cmd_kind;
  logic [7:0] cmd_idx;
  logic [AW-1:0] cmd_addr;
  mx_mode_t cmd_mode;
  logic [MXBITS-1:0] cmd_data;
  logic [ROWS-1:0] i_we;
  logic [COLS-1:0] wt_we, wb_we;
  logic [AW-1:0] waddr;
  lane_word_t wdata;
  int checks = 0, failures = 0;

  mem_if #(.ROWS(ROWS), .COLS(COLS), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    logic [7:0] e_sh, mus;
    logic [15:0] sg;
    logic [6:0] mn [16];
    int M, S, words;
    cmd_sa = 0; cmd_kind = 0; cmd_idx = 0; cmd_addr = 0; cmd_mode = MX4; cmd_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      cmd_mode = mx_mode_t'($urandom_range(0, 2));
      M = (cmd_mode == MX4) ? 2 : (cmd_mode == MX6) ? 4 : 7;
      S = (cmd_mode == MX4) ? 1 : (cmd_mode == MX6) ? 4 : 16;
      cmd_sa = 1'($urandom); cmd_kind = 1'($urandom);
      cmd_idx = 8'($urandom_range(0, 15));
      cmd_addr = 8'($urandom_range(0, 200));
      e_sh = 8'($urandom); mus = 8'($urandom); sg = 16'($urandom);
      cmd_data = '0;
      cmd_data[7:0] = e_sh; cmd_data[15:8] = mus;
      for (int i = 0; i < 16; i++) begin
        mn[i] = 7'($urandom_range(0, (1 << M) - 1));
        for (int k = 0; k < M; k++) cmd_data[16 + i * (M + 1) + k] = mn[i][k];
        cmd_data[16 + i * (M + 1) + M] = sg[i];
      end
      chk(cmd_ready, "ready when idle");
      cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      words = 0;
      for (int s = 0; s < S; s++) begin
        int prow;
        prow = cmd_sa ? ROWS - 1 - int'(cmd_idx) : int'(cmd_idx);
        chk(!cmd_ready, "busy while writing");
        if (!cmd_kind) chk(i_we == (16'd1 << prow) && wt_we == 0 && wb_we == 0, "I buffer select");
        else if (!cmd_sa) chk(wt_we == (16'd1 << cmd_idx) && i_we == 0 && wb_we == 0, "top W select");
        else chk(wb_we == (16'd1 << cmd_idx) && i_we == 0 && wt_we == 0, "bottom W select");
        chk(waddr == cmd_addr + 8'(s), "address");
        chk(wdata.exp == e_sh, "exponent");
        for (int l = 0; l < 16; l++) begin
          int e, off, q, r;
          logic [1:0] slice;
          q = l / 4; r = l % 4;
          if (cmd_mode == MX4) begin e = l; off = 0; end
          else if (cmd_mode == MX6) begin
            e = 4 * s + q;
            off = cmd_kind ? ((r % 2 == 0) ? 2 : 0) : ((r < 2) ? 2 : 0);
          end else begin
            e = s;
            off = cmd_kind ? (((q % 2 == 0) ? 4 : 0) + ((r % 2 == 0) ? 2 : 0))
                           : (((q < 2) ? 4 : 0) + ((r < 2) ? 2 : 0));
          end
          slice = 2'(({1'b0, mn[e]}) >> off);
          chk(wdata.lane[l].m == slice && wdata.lane[l].sgn == sg[e] && wdata.lane[l].mu == mus[e / 2],
              $sformatf("lane %0d mode %0d step %0d", l, cmd_mode, s));
        end
        words++;
        @(negedge clk);
      end
      chk(i_we == 0 && wt_we == 0 && wb_we == 0 && cmd_ready, "idle after the block");
      chk(words == S, "words per block");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
