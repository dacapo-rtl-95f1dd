// tb_sram_buf: self-checking test of a buffer bank: random writes mirrored in a reference
// array, random reads compared one cycle later (registered read), simultaneous
// read and write of different addresses, and read data held while re is low.
module tb_sram_buf;
  localparam int DEPTH = 192, WIDTH = 72, AW = $clog2(DEPTH);
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] refm [DEPTH];
  logic [DEPTH-1:0] written = '0;
  int checks = 0, failures = 0;

  sram_buf #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] expect_d, held;
    waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom, 8'($urandom)};
      refm[i] = wdata; written[i] = 1;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom, 8'($urandom)};
      re = 1;
      raddr = AW'($urandom_range(0, DEPTH - 1));
      if (we && waddr == raddr) raddr = AW'((int'(raddr) + 1) % DEPTH);
      expect_d = refm[raddr];
      @(posedge clk);
      if (we) refm[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_d) begin
        failures++;
        if (failures < 10) $display("read %0d got %h expected %h", raddr, rdata, expect_d);
      end
    end
    // hold
    @(negedge clk);
    we = 0; re = 0; held = rdata; raddr = raddr + 1'b1;
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
