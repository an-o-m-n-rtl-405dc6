// tb_clf_wpt_mem: self-checking testbench of the FIFO pointer memory.
// Writes every address, then runs random cycles of writes and reads (also of
// the address being written on the same edge) and checks the read pointer
// against a shadow array with read-first behaviour.
module tb_clf_wpt_mem;
  localparam int unsigned DEPTH = 11;
  localparam int unsigned PW    = 3;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [PW-1:0] wdata = '0, rdata, expd;
  logic [PW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  clf_wpt_mem #(.DEPTH(DEPTH), .PW(PW)) dut (.*);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = PW'($urandom); re = 0;
      shadow[a] = wdata;
    end
    @(negedge clk);
    re = 1; we = 0; raddr = '0;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we    = 1'($urandom_range(1));
      re    = ($urandom_range(3) != 0);
      waddr = AW'($urandom_range(DEPTH - 1));
      raddr = ($urandom_range(2) == 0) ? waddr : AW'($urandom_range(DEPTH - 1));
      wdata = PW'($urandom);
      expd  = re ? shadow[raddr] : rdata;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expd) begin failures++; $display("read mismatch @%0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
