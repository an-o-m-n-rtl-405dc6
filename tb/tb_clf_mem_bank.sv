// tb_clf_mem_bank: self-checking testbench of the dual-port memory bank.
// Fills a small bank through port 1, then runs random cycles of port-1
// writes or reads together with port-2 reads, including port-2 reads of the
// address port 1 writes on the same edge, and checks every read word against
// a shadow array (read-first behaviour) and that a read port holds its word
// while it is idle.
module tb_clf_mem_bank;
  localparam int unsigned DEPTH = 13;
  localparam int unsigned WIDTH = 24;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             en1 = 1'b0, we1 = 1'b0, en2 = 1'b0;
  logic [AW-1:0]    addr1 = '0, addr2 = '0;
  logic [WIDTH-1:0] wdata1 = '0, rdata1, rdata2;
  logic [WIDTH-1:0] shadow [DEPTH];
  logic [WIDTH-1:0] exp1, exp2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  clf_mem_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en1 = 1; we1 = 1; addr1 = AW'(a); wdata1 = WIDTH'($urandom); en2 = 0;
      shadow[a] = wdata1;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en1   = 1'($urandom_range(1));
      we1   = 1'($urandom_range(1));
      en2   = ($urandom_range(3) != 0);
      addr1 = AW'($urandom_range(DEPTH - 1));
      addr2 = ($urandom_range(3) == 0) ? addr1 : AW'($urandom_range(DEPTH - 1));
      wdata1 = WIDTH'($urandom);
      exp1 = (en1 && !we1) ? shadow[addr1] : rdata1;
      exp2 = en2 ? shadow[addr2] : rdata2;
      @(posedge clk);
      if (en1 && we1) shadow[addr1] = wdata1;
      #1;
      if (en1 && !we1 || i > 0) begin
        checks++;
        if (rdata1 !== exp1) begin failures++; $display("port 1 read mismatch @%0d", i); end
      end
      checks++;
      if (rdata2 !== exp2) begin failures++; $display("port 2 read mismatch @%0d", i); end
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
