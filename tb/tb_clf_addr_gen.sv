// tb_clf_addr_gen: self-checking testbench of the window address generator.
// Sweeps every line of a 800-line sensor (and a few codes beyond it) with
// D_TH = 1 and four banks, and every line of a 260-line sensor with D_TH = 2
// and eight banks, and checks bank = line mod N_BANK, block = line / N_BANK
// and the border flag of each window line.
module tb_clf_addr_gen;
  logic [9:0] c1;
  logic [1:0] bank1 [3];
  logic [7:0] blk1  [3];
  logic       inr1  [3];
  logic [8:0] c2;
  logic [2:0] bank2 [5];
  logic [5:0] blk2  [5];
  logic       inr2  [5];
  int checks = 0, failures = 0;

  clf_addr_gen #(.LINES(800), .N_BANK(4), .D_TH(1), .CW(10)) dut1 (
    .c(c1), .bank(bank1), .blk(blk1), .in_range(inr1));
  clf_addr_gen #(.LINES(260), .N_BANK(8), .D_TH(2), .CW(9)) dut2 (
    .c(c2), .bank(bank2), .blk(blk2), .in_range(inr2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int c = 0; c < 810; c++) begin
      c1 = 10'(c);
      #1;
      for (int j = 0; j < 3; j++) begin
        int l;
        bit inr;
        l   = c + j - 1;
        inr = (l >= 0) && (l < 800);
        chk(inr1[j] == inr, $sformatf("range c=%0d j=%0d", c, j));
        if (inr) begin
          chk(bank1[j] == 2'(l % 4), $sformatf("bank c=%0d j=%0d", c, j));
          chk(blk1[j] == 8'(l / 4), $sformatf("block c=%0d j=%0d", c, j));
        end
      end
    end
    for (int c = 0; c < 260; c++) begin
      c2 = 9'(c);
      #1;
      for (int j = 0; j < 5; j++) begin
        int l;
        bit inr;
        l   = c + j - 2;
        inr = (l >= 0) && (l < 260);
        chk(inr2[j] == inr, $sformatf("range2 c=%0d j=%0d", c, j));
        if (inr) begin
          chk(bank2[j] == 3'(l % 8), $sformatf("bank2 c=%0d j=%0d", c, j));
          chk(blk2[j] == 6'(l / 8), $sformatf("block2 c=%0d j=%0d", c, j));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
