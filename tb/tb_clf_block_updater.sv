// tb_clf_block_updater: self-checking testbench of the Memory Block Updater.
// For random blocks, pointers and entries (S = 4 and S = 3), checks that the
// new pointer is pointer+1 wrapping at S-1, that the entry lands in that slot
// and that every other slot is unchanged.
module tb_clf_block_updater;
  localparam int unsigned EW = 20;
  logic [4*EW-1:0] blk4_in, blk4_out;
  logic [3*EW-1:0] blk3_in, blk3_out;
  logic [1:0]      w4_in, w4_out, w3_in, w3_out;
  logic [EW-1:0]   entry;
  int checks = 0, failures = 0;

  clf_block_updater #(.S(4), .EW(EW)) dut4 (.blk_in(blk4_in), .wpt_in(w4_in), .entry,
                                            .blk_out(blk4_out), .wpt_out(w4_out));
  clf_block_updater #(.S(3), .EW(EW)) dut3 (.blk_in(blk3_in), .wpt_in(w3_in), .entry,
                                            .blk_out(blk3_out), .wpt_out(w3_out));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int n4, n3;
      blk4_in = {$urandom, $urandom, $urandom};
      blk3_in = {$urandom, $urandom};
      w4_in   = 2'($urandom);
      w3_in   = 2'($urandom_range(2));
      entry   = EW'($urandom);
      #1;
      n4 = (int'(w4_in) + 1) % 4;
      n3 = (int'(w3_in) + 1) % 3;
      chk(int'(w4_out) == n4, "pointer, S=4");
      chk(int'(w3_out) == n3, "pointer, S=3");
      for (int k = 0; k < 4; k++)
        chk(blk4_out[k*EW +: EW] == ((k == n4) ? entry : blk4_in[k*EW +: EW]), $sformatf("slot %0d, S=4", k));
      for (int k = 0; k < 3; k++)
        chk(blk3_out[k*EW +: EW] == ((k == n3) ? entry : blk3_in[k*EW +: EW]), $sformatf("slot %0d, S=3", k));
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
