// tb_mdc_sb_merge -- self-checking testbench for the merge switching box.
//
// Random per-thread configurations, FIFO status, data, reader tag and pop are
// applied; for each the testbench checks that each thread sees the FIFO its
// configuration selects (0: a, 1: b), that the data comes from the FIFO the
// reader's thread selects, and that the pop goes to that FIFO only.
module tb_mdc_sb_merge;

  localparam int NT = 2, W = 128;

  logic [NT-1:0] conf, a_avail, b_avail, avail;
  logic [W-1:0]  a_data, b_data, data;
  logic          a_rd_en, b_rd_en, rd_tag, rd_en;

  mdc_sb_merge #(.W(W), .N_THREADS(NT)) dut (
    .conf, .a_avail, .a_data, .a_rd_en, .b_avail, .b_data, .b_rd_en, .rd_tag, .rd_en, .avail, .data);

  int checks = 0, failures = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      conf    = 2'($urandom_range(0, 3));
      a_avail = 2'($urandom_range(0, 3));
      b_avail = 2'($urandom_range(0, 3));
      a_data  = {$urandom(), $urandom(), $urandom(), $urandom()};
      b_data  = {$urandom(), $urandom(), $urandom(), $urandom()};
      rd_tag  = 1'($urandom_range(0, 1));
      rd_en   = 1'($urandom_range(0, 1));
      #1;
      for (int t = 0; t < NT; t++)
        chk(avail[t] == (conf[t] ? b_avail[t] : a_avail[t]), $sformatf("avail[%0d]", t));
      chk(data == (conf[rd_tag] ? b_data : a_data), "data");
      chk(a_rd_en == (rd_en && conf[rd_tag] == 1'b0), "a_rd_en");
      chk(b_rd_en == (rd_en && conf[rd_tag] == 1'b1), "b_rd_en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
