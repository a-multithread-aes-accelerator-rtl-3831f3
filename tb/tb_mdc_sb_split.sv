// tb_mdc_sb_split -- self-checking testbench for the split switching box.
//
// Random per-thread configurations, write requests and full flags are applied;
// the testbench checks that a token of thread t is written only to the FIFO
// conf[t] selects (0: a, 1: b) and that the writer sees, per thread, the full
// flag of that FIFO.
module tb_mdc_sb_split;

  localparam int NT = 2;

  logic [NT-1:0] conf, a_full, b_full, full;
  logic          wr_en, wr_tag, a_wr_en, b_wr_en;

  mdc_sb_split #(.N_THREADS(NT)) dut (
    .conf, .wr_en, .wr_tag, .full, .a_wr_en, .a_full, .b_wr_en, .b_full);

  int checks = 0, failures = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      conf   = 2'($urandom_range(0, 3));
      a_full = 2'($urandom_range(0, 3));
      b_full = 2'($urandom_range(0, 3));
      wr_en  = 1'($urandom_range(0, 1));
      wr_tag = 1'($urandom_range(0, 1));
      #1;
      for (int t = 0; t < NT; t++)
        chk(full[t] == (conf[t] ? b_full[t] : a_full[t]), $sformatf("full[%0d]", t));
      chk(a_wr_en == (wr_en && !conf[wr_tag]), "a_wr_en");
      chk(b_wr_en == (wr_en && conf[wr_tag]), "b_wr_en");
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
