// tb_thread_conf_regs -- self-checking testbench for the per-thread
// configuration registers: reset value (all threads AES-128), random writes
// checked against a model one cycle later, and writes to one thread leaving
// the other unchanged.
module tb_thread_conf_regs;
  import aes_mt_pkg::*;

  localparam int NT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          cfg_we = 0, cfg_thread = 0;
  conf_id_e      cfg_id = AES_128;
  logic [NT-1:0] conf;

  thread_conf_regs #(.N_THREADS(NT)) dut (.clk, .rst_n, .cfg_we, .cfg_thread, .cfg_id, .conf);

  int checks = 0, failures = 0;
  logic [NT-1:0] model = '0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      chk(conf == model, $sformatf("conf %b, expected %b", conf, model));
      if (cfg_we) model[cfg_thread] = cfg_id;
    end
    cfg_we     <= 1'($urandom_range(0, 1));
    cfg_thread <= 1'($urandom_range(0, 1));
    cfg_id     <= conf_id_e'($urandom_range(0, 1));
  end

  initial begin
    @(posedge clk);
    #1;
    chk(conf == '0, "reset value");
    @(posedge clk);
    rst_n <= 1;
    repeat (1000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
