// tb_tagged_fifo -- self-checking testbench for tagged_fifo (2 threads, 4 slots,
// so each thread may hold 2 tokens).
//
// A reference model keeps one queue per thread. Each cycle the testbench
// writes a random thread and reads a random thread, each with some
// probability and only where the model allows it; it checks, every cycle,
// per-thread avail and full against the model and rd_data against the head of
// the selected thread. It counts reads that take a thread's token while an
// older token of the other thread waits (the semi-out-of-order read), and
// simultaneous read and write. A directed phase fills thread 0 to its share
// and checks that thread 1 can still be written and read.
module tb_tagged_fifo;

  localparam int NT = 2, DEPTH = 4, QUOTA = DEPTH / NT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          wr_en = 0, wr_tag = 0, rd_en = 0, rd_tag = 0;
  logic [127:0]  wr_data = 0, rd_data;
  logic [NT-1:0] full, avail;

  tagged_fifo #(.W(128), .N_THREADS(NT), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .wr_en, .wr_tag, .wr_data, .full, .rd_tag, .rd_en, .rd_data, .avail);

  int checks = 0, failures = 0;
  int n_ooo = 0, n_rw = 0, n_full = 0;
  longint cycle = 0;

  logic [127:0] q [NT][$];
  longint       qt [NT][$];    // arrival time, to spot out-of-order reads
  bit           random_on = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cycle, s); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      for (int t = 0; t < NT; t++) begin
        chk(avail[t] == (q[t].size() > 0), $sformatf("avail[%0d]", t));
        chk(full[t] == (q[t].size() == QUOTA), $sformatf("full[%0d]", t));
        if (full[t]) n_full++;
      end
      if (q[rd_tag].size() > 0)
        chk(rd_data == q[rd_tag][0], $sformatf("rd_data thread %0d: %h vs %h", rd_tag, rd_data, q[rd_tag][0]));
      if (rd_en && q[rd_tag].size() > 0) begin
        if (q[1-rd_tag].size() > 0 && qt[1-rd_tag][0] < qt[rd_tag][0]) n_ooo++;
        void'(q[rd_tag].pop_front());
        void'(qt[rd_tag].pop_front());
      end
      if (wr_en && q[wr_tag].size() < QUOTA) begin
        q[wr_tag].push_back(wr_data);
        qt[wr_tag].push_back(cycle);
      end
      if (wr_en && rd_en) n_rw++;
    end
    if (random_on) begin
      logic wt, rt;
      wt = 1'($urandom_range(0, 1));
      rt = 1'($urandom_range(0, 1));
      wr_tag  <= wt;
      wr_data <= {$urandom(), $urandom(), $urandom(), $urandom()};
      // q already reflects this edge's update
      wr_en   <= ($urandom_range(0, 9) < 6) && (q[wt].size() < QUOTA);
      rd_tag  <= rt;
      rd_en   <= ($urandom_range(0, 9) < 5) && (q[rt].size() > 0);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // directed: fill thread 0, thread 1 must still pass
    for (int i = 0; i < QUOTA; i++) begin
      wr_en <= 1; wr_tag <= 0; wr_data <= 128'(100 + i);
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
    chk(full[0] && !full[1], "thread 0 full, thread 1 not");
    wr_en <= 1; wr_tag <= 1; wr_data <= 128'h1111;
    @(posedge clk);
    wr_en <= 0; rd_en <= 1; rd_tag <= 1;
    @(posedge clk);
    rd_en <= 0;
    @(posedge clk);
    chk(q[1].size() == 0 && q[0].size() == QUOTA, "thread 1 token read past thread 0");
    // drain thread 0
    rd_en <= 1; rd_tag <= 0;
    repeat (QUOTA) @(posedge clk);
    rd_en <= 0;
    @(posedge clk);
    random_on = 1;
    repeat (5000) @(posedge clk);
    random_on = 0;
    $display("out-of-order reads %0d, read+write cycles %0d, full cycles %0d", n_ooo, n_rw, n_full);
    chk(n_ooo > 0 && n_rw > 0 && n_full > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
