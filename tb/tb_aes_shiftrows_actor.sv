// tb_aes_shiftrows_actor -- self-checking testbench for aes_shiftrows_actor.
//
// The actor's input FIFO is modelled by per-thread queues in the
// testbench: avail[t] is set while thread t has tokens, the head of the
// thread the actor selects with rd_tag is presented, and a token is popped
// when rd_en is high at a clock edge. Tokens of the two threads are pushed at
// random times, and the downstream full flags are driven at random
// in the second half. Every output token is compared, per thread and in order,
// with ShiftRows of the input computed by aes_ref_pkg. Also checked: the actor reads only a
// thread that has a token on every input, and with no back-pressure a token
// leaves exactly 1 cycle(s) after it was read.
module tb_aes_shiftrows_actor;
  import aes_ref_pkg::*;

  localparam int NT = 2;
  localparam int N  = 200;   // tokens per thread
  localparam int STAGES = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // input queues (registered heads)
  logic [127:0] q_in [NT][$];
  logic [127:0] head_in [NT];
  logic [NT-1:0] in_avail = 0;
  logic [127:0] in_data;
  assign in_data = head_in[rd_tag];

  logic          rd_en;
  logic          rd_tag;
  logic [1:0]    out_full = 0;
  logic          out_wr, out_tag;
  logic [127:0] out_data;

  bit            bp = 0;    // random back-pressure on

  aes_shiftrows_actor  dut (
    .clk, .rst_n,
    .in_avail, .in_data,
    .rd_en, .rd_tag, .out_full, .out_wr, .out_tag, .out_data
  );

  // expected results per thread
  logic [127:0] q_exp [NT][$];
  longint   q_t   [NT][$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (rd_en) begin
        checks++;
        if (!(in_avail[rd_tag])) begin
          failures++;
          $display("FAIL: fired thread %0d without a token on every input", rd_tag);
        end else begin
          logic [127:0] v_in;
          v_in = q_in[rd_tag].pop_front();
          q_exp[rd_tag].push_back(r_shiftrows(v_in));
          q_t[rd_tag].push_back(cycle);
        end
      end
      if (out_wr) begin
        checks++;
        if (q_exp[out_tag].size() == 0) begin
          failures++;
          $display("FAIL: unexpected output on thread %0d", out_tag);
        end else begin
          logic [127:0] e;
          longint t0;
          e  = q_exp[out_tag].pop_front();
          t0 = q_t[out_tag].pop_front();
          if (out_data !== e) begin
            failures++;
            $display("FAIL: thread %0d got %h expected %h", out_tag, out_data, e);
          end
          if (!bp) begin
            checks++;
            if (cycle - t0 != longint'(STAGES)) begin
              failures++;
              $display("FAIL: latency %0d, expected %0d", cycle - t0, STAGES);
            end
          end
        end
      end
    end
    for (int t = 0; t < NT; t++) begin
      in_avail[t] <= q_in[t].size() > 0;
      head_in[t]  <= (q_in[t].size() > 0) ? q_in[t][0] : '0;

    end
    out_full <= bp ? 2'($urandom_range(0, 3)) : 2'b00;
  end

  int n_pushed [NT][1];

  task automatic push_random();
    int t, i;
    t = $urandom_range(0, 1);
    i = $urandom_range(0, 1 - 1);
    if (n_pushed[t][i] < N) begin
      n_pushed[t][i]++;
      if (i == 0) q_in[t].push_back({$urandom(), $urandom(), $urandom(), $urandom()});

    end
  endtask

  initial begin
    for (int t = 0; t < NT; t++) for (int i = 0; i < 1; i++) n_pushed[t][i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // first half without back-pressure, second half with
    for (int k = 0; k < 2 * NT * 1 * N; k++) begin
      @(negedge clk);
      if (k == NT * 1 * N) bp = 1;
      push_random();
      if ($urandom_range(0, 3) == 0) push_random();
    end
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < 1; i++)
        while (n_pushed[t][i] < N) begin
          @(negedge clk);
          push_random();
        end
    bp = 0;
    while (q_exp[0].size() + q_exp[1].size() > 0 || q_in[0].size() + q_in[1].size() > 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 2 * N) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", n_out, 2 * N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0;
  always @(posedge clk) if (rst_n && out_wr) n_out++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
