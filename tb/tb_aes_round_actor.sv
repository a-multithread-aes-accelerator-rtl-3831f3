// tb_aes_round_actor -- self-checking testbench for aes_round_actor.
//
// The actor's input FIFOs are modelled by per-thread queues in the
// testbench: avail[t] is set while thread t has tokens, the head of the
// thread the actor selects with rd_tag is presented, and a token is popped
// when rd_en is high at a clock edge. Tokens of the two threads are pushed at
// random times, independently per input, so the two inputs often hold tokens of different threads, and the downstream full flags are driven at random
// in the second half. Every output token is compared, per thread and in order,
// with MixColumns(ShiftRows(SubBytes(state))) XOR key computed by aes_ref_pkg. Also checked: the actor reads only a
// thread that has a token on every input, and with no back-pressure a token
// leaves exactly 4 cycle(s) after it was read.
module tb_aes_round_actor;
  import aes_ref_pkg::*;

  localparam int NT = 2;
  localparam int N  = 200;   // tokens per thread
  localparam int STAGES = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // input queues (registered heads)
  logic [127:0] q_s [NT][$];
  logic [127:0] head_s [NT];
  logic [NT-1:0] s_avail = 0;
  logic [127:0] s_data;
  assign s_data = head_s[rd_tag];
  logic [127:0] q_k [NT][$];
  logic [127:0] head_k [NT];
  logic [NT-1:0] k_avail = 0;
  logic [127:0] k_data;
  assign k_data = head_k[rd_tag];

  logic          rd_en;
  logic          rd_tag;
  logic [1:0]    out_full = 0;
  logic          out_wr, out_tag;
  logic [127:0] out_data;

  bit            bp = 0;    // random back-pressure on

  aes_round_actor  dut (
    .clk, .rst_n,
    .s_avail, .s_data,
    .k_avail, .k_data,
    .rd_en, .rd_tag, .out_full, .out_wr, .out_tag, .out_data
  );

  // expected results per thread
  logic [127:0] q_exp [NT][$];
  longint   q_t   [NT][$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (rd_en) begin
        checks++;
        if (!(s_avail[rd_tag] && k_avail[rd_tag])) begin
          failures++;
          $display("FAIL: fired thread %0d without a token on every input", rd_tag);
        end else begin
          logic [127:0] v_s;
          logic [127:0] v_k;
          v_s = q_s[rd_tag].pop_front();
          v_k = q_k[rd_tag].pop_front();
          q_exp[rd_tag].push_back(r_round(v_s, v_k));
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
      s_avail[t] <= q_s[t].size() > 0;
      head_s[t]  <= (q_s[t].size() > 0) ? q_s[t][0] : '0;
      k_avail[t] <= q_k[t].size() > 0;
      head_k[t]  <= (q_k[t].size() > 0) ? q_k[t][0] : '0;

    end
    out_full <= bp ? 2'($urandom_range(0, 3)) : 2'b00;
  end

  int n_pushed [NT][2];

  task automatic push_random();
    int t, i;
    t = $urandom_range(0, 1);
    i = $urandom_range(0, 2 - 1);
    if (n_pushed[t][i] < N) begin
      n_pushed[t][i]++;
      if (i == 0) q_s[t].push_back({$urandom(), $urandom(), $urandom(), $urandom()});
      if (i == 1) q_k[t].push_back({$urandom(), $urandom(), $urandom(), $urandom()});

    end
  endtask

  initial begin
    for (int t = 0; t < NT; t++) for (int i = 0; i < 2; i++) n_pushed[t][i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // first half without back-pressure, second half with
    for (int k = 0; k < 2 * NT * 2 * N; k++) begin
      @(negedge clk);
      if (k == NT * 2 * N) bp = 1;
      push_random();
      if ($urandom_range(0, 3) == 0) push_random();
    end
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < 2; i++)
        while (n_pushed[t][i] < N) begin
          @(negedge clk);
          push_random();
        end
    bp = 0;
    while (q_exp[0].size() + q_exp[1].size() > 0 || q_s[0].size() + q_s[1].size() > 0 || q_k[0].size() + q_k[1].size() > 0) @(posedge clk);
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
