// tb_actor_fire_ctrl -- self-checking testbench for actor_fire_ctrl with two
// inputs, two threads and a three-stage pipeline.
//
// Input availability and downstream full flags are random. Every cycle the
// testbench checks: the actor fires exactly when it is not stalled and some
// thread has a token on both inputs, and then only such a thread; when both
// threads could fire it takes the one after the thread that fired last; the
// stall (en low) happens exactly when the last stage holds a token whose
// thread is full; and a model pipeline of (valid, tag) pairs, advanced on en,
// matches out_valid/out_tag, so every output carries the tag it fired with.
module tb_actor_fire_ctrl;

  localparam int NT = 2, STAGES = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][NT-1:0] avail = 0;
  logic [NT-1:0]      out_full = 0;
  logic               fire, fire_tag, en, out_valid, out_tag, out_wr;

  actor_fire_ctrl #(.N_IN(2), .N_THREADS(NT), .STAGES(STAGES)) dut (
    .clk, .rst_n, .avail, .out_full, .fire, .fire_tag, .en, .out_valid, .out_tag, .out_wr);

  int checks = 0, failures = 0, n_fire = 0, n_stall = 0, n_rr = 0;
  bit m_v [STAGES];
  bit m_t [STAGES];
  bit last_tag = 1;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      bit r0, r1, stall;
      r0 = avail[0][0] && avail[1][0];
      r1 = avail[0][1] && avail[1][1];
      stall = m_v[STAGES-1] && out_full[m_t[STAGES-1]];
      chk(out_valid == m_v[STAGES-1], "out_valid");
      if (m_v[STAGES-1]) chk(out_tag == m_t[STAGES-1], "out_tag");
      chk(en == !stall, "en");
      chk(out_wr == (m_v[STAGES-1] && !stall), "out_wr");
      chk(fire == (!stall && (r0 || r1)), "fire");
      if (fire) begin
        chk(fire_tag ? r1 : r0, "fired a thread without tokens on both inputs");
        if (r0 && r1) begin
          chk(fire_tag != last_tag, "round robin");
          n_rr++;
        end
        last_tag = fire_tag;
        n_fire++;
      end
      if (stall) n_stall++;
      if (!stall) begin
        for (int s = STAGES - 1; s > 0; s--) begin
          m_v[s] = m_v[s-1];
          m_t[s] = m_t[s-1];
        end
        m_v[0] = fire;
        m_t[0] = fire_tag;
      end
    end
    avail    <= {2'($urandom_range(0, 3)), 2'($urandom_range(0, 3))};
    out_full <= ($urandom_range(0, 2) == 0) ? 2'($urandom_range(1, 3)) : 2'b00;
  end

  initial begin
    for (int s = 0; s < STAGES; s++) begin m_v[s] = 0; m_t[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (4000) @(posedge clk);
    $display("fired %0d, stalled %0d, round-robin choices %0d", n_fire, n_stall, n_rr);
    chk(n_fire > 0 && n_stall > 0 && n_rr > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
