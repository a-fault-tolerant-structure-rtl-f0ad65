// tb_bist_core: self-checking test of the BIST core on its own, with a model
// IP core written here (adds 1 to each word, with a random response delay).
// Runs tests of several lengths, fault-free and with one wrong correct-result
// word, and checks done/result, the applied and mismatch counts, that no
// channel word is accepted when no test runs, and the done timing.
module tb_bist_core;
  import ft_pkg::*;

  localparam int unsigned OUT_WORDS = 2;  // IN_WORDS = OUT_WORDS here

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable, pat_valid, pat_ready, pat_is_exp;
  logic tpg_valid, tpg_ready, rsp_valid, rsp_ready, done, result;
  logic [15:0] num_patterns;
  word_t pat_data, tpg_data, rsp_data;
  logic [23:0] applied, mismatches;
  int checks = 0, failures = 0, cycle = 0;

  bist_core #(.IN_WORDS(OUT_WORDS), .OUT_WORDS(OUT_WORDS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  // model IP core: one-word register stage that adds one
  logic  m_full;
  word_t m_data;
  assign tpg_ready = !m_full || (rsp_valid && rsp_ready);
  assign rsp_valid = m_full;
  assign rsp_data  = m_data;
  always_ff @(posedge clk) begin
    if (!rst_n) m_full <= 1'b0;
    else begin
      if (tpg_valid && tpg_ready) begin m_full <= 1'b1; m_data <= tpg_data + 1; end
      else if (rsp_valid && rsp_ready) m_full <= 1'b0;
    end
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(word_t d, bit is_exp);
    // drive and sample away from the rising edge
    @(negedge clk);
    pat_valid = 1'b1; pat_data = d; pat_is_exp = is_exp;
    #1;
    while (!pat_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pat_valid = 1'b0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  task automatic run_test(int n, int bad);
    word_t w [OUT_WORDS];
    int last_acc;
    num_patterns <= 16'(n);
    enable <= 1'b1;
    @(posedge clk);
    for (int p = 0; p < n; p++) begin
      for (int i = 0; i < OUT_WORDS; i++) begin w[i] = $urandom; send(w[i], 1'b0); end
      for (int i = 0; i < OUT_WORDS; i++) send((p == bad && i == 1) ? w[i] + 7 : w[i] + 1, 1'b1);
    end
    last_acc = -1;
    while (!done) begin
      @(negedge clk);
      if (rsp_valid && rsp_ready) last_acc = cycle + 1;
    end
    chk(result == (bad >= 0 && bad < n), $sformatf("result n=%0d bad=%0d", n, bad));
    chk(applied == 24'(n * OUT_WORDS), "applied count");
    chk(mismatches == ((bad >= 0 && bad < n) ? 24'd1 : 24'd0), "mismatch count");
    if (last_acc >= 0) chk(cycle - last_acc == 2, $sformatf("done timing %0d", cycle - last_acc));
    repeat (3) @(posedge clk);
    chk(done && result == (bad >= 0 && bad < n), "done/result hold while enabled");
    enable <= 1'b0;
    @(posedge clk); @(posedge clk);
    chk(!done, "done falls with enable");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 0; pat_valid = 0; pat_is_exp = 0; pat_data = '0; num_patterns = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // idle: channel must not be accepted
    pat_valid <= 1'b1; @(posedge clk); #1;
    chk(!pat_ready, "channel closed while idle");
    pat_valid <= 1'b0;
    run_test(4, -1);
    run_test(4, 0);
    run_test(4, 3);
    run_test(1, -1);
    run_test(0, -1);
    run_test(20, 11);
    run_test(20, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
