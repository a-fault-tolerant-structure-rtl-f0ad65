// tb_ip_buffer: self-checking test of the FIFO. Random pushes and pops are
// checked against a queue model: order of data, full/empty/count flags,
// simultaneous push and pop when full, and that full holds at DEPTH words.
module tb_ip_buffer;
  localparam int unsigned W = 32, DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, rd_en, full, empty;
  logic clr = 1'b0;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int n_full = 0, n_both_full = 0;

  ip_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      chk(count == ($clog2(DEPTH+1))'(q.size()), "count");
      chk(full == (q.size() == DEPTH), "full");
      chk(empty == (q.size() == 0), "empty");
      if (q.size() > 0) chk(rd_data == q[0], "data order");
      // phases: fill-biased, drain-biased, mixed
      wr_en = ((i / 500) % 2 == 0) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      rd_en = ((i / 500) % 2 == 0) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      if (full) begin n_full++; if ($urandom_range(0, 1) == 1) rd_en = 1; end
      if (empty) rd_en = 0;
      if (full && !rd_en) wr_en = 0;
      if (full && wr_en && rd_en) n_both_full++;
      wr_data = $urandom;
      @(posedge clk);
      #1;
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    chk(n_full > 0, "full never reached");
    chk(n_both_full > 0, "push+pop while full never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
