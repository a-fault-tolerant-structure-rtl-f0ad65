// tb_onchip_mem: self-checking test of the on-chip RAM through its bus port.
// Random writes and reads against a model array, the two-cycle access timing
// (ready one cycle after the access is seen), the top and bottom words, and
// burst reads: blen+1 consecutive words, one per cycle after the first.
module tb_onchip_mem;
  import ft_pkg::*;
  localparam int unsigned WORDS = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t s_req;
  bus_rsp_t s_rsp;
  int checks = 0, failures = 0;
  word_t model [WORDS];
  bit    valid [WORDS];

  onchip_mem #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic access(bit we, addr_t a, word_t d, output word_t rd);
    int n = 0;
    @(negedge clk);
    s_req = '{req: 1'b1, we: we, blen: '0, addr: a, wdata: d};
    do begin @(negedge clk); n++; end while (!s_rsp.ready);
    rd = s_rsp.rdata;
    @(posedge clk);
    #1 s_req.req = 1'b0;
    chk(n == 1, $sformatf("latency %0d", n));
  endtask

  task automatic burst_read(addr_t a, int blen);
    int n = 0, beats = 0;
    @(negedge clk);
    s_req = '{req: 1'b1, we: 1'b0, blen: BLEN_W'(blen), addr: a, wdata: '0};
    do begin @(negedge clk); n++; end while (!s_rsp.ready);
    chk(n == 1, $sformatf("burst first-beat latency %0d", n));
    while (s_rsp.ready) begin
      chk(s_rsp.rdata == model[(int'(a) + beats) % WORDS],
          $sformatf("burst %h beat %0d got %h exp %h", a, beats, s_rsp.rdata, model[(int'(a) + beats) % WORDS]));
      beats++;
      if (beats == blen + 1) break;
      @(negedge clk);
    end
    chk(beats == blen + 1, $sformatf("burst %h gave %0d beats, want %0d", a, beats, blen + 1));
    @(posedge clk);
    #1 s_req.req = 1'b0;
    @(negedge clk);
    chk(!s_rsp.ready, "ready after burst end");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd;
    addr_t a;
    s_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    access(1'b1, 16'd0, 32'h11111111, rd);  model[0] = 32'h11111111; valid[0] = 1;
    access(1'b1, 16'(WORDS-1), 32'hFFFF0000, rd);  model[WORDS-1] = 32'hFFFF0000; valid[WORDS-1] = 1;
    for (int i = 0; i < 1500; i++) begin
      a = 16'($urandom_range(0, WORDS - 1));
      if ($urandom_range(0, 1) == 1 || !valid[a]) begin
        word_t d = $urandom;
        access(1'b1, a, d, rd);
        model[a] = d; valid[a] = 1;
      end else begin
        access(1'b0, a, '0, rd);
        chk(rd == model[a], $sformatf("read %h got %h exp %h", a, rd, model[a]));
      end
    end
    for (int i = 0; i < WORDS; i++) if (!valid[i]) begin
      access(1'b1, 16'(i), $urandom, rd);
      model[i] = s_req.wdata; valid[i] = 1;
    end
    for (int i = 0; i < 200; i++)
      burst_read(16'($urandom_range(0, WORDS - 1)), $urandom_range(0, 2**BLEN_W - 1));
    burst_read(16'(WORDS - 16), 2**BLEN_W - 1);
    access(1'b0, 16'd0, '0, rd);          chk(rd == model[0], "word 0");
    access(1'b0, 16'(WORDS-1), '0, rd);   chk(rd == model[WORDS-1], "last word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
