// tb_hcu: self-checking test of the hardware control unit on its own. A model
// memory answers its DMA burst reads (rdata = 0xA0000000 | address, with
// random wait states before and between the beats) and a model BIST
// core accepts the pattern channel at random and reports Done once it has
// received all words. Checks the order, addresses and pattern/correct-result
// flags of the fetched words, Select and BIST_Enable during the test, ack and
// fault and the status and count registers after it, a zero-pattern run,
// register writes ignored while busy, the buffer read rule and the result
// memory (fill, full, read back, clear).
module tb_hcu;
  import ft_pkg::*;
  localparam int unsigned IN_WORDS = 2, OUT_WORDS = 3, RES_DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t s_req, m_req;
  bus_rsp_t s_rsp, m_rsp;
  logic bist_enable, bist_done, bist_result;
  logic [23:0] bist_applied, bist_mismatches;
  logic [15:0] num_patterns;
  logic pat_valid, pat_ready, pat_is_exp;
  word_t pat_data, res_data;
  sel_e sel;
  logic buf_empty, buf_full, norm_ready, buf_read, res_valid, res_ready, ack, fault;
  int checks = 0, failures = 0, cycle = 0;

  hcu #(.IN_WORDS(IN_WORDS), .OUT_WORDS(OUT_WORDS), .RES_DEPTH(RES_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // model memory: burst reads with random wait states
  int    mb_left;      // beats of the current burst still to deliver
  addr_t mb_ptr;
  int    n_bursts = 0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin m_rsp <= '0; mb_left <= 0; end
    else begin
      m_rsp.ready <= 1'b0;
      if (mb_left > 0) begin
        if ($urandom_range(0, 3) != 0) begin
          m_rsp.ready <= 1'b1;
          m_rsp.rdata <= 32'hA0000000 | word_t'(mb_ptr);
          mb_ptr  <= mb_ptr + 1'b1;
          mb_left <= mb_left - 1;
        end
      end else if (m_req.req && !m_rsp.ready && $urandom_range(0, 2) != 0) begin
        chk(!m_req.we, "DMA only reads");
        n_bursts++;
        m_rsp.ready <= 1'b1;
        m_rsp.rdata <= 32'hA0000000 | word_t'(m_req.addr);
        mb_ptr  <= m_req.addr + 1'b1;
        mb_left <= int'(m_req.blen);
      end
    end
  end

  // model BIST core
  int got, want_words;
  bit want_result;
  word_t got_data [$];
  bit    got_exp [$];
  assign bist_applied = 24'(got);
  assign bist_mismatches = 24'd0;
  always_ff @(posedge clk) begin
    if (!rst_n || !bist_enable) begin
      pat_ready <= 1'b0; bist_done <= 1'b0; bist_result <= 1'b0;
      if (!bist_enable) got <= 0;
    end else begin
      pat_ready <= ($urandom_range(0, 2) != 0);
      if (pat_valid && pat_ready) begin
        got <= got + 1;
        got_data.push_back(pat_data);
        got_exp.push_back(pat_is_exp);
        chk(sel == SEL_TEST, "select is test while fetching");
      end
      if (got == want_words && !bist_done) begin
        bist_done <= 1'b1; bist_result <= want_result;
      end
    end
  end

  task automatic bus(bit we, logic [7:0] off, word_t d, output word_t rd);
    @(negedge clk);
    s_req = '{req: 1'b1, we: we, blen: '0, addr: {8'h10, off}, wdata: d};
    do @(negedge clk); while (!s_rsp.ready);
    rd = s_rsp.rdata;
    @(posedge clk);
    #1 s_req.req = 1'b0;
  endtask

  task automatic run(int n, addr_t base, bit res);
    word_t rd;
    int t0, t1, b0;
    want_words = n * (IN_WORDS + OUT_WORDS);
    want_result = res;
    got_data.delete(); got_exp.delete();
    bus(1, REG_PAT_BASE, word_t'(base), rd);
    bus(1, REG_PAT_COUNT, word_t'(n), rd);
    bus(1, REG_CTRL, 32'h1, rd);
    t0 = cycle;
    b0 = n_bursts;
    #1 chk(num_patterns == 16'(n), "num_patterns");
    bus(1, REG_PAT_COUNT, 32'd77, rd);           // ignored while busy
    while (!ack) @(negedge clk);
    t1 = cycle;
    chk(fault == res, "fault pin");
    chk(sel == SEL_NORMAL && !bist_enable, "back to normal mode");
    chk(got_data.size() == want_words, $sformatf("word count %0d", got_data.size()));
    chk(n_bursts - b0 == (want_words + 15) / 16, $sformatf("%0d bursts for %0d words", n_bursts - b0, want_words));
    chk(!m_req.req, "DMA idle after the test");
    for (int k = 0; k < got_data.size(); k++) begin
      chk(got_data[k] == (32'hA0000000 | word_t'(base + addr_t'(k))), $sformatf("word %0d data", k));
      chk(got_exp[k] == ((k % (IN_WORDS + OUT_WORDS)) >= IN_WORDS), $sformatf("word %0d flag", k));
    end
    bus(0, REG_STATUS, '0, rd);
    chk(rd[3:0] == {1'b0, res, 1'b1, 1'b0}, $sformatf("status %h", rd));
    bus(0, REG_PAT_COUNT, '0, rd);
    chk(rd == word_t'(n), "pat count unchanged by write while busy");
    bus(0, REG_CYCLES, '0, rd);
    // the start write takes effect at the access edge, two edges before the
    // bus task returns; the count runs from that edge to the ack edge, inclusive
    chk(rd == word_t'(t1 - t0 + 2), $sformatf("cycles reg %0d vs %0d", rd, t1 - t0 + 2));
    bus(0, REG_APPLIED, '0, rd);
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd;
    word_t vals [RES_DEPTH];
    s_req = '0; buf_empty = 1; buf_full = 0; norm_ready = 0; res_valid = 0; res_data = '0;
    want_words = 0; want_result = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(sel == SEL_NORMAL && !ack && !fault, "reset state");
    bus(0, REG_PAT_COUNT, '0, rd);
    chk(rd == 32'd4, "default pattern count is 4");
    run(4, 16'h0100, 1'b0);
    run(3, 16'h0040, 1'b1);
    run(0, 16'h0000, 1'b0);
    run(7, 16'h0800, 1'b0);
    run(13, 16'h0FF0, 1'b1);
    // buffer read rule
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      buf_empty = v[0]; norm_ready = v[1];
      #1 chk(buf_read == (!v[0] && v[1]), "buf_read");
    end
    buf_empty = 1; norm_ready = 0;
    // result memory
    bus(1, REG_CTRL, 32'h2, rd);
    for (int i = 0; i < RES_DEPTH + 2; i++) begin
      @(negedge clk);
      res_valid = 1; res_data = $urandom;
      #1;
      if (i < RES_DEPTH) begin chk(res_ready, "res_ready while room"); vals[i] = res_data; end
      else chk(!res_ready, "res_ready low when full");
    end
    @(negedge clk) res_valid = 0;
    bus(0, REG_RES_COUNT, '0, rd);
    chk(rd == RES_DEPTH, "res count");
    for (int i = 0; i < RES_DEPTH; i++) begin
      bus(0, REG_RES_BASE + 8'(i), '0, rd);
      chk(rd == vals[i], $sformatf("result %0d", i));
    end
    bus(1, REG_CTRL, 32'h2, rd);
    bus(0, REG_RES_COUNT, '0, rd);
    chk(rd == 0, "res count cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
