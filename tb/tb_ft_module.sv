// tb_ft_module: self-checking test of one fault-tolerant IDCT module with a
// model memory (burst reads) on its DMA port and the testbench acting as processor.
//  1. BIST of 4 IDCT blocks (N = 4*64 pattern words) from a table in memory:
//     ack, no fault, 256 words applied, no mismatch.
//  2. Normal use: one block of coefficients through the buffer, 64 results
//     read back from the result memory and compared with the reference.
//  3. A stuck-at-1 fault forced on one output bit of the IDCT core: the BIST
//     run must report the fault.
//  4. Back-pressure: two blocks written while the result memory is full
//     fill the input buffer; the buffer's Full must be seen.
// Counts each mechanism (test run, fault found, normal run, buffer full) and
// fails if one never happened.
module tb_ft_module;
  import ft_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t s_req, m_req;
  bus_rsp_t s_rsp, m_rsp;
  logic ack, fault;
  int checks = 0, failures = 0;
  int n_test = 0, n_fault_found = 0, n_normal = 0, n_full = 0;

  ft_module #(.IP_KIND(IP_IDCT)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // model memory on the DMA port: burst reads, one word per cycle after a
  // one-cycle access, with an occasional wait state between beats
  word_t mem [4096];
  int    mb_left;
  logic [11:0] mb_ptr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin m_rsp <= '0; mb_left <= 0; end
    else begin
      m_rsp.ready <= 1'b0;
      if (mb_left > 0) begin
        if ($urandom_range(0, 7) != 0) begin
          m_rsp.ready <= 1'b1;
          m_rsp.rdata <= mem[mb_ptr];
          mb_ptr  <= mb_ptr + 1'b1;
          mb_left <= mb_left - 1;
        end
      end else if (m_req.req && !m_rsp.ready) begin
        m_rsp.ready <= 1'b1;
        m_rsp.rdata <= mem[m_req.addr[11:0]];
        mb_ptr  <= m_req.addr[11:0] + 1'b1;
        mb_left <= int'(m_req.blen);
      end
    end
  end

  always @(posedge clk) if (rst_n && dut.buf_full) n_full++;

  task automatic bus(bit we, logic [7:0] off, word_t d, output word_t rd);
    @(negedge clk);
    s_req = '{req: 1'b1, we: we, blen: '0, addr: {8'h11, off}, wdata: d};
    do @(negedge clk); while (!s_rsp.ready);
    rd = s_rsp.rdata;
    @(posedge clk);
    #1 s_req.req = 1'b0;
  endtask

  task automatic bist(int n, bit exp_fault);
    word_t rd;
    bus(1, REG_PAT_BASE, 32'h100, rd);
    bus(1, REG_PAT_COUNT, word_t'(n), rd);
    bus(1, REG_CTRL, 32'h1, rd);
    while (!ack) @(negedge clk);
    n_test++;
    chk(fault == exp_fault, $sformatf("BIST fault=%0d expected %0d", fault, exp_fault));
    if (fault) n_fault_found++;
    bus(0, REG_APPLIED, '0, rd);
    chk(rd == word_t'(n * 64), $sformatf("applied %0d", rd));
    bus(0, REG_MISMATCH, '0, rd);
    chk((rd != 0) == exp_fault, $sformatf("mismatches %0d", rd));
    bus(0, REG_CYCLES, '0, rd);
    $display("BIST of %0d blocks: %0d cycles, fault=%0d", n, rd, fault);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd;
    blk_t F, f;
    s_req = '0;
    // test-pattern table at 0x100: per block 64 coefficients then 64 correct results
    for (int b = 0; b < 4; b++) begin
      F = (b == 0) ? '{default: 0} : rand_block();
      if (b == 0) F[0] = 1000;
      f = idct_ref(F);
      for (int i = 0; i < 64; i++) begin
        mem[256 + b*128 + i]      = word_t'(F[i]);
        mem[256 + b*128 + 64 + i] = word_t'(f[i]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    bist(4, 1'b0);
    // normal mode
    F = rand_block();
    f = idct_ref(F);
    bus(1, REG_CTRL, 32'h2, rd);
    for (int i = 0; i < 64; i++) bus(1, REG_BUF, word_t'(F[i]), rd);
    do bus(0, REG_RES_COUNT, '0, rd); while (rd < 64);
    for (int i = 0; i < 64; i++) begin
      bus(0, REG_RES_BASE + 8'(i), '0, rd);
      chk(int'($signed(rd)) == f[i], $sformatf("normal result %0d got %0d exp %0d", i, $signed(rd), f[i]));
    end
    n_normal++;
    // stuck-at fault on one IDCT output bit
    force dut.g_idct.u_ip.out_data[2] = 1'b1;
    bist(4, 1'b1);
    release dut.g_idct.u_ip.out_data[2];
    bist(2, 1'b0);
    // back-pressure: result memory holds 64 words and is not emptied
    for (int i = 0; i < 2 * 64; i++) bus(1, REG_BUF, word_t'(i % 7), rd);
    bus(0, REG_STATUS, '0, rd);
    chk(rd[3] == 1'b1, "status shows buffer full");
    bus(1, REG_CTRL, 32'h2, rd);
    chk(n_test == 3 && n_fault_found == 1 && n_normal == 1, "mechanism counts");
    chk(n_full > 0, "buffer full never reached");
    $display("tests=%0d faults found=%0d normal runs=%0d buffer-full cycles=%0d",
             n_test, n_fault_found, n_normal, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
