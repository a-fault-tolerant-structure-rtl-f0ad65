// tb_ft_soc: end-to-end test of the whole system at its default sizes. The
// testbench plays the processor on bus master port 0 and runs the flow of the
// architecture:
//  1. store the test-pattern tables in on-chip memory: 4 sorting patterns and
//     4 IDCT blocks (4*64 pattern words), each followed by its correct results;
//  2. request BIST on both modules at once and keep "running software" (memory
//     reads) meanwhile, so the processor and both DMA engines contend for the bus;
//  3. wait for both acks, read the one-bit fault flags;
//  4. no fault: use the hardware (sort 16 words, one IDCT block) and check the
//     results against the reference models;
//  5. force a stuck-at fault into each IP core, run BIST again, see the fault
//     and fall back to computing the function in software (the reference model);
//  6. touch an unmapped address.
// Every mechanism is counted and a failure is counted for any that never
// happened.
module tb_ft_soc;
  import ft_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;
  logic sort_ack, sort_fault, idct_ack, idct_fault;
  int checks = 0, failures = 0;
  int n_bist = 0, n_fault = 0, n_hw = 0, n_sw = 0, n_contend = 0, n_unmapped = 0, n_res_full = 0;

  localparam addr_t SORT = 16'h1000, IDCT = 16'h1100;
  localparam addr_t SORT_TAB = 16'h0100, IDCT_TAB = 16'h0200;

  ft_soc dut (.*);

  always #5 clk = ~clk;

  // bus contention: more than one master requesting in a cycle
  always @(posedge clk)
    if (rst_n && (int'(dut.m_req[0].req) + int'(dut.m_req[1].req) + int'(dut.m_req[2].req)) > 1)
      n_contend++;
  always @(posedge clk) if (rst_n && !dut.u_ft_sort.res_ready) n_res_full++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic bus(bit we, addr_t a, word_t d, output word_t rd);
    @(negedge clk);
    cpu_req = '{req: 1'b1, we: we, blen: '0, addr: a, wdata: d};
    do @(negedge clk); while (!cpu_rsp.ready);
    rd = cpu_rsp.rdata;
    @(posedge clk);
    #1 cpu_req.req = 1'b0;
  endtask

  word_t sort_in [4];
  blk_t  idct_in [4];

  task automatic load_tables();
    word_t rd;
    blk_t f;
    for (int p = 0; p < 4; p++) begin
      // most important pattern first: all-equal, reversed, then random
      sort_in[p] = (p == 0) ? 32'h5A5A5A5A : (p == 1) ? 32'h04030201 : $urandom;
      bus(1, SORT_TAB + addr_t'(2*p), sort_in[p], rd);
      bus(1, SORT_TAB + addr_t'(2*p + 1), sort_ref(sort_in[p]), rd);
    end
    for (int b = 0; b < 4; b++) begin
      idct_in[b] = rand_block();
      f = idct_ref(idct_in[b]);
      for (int i = 0; i < 64; i++) bus(1, IDCT_TAB + addr_t'(b*128 + i), word_t'(idct_in[b][i]), rd);
      for (int i = 0; i < 64; i++) bus(1, IDCT_TAB + addr_t'(b*128 + 64 + i), word_t'(f[i]), rd);
    end
  endtask

  // request BIST on both modules, do other work, wait for both acks
  task automatic bist_both(bit exp_sort, bit exp_idct);
    word_t rd;
    bus(1, SORT + REG_PAT_BASE, word_t'(SORT_TAB), rd);
    bus(1, IDCT + REG_PAT_BASE, word_t'(IDCT_TAB), rd);
    bus(1, SORT + REG_CTRL, 32'h1, rd);
    bus(1, IDCT + REG_CTRL, 32'h1, rd);
    for (int i = 0; i < 40; i++) bus(0, addr_t'(i), '0, rd);  // software keeps running
    while (!(sort_ack && idct_ack)) @(negedge clk);
    n_bist += 2;
    chk(sort_fault == exp_sort, $sformatf("sort fault %0d", sort_fault));
    chk(idct_fault == exp_idct, $sformatf("idct fault %0d", idct_fault));
    n_fault += int'(sort_fault) + int'(idct_fault);
    bus(0, SORT + REG_APPLIED, '0, rd);  chk(rd == 4, "sort patterns applied");
    bus(0, IDCT + REG_APPLIED, '0, rd);  chk(rd == 256, "idct pattern words applied");
    bus(0, IDCT + REG_CYCLES, '0, rd);
    $display("BIST: idct %0d cycles, fault sort=%0d idct=%0d", rd, sort_fault, idct_fault);
  endtask

  task automatic use_sort();
    word_t rd, w [16];
    if (sort_fault) begin
      for (int i = 0; i < 16; i++) w[i] = sort_ref($urandom);  // software path
      n_sw++;
      return;
    end
    bus(1, SORT + REG_CTRL, 32'h2, rd);
    for (int i = 0; i < 16; i++) begin w[i] = $urandom; bus(1, SORT + REG_BUF, w[i], rd); end
    do bus(0, SORT + REG_RES_COUNT, '0, rd); while (rd < 16);
    for (int i = 0; i < 16; i++) begin
      bus(0, SORT + REG_RES_BASE + addr_t'(i), '0, rd);
      chk(rd == sort_ref(w[i]), $sformatf("sort result %0d", i));
    end
    n_hw++;
  endtask

  task automatic use_idct();
    word_t rd;
    blk_t F = rand_block(), f = idct_ref(F), g;
    if (idct_fault) begin
      g = idct_ref(F);  // software path
      chk(g == f, "software IDCT");
      n_sw++;
      return;
    end
    bus(1, IDCT + REG_CTRL, 32'h2, rd);
    for (int i = 0; i < 64; i++) bus(1, IDCT + REG_BUF, word_t'(F[i]), rd);
    do bus(0, IDCT + REG_RES_COUNT, '0, rd); while (rd < 64);
    for (int i = 0; i < 64; i++) begin
      bus(0, IDCT + REG_RES_BASE + addr_t'(i), '0, rd);
      chk(int'($signed(rd)) == f[i], $sformatf("idct result %0d", i));
    end
    n_hw++;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd;
    cpu_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_tables();
    bist_both(1'b0, 1'b0);
    use_sort();
    use_idct();
    // result memory of the sorting module (16 results held) fills after 48 of 70 operands
    for (int i = 0; i < 70; i++) bus(1, SORT + REG_BUF, $urandom, rd);
    bus(0, SORT + REG_RES_COUNT, '0, rd);
    chk(rd == 64, "sort result memory full");
    bus(1, SORT + REG_CTRL, 32'h2, rd);
    repeat (20) @(negedge clk);
    bus(0, SORT + REG_RES_COUNT, '0, rd);
    chk(rd == 22, "buffered operands drained after clear");  // 16 + 70 - 64
    // hardware faults
    force dut.u_ft_sort.g_sort.u_ip.out_data[9] = 1'b0;
    force dut.u_ft_idct.g_idct.u_ip.out_data[0] = 1'b1;
    bist_both(1'b1, 1'b1);
    release dut.u_ft_sort.g_sort.u_ip.out_data[9];
    release dut.u_ft_idct.g_idct.u_ip.out_data[0];
    use_sort();
    use_idct();
    // fault gone (transient): BIST passes again and the hardware is used
    bist_both(1'b0, 1'b0);
    use_sort();
    use_idct();
    bus(0, 16'h8000, '0, rd);
    chk(rd == 32'hBAD0ADD4, "unmapped address");
    n_unmapped++;
    $display("bist runs=%0d faults found=%0d hw uses=%0d sw fallbacks=%0d contention cycles=%0d result-full cycles=%0d unmapped=%0d",
             n_bist, n_fault, n_hw, n_sw, n_contend, n_res_full, n_unmapped);
    chk(n_bist > 0, "no BIST run");
    chk(n_fault > 0, "no fault found");
    chk(n_hw > 0, "no hardware use");
    chk(n_sw > 0, "no software fallback");
    chk(n_contend > 0, "no bus contention");
    chk(n_res_full > 0, "result memory never full");
    chk(n_unmapped > 0, "no unmapped access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
