// tb_idct_coverage: fault-coverage campaign for the IDCT module's self-test.
// A fault-tolerant IDCT module (ft_module) is fed from a model memory holding
// three test blocks in priority order: a flat block (DC only), a block of small
// random coefficients and a block shaped like MPEG-2 data. Thirty single
// stuck-at faults, at fixed sites picked at random over the core's datapath
// (row and column rounding, the intermediate values, the clipped output), are
// forced one at a time, and the self-test is run with N = 1, 2 and 3 blocks.
// The coverage for each N is printed next to the architecture's reported 63%,
// 83% and 87% (gate-level faults, which this is not, so only the trend is
// comparable). Checks: the fault-free module passes with every N, every run
// ends with ack and the right applied count, a fault found with N blocks is
// also found with N+1 (the blocks are a prefix of the same table), coverage
// grows from 1 to 3 blocks, and the reported mismatch count agrees with the
// fault flag. Faults on rounding bits below the shift cannot change any
// output; they are kept to show how such redundant sites lower the coverage.
module tb_idct_coverage;
  import ft_pkg::*;
  import tb_ref_pkg::*;
  localparam int NF = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t s_req, m_req;
  bus_rsp_t s_rsp, m_rsp;
  logic ack, fault;
  int checks = 0, failures = 0;

  ft_module #(.IP_KIND(IP_IDCT)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // model memory on the DMA port: burst reads, one word per cycle
  word_t mem [1024];
  int    mb_left;
  logic [9:0] mb_ptr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin m_rsp <= '0; mb_left <= 0; end
    else begin
      m_rsp.ready <= 1'b0;
      if (mb_left > 0) begin
        m_rsp.ready <= 1'b1;
        m_rsp.rdata <= mem[mb_ptr];
        mb_ptr  <= mb_ptr + 1'b1;
        mb_left <= mb_left - 1;
      end else if (m_req.req && !m_rsp.ready) begin
        m_rsp.ready <= 1'b1;
        m_rsp.rdata <= mem[m_req.addr[9:0]];
        mb_ptr  <= m_req.addr[9:0] + 1'b1;
        mb_left <= int'(m_req.blen);
      end
    end
  end

  task automatic bus(bit we, logic [7:0] off, word_t d, output word_t rd);
    @(negedge clk);
    s_req = '{req: 1'b1, we: we, blen: '0, addr: {8'h11, off}, wdata: d};
    do @(negedge clk); while (!s_rsp.ready);
    rd = s_rsp.rdata;
    @(posedge clk);
    #1 s_req.req = 1'b0;
  endtask

  task automatic bist(int n, output bit found);
    word_t rd;
    bus(1, REG_PAT_BASE, 32'h0, rd);
    bus(1, REG_PAT_COUNT, word_t'(n), rd);
    bus(1, REG_CTRL, 32'h1, rd);
    while (!ack) @(negedge clk);
    found = fault;
    bus(0, REG_APPLIED, '0, rd);
    chk(rd == word_t'(n * 64), $sformatf("applied %0d for %0d blocks", rd, n));
    bus(0, REG_MISMATCH, '0, rd);
    chk((rd != 0) == found, $sformatf("mismatches %0d vs fault %0d", rd, found));
  endtask

  task automatic inject(int k);
    case (k)
       0: force dut.g_idct.u_ip.col_clip[0] = 1'b0;
       1: force dut.g_idct.u_ip.col_clip[0] = 1'b1;
       2: force dut.g_idct.u_ip.col_clip[1] = 1'b0;
       3: force dut.g_idct.u_ip.col_clip[2] = 1'b1;
       4: force dut.g_idct.u_ip.col_clip[3] = 1'b0;
       5: force dut.g_idct.u_ip.col_clip[4] = 1'b0;
       6: force dut.g_idct.u_ip.col_clip[4] = 1'b1;
       7: force dut.g_idct.u_ip.col_clip[5] = 1'b1;
       8: force dut.g_idct.u_ip.col_clip[6] = 1'b0;
       9: force dut.g_idct.u_ip.col_clip[7] = 1'b0;
      10: force dut.g_idct.u_ip.col_clip[7] = 1'b1;
      11: force dut.g_idct.u_ip.col_round[6] = 1'b0;
      12: force dut.g_idct.u_ip.col_round[9] = 1'b1;
      13: force dut.g_idct.u_ip.col_round[19] = 1'b0;
      14: force dut.g_idct.u_ip.col_round[28] = 1'b1;
      15: force dut.g_idct.u_ip.col_round[29] = 1'b1;
      16: force dut.g_idct.u_ip.col_round[37] = 1'b0;
      17: force dut.g_idct.u_ip.col_round[38] = 1'b1;
      18: force dut.g_idct.u_ip.col_val[1] = 1'b0;
      19: force dut.g_idct.u_ip.col_val[4] = 1'b0;
      20: force dut.g_idct.u_ip.col_val[21] = 1'b1;
      21: force dut.g_idct.u_ip.row_round[1] = 1'b1;
      22: force dut.g_idct.u_ip.row_round[2] = 1'b0;
      23: force dut.g_idct.u_ip.row_round[7] = 1'b0;
      24: force dut.g_idct.u_ip.row_round[8] = 1'b1;
      25: force dut.g_idct.u_ip.row_round[13] = 1'b1;
      26: force dut.g_idct.u_ip.row_round[14] = 1'b1;
      27: force dut.g_idct.u_ip.row_round[18] = 1'b0;
      28: force dut.g_idct.u_ip.row_val[3] = 1'b1;
      29: force dut.g_idct.u_ip.row_val[7] = 1'b0;
      default: ;
    endcase
  endtask

  task automatic remove(int k);
    case (k)
       0: release dut.g_idct.u_ip.col_clip[0];
       1: release dut.g_idct.u_ip.col_clip[0];
       2: release dut.g_idct.u_ip.col_clip[1];
       3: release dut.g_idct.u_ip.col_clip[2];
       4: release dut.g_idct.u_ip.col_clip[3];
       5: release dut.g_idct.u_ip.col_clip[4];
       6: release dut.g_idct.u_ip.col_clip[4];
       7: release dut.g_idct.u_ip.col_clip[5];
       8: release dut.g_idct.u_ip.col_clip[6];
       9: release dut.g_idct.u_ip.col_clip[7];
      10: release dut.g_idct.u_ip.col_clip[7];
      11: release dut.g_idct.u_ip.col_round[6];
      12: release dut.g_idct.u_ip.col_round[9];
      13: release dut.g_idct.u_ip.col_round[19];
      14: release dut.g_idct.u_ip.col_round[28];
      15: release dut.g_idct.u_ip.col_round[29];
      16: release dut.g_idct.u_ip.col_round[37];
      17: release dut.g_idct.u_ip.col_round[38];
      18: release dut.g_idct.u_ip.col_val[1];
      19: release dut.g_idct.u_ip.col_val[4];
      20: release dut.g_idct.u_ip.col_val[21];
      21: release dut.g_idct.u_ip.row_round[1];
      22: release dut.g_idct.u_ip.row_round[2];
      23: release dut.g_idct.u_ip.row_round[7];
      24: release dut.g_idct.u_ip.row_round[8];
      25: release dut.g_idct.u_ip.row_round[13];
      26: release dut.g_idct.u_ip.row_round[14];
      27: release dut.g_idct.u_ip.row_round[18];
      28: release dut.g_idct.u_ip.row_val[3];
      29: release dut.g_idct.u_ip.row_val[7];
      default: ;
    endcase
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t F, f;
    bit found;
    bit det [NF][3];
    int covered [3];
    s_req = '0;
    for (int b = 0; b < 3; b++) begin
      if (b == 0) begin F = '{default: 0}; F[0] = 480; end
      else if (b == 1) for (int i = 0; i < 64; i++) F[i] = int'($urandom_range(0, 40)) - 20;
      else F = rand_block();
      f = idct_ref(F);
      for (int i = 0; i < 64; i++) begin
        mem[b*128 + i]      = word_t'(F[i]);
        mem[b*128 + 64 + i] = word_t'(f[i]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 1; n <= 3; n++) begin
      bist(n, found);
      chk(!found, $sformatf("fault-free module fails with %0d blocks", n));
    end
    for (int k = 0; k < NF; k++) begin
      inject(k);
      for (int n = 1; n <= 3; n++) begin
        bist(n, found);
        det[k][n-1] = found;
        if (found) covered[n-1]++;
      end
      remove(k);
      if (!det[k][2]) $display("fault %0d not found with 3 blocks", k);
      chk(!det[k][0] || det[k][1], $sformatf("fault %0d found with 1 block but not 2", k));
      chk(!det[k][1] || det[k][2], $sformatf("fault %0d found with 2 blocks but not 3", k));
    end
    bist(3, found);
    chk(!found, "fault-free again after the campaign");
    for (int n = 1; n <= 3; n++)
      $display("coverage with %0d block(s): %0d of %0d faults = %0d%% (reported for gate-level faults: %0d%%)",
               n, covered[n-1], NF, covered[n-1] * 100 / NF, n == 1 ? 63 : n == 2 ? 83 : 87);
    chk(covered[0] <= covered[1] && covered[1] <= covered[2], "coverage does not shrink with more blocks");
    chk(covered[2] > covered[0], "more blocks find more faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
