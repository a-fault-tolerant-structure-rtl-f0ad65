// tb_bus_interconnect: self-checking test of the shared bus. Three masters
// issue random reads and writes at random times to three model slaves with
// different latencies and to an unmapped address. Checks that every
// transaction reaches the slave its address decodes to with the right
// fields, that the right master gets the right data back, that requests from
// all masters are served (round robin: no master waits more than two other
// transactions), the error response for unmapped addresses, and burst reads:
// every beat of a burst reaches the master that asked for it, and no other
// master gets the bus until the last beat.
module tb_bus_interconnect;
  import ft_pkg::*;
  localparam int unsigned NM = 3, NS = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS];
  bus_rsp_t s_rsp [NS];
  int checks = 0, failures = 0;
  int done_cnt [NM];
  int served = 0;

  bus_interconnect #(.NM(NM), .NS(NS)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // model slaves: slave s answers after s+1 cycles; reads return a function
  // of slave, address and the last value written to that address; a burst
  // read then delivers its further words one per cycle
  word_t smem [NS][256];
  for (genvar s = 0; s < NS; s++) begin : g_slv
    int cnt, bleft;
    logic [7:0] bptr;
    always_ff @(posedge clk) begin
      if (!rst_n) begin cnt <= 0; bleft <= 0; bptr <= '0; s_rsp[s] <= '0; end
      else begin
        s_rsp[s].ready <= 1'b0;
        if (bleft > 0) begin
          s_rsp[s].ready <= 1'b1;
          s_rsp[s].rdata <= smem[s][bptr] ^ (word_t'(s) << 28);
          bptr  <= bptr + 1'b1;
          bleft <= bleft - 1;
        end else if (s_req[s].req && !s_rsp[s].ready) begin
          if (cnt == s) begin
            cnt <= 0;
            s_rsp[s].ready <= 1'b1;
            s_rsp[s].rdata <= smem[s][s_req[s].addr[7:0]] ^ (word_t'(s) << 28);
            if (s_req[s].we) smem[s][s_req[s].addr[7:0]] <= s_req[s].wdata;
            else begin
              bleft <= int'(s_req[s].blen);
              bptr  <= s_req[s].addr[7:0] + 8'd1;
            end
          end else cnt <= cnt + 1;
        end
      end
    end
  end

  function automatic int decode(addr_t a);
    if (a[15:12] == 4'h0) return 0;
    if (a[15:8] == 8'h10) return 1;
    if (a[15:8] == 8'h11) return 2;
    return NS;
  endfunction

  word_t shadow [NS][256];

  for (genvar m = 0; m < NM; m++) begin : g_mst
    initial begin
      addr_t a;
      int s, waited, blen;
      bit we;
      word_t d, expd;
      m_req[m] = '0;
      @(posedge rst_n);
      for (int i = 0; i < 300; i++) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        case ($urandom_range(0, 9))
          0, 1, 2: a = {4'h0, 4'(m), 8'($urandom_range(0, 15))};
          3, 4, 5: a = {8'h10, 4'(m), 4'($urandom_range(0, 15))};
          6, 7, 8: a = {8'h11, 4'(m), 4'($urandom_range(0, 15))};
          default: a = 16'hF000;
        endcase
        we = $urandom_range(0, 1);
        d = $urandom;
        s = decode(a);
        blen = (!we && s < NS && $urandom_range(0, 2) == 0) ? $urandom_range(1, 15) : 0;
        @(negedge clk);
        m_req[m] = '{req: 1'b1, we: we, blen: BLEN_W'(blen), addr: a, wdata: d};
        waited = 0;
        do begin @(negedge clk); waited++; end while (!m_rsp[m].ready);
        if (s < NS) begin
          expd = shadow[s][a[7:0]] ^ (word_t'(s) << 28);
          if (we) shadow[s][a[7:0]] = d;
        end else expd = 32'hBAD0ADD4;
        chk(m_rsp[m].rdata == expd, $sformatf("m%0d addr %h rdata %h exp %h", m, a, m_rsp[m].rdata, expd));
        chk(waited <= 3 * (NS + 3) + 2 * 16, $sformatf("m%0d waited %0d", m, waited));
        for (int k = 1; k <= blen; k++) begin
          @(negedge clk);
          expd = shadow[s][8'(a[7:0] + 8'(k))] ^ (word_t'(s) << 28);
          chk(m_rsp[m].ready && m_rsp[m].rdata == expd,
              $sformatf("m%0d burst %h beat %0d ready %b rdata %h exp %h", m, a, k, m_rsp[m].ready, m_rsp[m].rdata, expd));
        end
        @(posedge clk);
        #1 m_req[m].req = 1'b0;
        done_cnt[m]++;
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < 256; i++) begin smem[s][i] = '0; shadow[s][i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt[0] == 300 && done_cnt[1] == 300 && done_cnt[2] == 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
