// bus_interconnect: the interconnection network of the system, built as one
// shared bus with an arbiter and an address decoder. Its masters are the
// processor (master 0) and the DMA engines of the fault-tolerant modules; its
// slaves are the on-chip memory and the register windows of the modules.
//
// Arbitration is round robin and happens once per transaction: when the bus is
// free, the next requesting master after the last owner is granted (one
// cycle); its request goes to the slave whose window (SLV_BASE, SLV_MASK)
// holds the address; the slave's ready pulses go back to that master only, and
// the last of them (blen+1 for a burst) frees the bus. A request that hits no
// window is answered by the bus itself with rdata = 0xBAD0ADD4. Masters must
// hold a request unchanged until its last ready (checked by assertion).
//
// Timing: a transaction costs one arbitration cycle plus the slave's own
// latency: three cycles for a single memory access, 18 for a 16-word burst.
// The architecture evaluates an AMBA bus with burst transfers; this simpler
// request/ready bus with incrementing read bursts is this design's own.
module bus_interconnect
  import ft_pkg::*;
#(
  parameter int unsigned NM = 3,
  parameter int unsigned NS = 3,
  parameter addr_t SLV_BASE [NS] = '{16'h0000, 16'h1000, 16'h1100},
  parameter addr_t SLV_MASK [NS] = '{16'hF000, 16'hFF00, 16'hFF00}
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [NS],
  input  bus_rsp_t s_rsp [NS]
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = $clog2(NS + 1);

  logic          busy;
  logic [MW-1:0] owner;
  logic [SW-1:0] slave;        // NS = no slave hit
  logic          err_ready;
  bus_req_t      cur;
  bus_rsp_t      cur_rsp;
  logic [MW-1:0] next_owner;
  logic          any_req;
  logic [BLEN_W-1:0] beat;

  assign cur = m_req[owner];

  // address decode of the current owner's request
  always_comb begin
    slave = SW'(NS);
    for (int s = NS - 1; s >= 0; s--)
      if ((cur.addr & SLV_MASK[s]) == SLV_BASE[s]) slave = SW'(s);
  end

  // round-robin choice of the next owner
  always_comb begin
    next_owner = owner;
    any_req    = 1'b0;
    for (int k = NM; k >= 1; k--) begin
      logic [MW-1:0] m;
      m = MW'((int'(owner) + k) % NM);
      if (m_req[m].req) begin
        next_owner = m;
        any_req    = 1'b1;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_req[s]     = cur;
      s_req[s].req = busy && cur.req && (slave == SW'(s));
    end
    cur_rsp = '{ready: err_ready, rdata: err_ready ? 32'hBAD0ADD4 : '0};
    for (int s = 0; s < NS; s++)
      if (busy && slave == SW'(s)) cur_rsp = s_rsp[s];
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = '0;
      if (busy && owner == MW'(m)) m_rsp[m] = cur_rsp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      owner     <= '0;
      err_ready <= 1'b0;
      beat      <= '0;
    end else begin
      err_ready <= busy && cur.req && slave == SW'(NS) && !err_ready;
      if (!busy) begin
        if (any_req) begin
          busy  <= 1'b1;
          owner <= next_owner;
        end
      end else if (cur_rsp.ready) begin
        if (beat == cur.blen) begin
          busy <= 1'b0;
          beat <= '0;
        end else beat <= beat + 1'b1;
      end
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].req && !m_rsp[m].ready |=> m_req[m].req && $stable(m_req[m].addr) && $stable(m_req[m].we));
  end

endmodule
