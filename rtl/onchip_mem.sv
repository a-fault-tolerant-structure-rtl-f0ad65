// onchip_mem: the on-chip memory of the system, a single-port RAM of WORDS
// 32-bit words on the bus. It holds the test-pattern tables (patterns and
// their correct results) that the fault-tolerant modules fetch by DMA, and
// any other data of the processors.
//
// Bus slave: a single access seen in one cycle is performed at the next rising
// edge and answered with ready in the following cycle (rdata valid with
// ready). A burst read (blen > 0) returns blen+1 words from consecutive
// addresses, one per cycle with ready high in each, the first one cycle after
// the request is seen: a 16-word burst takes 17 cycles. Writes are single.
// Addresses are word addresses; bits above the RAM size are ignored (the
// interconnect only selects the memory for its own window) and a burst wraps
// at the end of the RAM. The array is not reset.
//
// The architecture only names the on-chip memory and evaluates burst
// transfers for the DMA; size and timing are this design's choices.
module onchip_mem
  import ft_pkg::*;
#(
  parameter int unsigned WORDS = 4096
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp
);

  localparam int unsigned MA = $clog2(WORDS);

  word_t             mem [WORDS];
  word_t             rdata_q;
  logic              ready_q;
  logic              access;
  logic              burst;     // burst beats still to deliver
  logic [BLEN_W-1:0] left;      // beats left after the current one
  logic [MA-1:0]     a, ptr, ra;

  assign access = s_req.req && !ready_q && !burst;
  assign a      = s_req.addr[MA-1:0];
  assign ra     = burst ? ptr : a;
  assign s_rsp  = '{ready: ready_q, rdata: rdata_q};

  always_ff @(posedge clk) begin
    if (access && s_req.we) mem[a] <= s_req.wdata;
    if (access || burst)    rdata_q <= mem[ra];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready_q <= 1'b0;
      burst   <= 1'b0;
      left    <= '0;
      ptr     <= '0;
    end else begin
      ready_q <= access || burst;
      if (burst) begin
        ptr  <= ptr + 1'b1;
        left <= left - 1'b1;
        if (left == BLEN_W'(1)) burst <= 1'b0;
      end else if (access && !s_req.we && s_req.blen != '0) begin
        burst <= 1'b1;
        ptr   <= a + 1'b1;
        left  <= s_req.blen;
      end
    end
  end

  a_no_burst_write: assert property (@(posedge clk) disable iff (!rst_n)
    s_req.req && s_req.we |-> s_req.blen == '0);

endmodule
