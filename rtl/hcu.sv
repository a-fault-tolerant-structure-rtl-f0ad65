// hcu: Hardware Control Unit of a fault-tolerant IP module, including its
// Result Memory. It is the module's face to the interconnect and runs both of
// its modes:
//
// Test mode. The processor programs the address of the test-pattern table
// (REG_PAT_BASE) and the number N of patterns (REG_PAT_COUNT) and writes the
// start bit of REG_CTRL: the BIST request. The unit switches MUX and DMUX to
// the BIST core ("Select"), raises "BIST_Enable" and, as a DMA bus master,
// reads the table word by word: pattern p starts at PAT_BASE + p*(IN_WORDS +
// OUT_WORDS) and holds IN_WORDS pattern words followed by OUT_WORDS correct
// results, patterns in priority order (most important first). Each word is
// handed to the BIST core with a flag telling pattern from correct result.
// The DMA prefetches: it reads the table in bursts of up to BURST words into a
// FIFO of two bursts, and starts the next burst as soon as it fits, while
// earlier words are still being handed over; fetching, testing and the
// processor's own work thus overlap.
// When the BIST core reports Done, the unit latches Result, drops
// BIST_Enable, switches back to normal mode and raises ack; ack and fault are
// both output pins and status bits, and stay until the next start.
//
// Normal mode. Operands written by the processor into the input buffer are
// popped ("Read") into the IP core whenever the core takes them; the core's
// results ("Data9"/"Done3") are stored in the result memory in arrival order,
// up to RES_DEPTH words, which the processor reads at REG_RES_BASE + i.
// REG_RES_COUNT tells how many are held; bit 1 of REG_CTRL empties it.
//
// Bus timing: a register access is answered one cycle after it is seen. A DMA
// burst of 16 words from the on-chip memory takes 18 bus cycles, and the BIST
// core can take one word per cycle, so a test runs close to one word per cycle
// unless the IP core or bus traffic slows it. REG_CYCLES
// holds the length in cycles of the last BIST run, start to ack; REG_APPLIED
// and REG_MISMATCH pass on the BIST core's counts of applied pattern words and
// of wrong responses.
//
// The architecture gives the unit's duties (control of the BIST parts, bus
// interface, DMA fetch of patterns and correct results, ack and one-bit fault
// to the processor, result memory) and the priority order of patterns; the
// register map, table layout, burst length and prefetch depth are this
// design's choices (the architecture uses DMA with burst transfers and data
// prefetch, on an AMBA bus).
module hcu
  import ft_pkg::*;
#(
  parameter int unsigned IN_WORDS      = 1,
  parameter int unsigned OUT_WORDS     = 1,
  parameter int unsigned RES_DEPTH     = 64,
  parameter int unsigned DEF_PAT_COUNT = 4,
  parameter int unsigned BURST         = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // register slave port (req already decoded for this unit)
  input  bus_req_t    s_req,
  output bus_rsp_t    s_rsp,
  // DMA master port
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp,
  // BIST core
  output logic        bist_enable,
  output logic [15:0] num_patterns,
  input  logic        bist_done,
  input  logic        bist_result,
  input  logic [23:0] bist_applied,
  input  logic [23:0] bist_mismatches,
  output logic        pat_valid,
  input  logic        pat_ready,
  output word_t       pat_data,
  output logic        pat_is_exp,
  // MUX / DMUX select
  output sel_e        sel,
  // input buffer
  input  logic        buf_empty,
  input  logic        buf_full,
  input  logic        norm_ready,
  output logic        buf_read,
  // normal-mode results from the DMUX
  input  logic        res_valid,
  output logic        res_ready,
  input  word_t       res_data,
  // to the processor
  output logic        ack,
  output logic        fault
);

  localparam int unsigned PAT_WORDS = IN_WORDS + OUT_WORDS;
  localparam int unsigned RW = $clog2(RES_DEPTH + 1);
  localparam int unsigned RA = (RES_DEPTH > 1) ? $clog2(RES_DEPTH) : 1;
  localparam int unsigned PF_DEPTH = 2 * BURST;  // prefetch FIFO: two bursts
  localparam int unsigned PC = $clog2(PF_DEPTH + 1);

  initial assert (RES_DEPTH <= 128) else $fatal(1, "hcu: result memory exceeds its 128-word window");
  initial assert (BURST >= 1 && BURST <= 2**BLEN_W) else $fatal(1, "hcu: burst length out of range");

  typedef enum logic [1:0] {D_IDLE, D_RUN, D_WAIT, D_END} dstate_e;

  dstate_e     dstate;
  addr_t       pat_base, fetch_addr;
  logic [15:0] pat_count;
  logic [23:0] total, fetch_left, pushed;
  logic [$clog2(PAT_WORDS+1)-1:0] word_idx;
  word_t       cycles;
  logic        busy;
  logic [RW-1:0] res_count;
  word_t       res_mem [RES_DEPTH];

  logic [7:0] off;
  logic       s_access, start;
  assign off      = s_req.addr[7:0];
  assign s_access = s_req.req && !s_rsp.ready;
  assign start    = s_access && s_req.we && off == REG_CTRL && s_req.wdata[0] && !busy;

  assign busy         = (dstate != D_IDLE);
  assign sel          = busy ? SEL_TEST : SEL_NORMAL;
  assign bist_enable  = (dstate == D_RUN) || (dstate == D_WAIT);
  assign num_patterns = pat_count;

  // ---------------- DMA of test patterns and correct results ----------------
  // Fetch side: burst reads into the prefetch FIFO, issued whenever a whole
  // burst fits. Hand-over side: FIFO head to the BIST core. Both run at once.
  logic              f_active, pf_full, pf_empty, push;
  logic [BLEN_W-1:0] f_blen, f_beat;
  logic [PC-1:0]     pf_count;
  logic [23:0]       next_len;

  assign next_len = (fetch_left < 24'(BURST)) ? fetch_left : 24'(BURST);
  assign m_req    = '{req: f_active, we: 1'b0, blen: f_blen, addr: fetch_addr, wdata: '0};

  ip_buffer #(.W(DW), .DEPTH(PF_DEPTH)) u_prefetch (
    .clk, .rst_n, .clr(start),
    .wr_en(f_active && m_rsp.ready), .wr_data(m_rsp.rdata), .full(pf_full),
    .rd_en(push), .rd_data(pat_data), .empty(pf_empty), .count(pf_count)
  );

  assign pat_valid  = (dstate == D_RUN) && !pf_empty;
  assign push       = pat_valid && pat_ready;
  assign pat_is_exp = (word_idx >= ($bits(word_idx))'(IN_WORDS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate     <= D_IDLE;
      fetch_addr <= '0;
      fetch_left <= '0;
      total      <= '0;
      pushed     <= '0;
      word_idx   <= '0;
      f_active   <= 1'b0;
      f_blen     <= '0;
      f_beat     <= '0;
      ack        <= 1'b0;
      fault      <= 1'b0;
      cycles     <= '0;
    end else begin
      if (busy) cycles <= cycles + 1'b1;
      unique case (dstate)
        D_IDLE: if (start) begin
          ack        <= 1'b0;
          fault      <= 1'b0;
          cycles     <= 32'd1;
          fetch_addr <= pat_base;
          fetch_left <= 24'(pat_count) * 24'(PAT_WORDS);
          total      <= 24'(pat_count) * 24'(PAT_WORDS);
          pushed     <= '0;
          word_idx   <= '0;
          dstate     <= (pat_count == 16'd0) ? D_WAIT : D_RUN;
        end
        D_RUN: begin
          // fetch side
          if (!f_active) begin
            if (fetch_left != '0 && 32'(pf_count) + 32'(next_len) <= 32'(PF_DEPTH)) begin
              f_active <= 1'b1;
              f_blen   <= BLEN_W'(next_len - 24'd1);
              f_beat   <= '0;
            end
          end else if (m_rsp.ready) begin
            if (f_beat == f_blen) begin
              f_active   <= 1'b0;
              fetch_addr <= fetch_addr + AW'(f_blen) + 1'b1;
              fetch_left <= fetch_left - 24'(f_blen) - 24'd1;
            end else f_beat <= f_beat + 1'b1;
          end
          // hand-over side
          if (push) begin
            pushed   <= pushed + 24'd1;
            word_idx <= (word_idx == ($bits(word_idx))'(PAT_WORDS - 1)) ? '0 : word_idx + 1'b1;
            if (pushed + 24'd1 == total) dstate <= D_WAIT;
          end
        end
        D_WAIT: if (bist_done) begin
          fault  <= bist_result;
          dstate <= D_END;
        end
        D_END: begin  // BIST_Enable is low here, letting the BIST core return to idle
          ack    <= 1'b1;
          dstate <= D_IDLE;
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  // ---------------- normal mode: buffer read and result memory --------------
  assign buf_read  = !buf_empty && norm_ready;
  assign res_ready = (res_count < RW'(RES_DEPTH));

  always_ff @(posedge clk) begin
    if (res_valid && res_ready) res_mem[res_count[RA-1:0]] <= res_data;
  end

  // ---------------- register slave ----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rsp     <= '0;
      pat_base  <= '0;
      pat_count <= 16'(DEF_PAT_COUNT);
      res_count <= '0;
    end else begin
      s_rsp.ready <= s_access;
      s_rsp.rdata <= '0;
      if (res_valid && res_ready) res_count <= res_count + 1'b1;
      if (s_access && s_req.we) begin
        unique case (off)
          REG_CTRL:      if (s_req.wdata[1]) res_count <= '0;
          REG_PAT_BASE:  if (!busy) pat_base  <= s_req.wdata[AW-1:0];
          REG_PAT_COUNT: if (!busy) pat_count <= s_req.wdata[15:0];
          default: ;
        endcase
      end else if (s_access) begin
        if (off[7]) s_rsp.rdata <= (off[6:0] < 7'(RES_DEPTH)) ? res_mem[off[RA-1:0]] : '0;
        else begin
          unique case (off)
            REG_STATUS:    s_rsp.rdata <= {28'd0, buf_full, fault, ack, busy};
            REG_PAT_BASE:  s_rsp.rdata <= DW'(pat_base);
            REG_PAT_COUNT: s_rsp.rdata <= DW'(pat_count);
            REG_RES_COUNT: s_rsp.rdata <= DW'(res_count);
            REG_CYCLES:    s_rsp.rdata <= cycles;
            REG_APPLIED:   s_rsp.rdata <= DW'(bist_applied);
            REG_MISMATCH:  s_rsp.rdata <= DW'(bist_mismatches);
            default:       s_rsp.rdata <= '0;
          endcase
        end
      end
    end
  end

  a_dma_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req.req && !m_rsp.ready |=> m_req.req && $stable(m_req.addr) && $stable(m_req.blen));
  a_pf_room: assert property (@(posedge clk) disable iff (!rst_n)
    !(f_active && m_rsp.ready && pf_full));

endmodule
