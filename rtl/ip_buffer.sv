// ip_buffer: synchronous FIFO, the BUFFER in front of the IP core.
//
// In normal mode the processor writes operand words into it over the bus
// ("Write", "Data"); the hardware control unit pops them ("Read") into the MUX
// and from there into the IP core. The buffer reports "Full" so that a bus
// write waits while there is no room. The same FIFO is reused inside the BIST
// core to hold test patterns and correct results in flight.
//
// Show-ahead: rd_data is the oldest word whenever empty is low; rd_en pops it.
// A write and a read may happen in the same cycle, also when full (the read
// frees the slot). Writes while full without a read, and reads while empty,
// are ignored (and flagged by assertions). Count and pointers reset to zero,
// and clr empties the FIFO synchronously; storage is not reset.
//
// The architecture names the buffer and its Write/Data/Full/Read signals;
// depth and show-ahead behaviour are this design's choices.
module ip_buffer #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wptr, rptr;
  logic          do_wr, do_rd;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rptr];

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (clr) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      count <= count + ($clog2(DEPTH+1))'(do_wr) - ($clog2(DEPTH+1))'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
