// bist_tra: Test Response Analyzer of the BIST core. The correct results,
// fetched from memory by the hardware control unit, wait in a small FIFO; each
// response of the IP core that arrives through the DMUX ("Data8" with "Done2")
// is compared with the oldest correct result. A mismatch sets the sticky fault
// flag and is counted. A response is accepted only while a correct result is
// waiting (rsp_ready = correct result available), so the core is stalled rather
// than compared against nothing. clear zeroes counts, flag and FIFO.
//
// Comparing against correct results held in memory follows the architecture;
// the word-by-word equality compare, the FIFO and the counters are this
// design's choices.
module bist_tra
  import ft_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        exp_valid,
  output logic        exp_ready,
  input  word_t       exp_data,
  input  logic        rsp_valid,
  output logic        rsp_ready,
  input  word_t       rsp_data,
  output logic [23:0] compared,
  output logic [23:0] mismatches,
  output logic        fault
);

  logic  full, empty, take;
  word_t head;
  logic [$clog2(DEPTH+1)-1:0] count;

  ip_buffer #(.W(DW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clr(clear),
    .wr_en(exp_valid && !full), .wr_data(exp_data), .full,
    .rd_en(take), .rd_data(head), .empty, .count
  );

  assign exp_ready = !full;
  assign rsp_ready = !empty;
  assign take      = rsp_valid && rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      compared   <= '0;
      mismatches <= '0;
      fault      <= 1'b0;
    end else if (clear) begin
      compared   <= '0;
      mismatches <= '0;
      fault      <= 1'b0;
    end else if (take) begin
      compared <= compared + 24'd1;
      if (rsp_data != head) begin
        mismatches <= mismatches + 24'd1;
        fault      <= 1'b1;
      end
    end
  end

endmodule
