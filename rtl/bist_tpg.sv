// bist_tpg: Test Pattern Generator of the BIST core. In this architecture the
// patterns are not generated on chip: the hardware control unit fetches them
// from memory by DMA, and the TPG passes them on to the IP core through the
// MUX ("Data4"). It decouples the two sides with a small FIFO, so that the
// DMA can run ahead of the core, and counts the pattern words it has applied.
// clear (from the BIST control unit at the start of a test) empties the FIFO
// and zeroes the count. One word per cycle in each direction.
//
// Passing patterns on from the control unit follows the architecture; the FIFO
// and its depth are this design's choices.
module bist_tpg
  import ft_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output logic [23:0] applied
);

  logic full, empty;
  logic [$clog2(DEPTH+1)-1:0] count;

  ip_buffer #(.W(DW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clr(clear),
    .wr_en(in_valid && !full), .wr_data(in_data), .full,
    .rd_en(out_valid && out_ready), .rd_data(out_data), .empty, .count
  );

  assign in_ready  = !full;
  assign out_valid = !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      applied <= '0;
    else if (clear)                  applied <= '0;
    else if (out_valid && out_ready) applied <= applied + 24'd1;
  end

endmodule
