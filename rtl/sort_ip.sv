// sort_ip: combinational sorting IP core, the "combinational circuit module"
// that is wrapped by the BIST structure in the sorting experiment.
//
// One 32-bit input word carries NUM unsigned elements of EW bits, element 0 in
// the least significant bits. The output word carries the same elements in
// ascending order (element 0 = smallest). Sorting is an odd-even transposition
// network of NUM compare-exchange stages, purely combinational.
//
// Interface: valid/ready stream in and out. A result is offered in the same
// cycle as its operand (out_valid = in_valid) and the operand is consumed when
// the result is (in_ready = out_ready); out_valid is the core's "Done" signal.
//
// The architecture only says the module sorts and is combinational; element
// count, width and the network type are this design's own choices.
module sort_ip
  import ft_pkg::*;
#(
  parameter int unsigned NUM = 4,
  parameter int unsigned EW  = 8
) (
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);

  initial assert (NUM * EW <= DW) else $fatal(1, "sort_ip: NUM*EW exceeds the word width");

  logic [EW-1:0] stage [NUM+1][NUM];

  always_comb begin
    for (int i = 0; i < NUM; i++) stage[0][i] = in_data[i*EW +: EW];
    for (int s = 0; s < NUM; s++) begin
      for (int i = 0; i < NUM; i++) stage[s+1][i] = stage[s][i];
      // even stages compare pairs (0,1),(2,3)..; odd stages (1,2),(3,4)..
      for (int i = s % 2; i + 1 < NUM; i += 2) begin
        if (stage[s][i] > stage[s][i+1]) begin
          stage[s+1][i]   = stage[s][i+1];
          stage[s+1][i+1] = stage[s][i];
        end
      end
    end
    out_data = '0;
    for (int i = 0; i < NUM; i++) out_data[i*EW +: EW] = stage[NUM][i];
  end

  assign out_valid = in_valid;
  assign in_ready  = out_ready;

endmodule
