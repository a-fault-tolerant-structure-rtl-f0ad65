// ip_mux: the MUX in front of the IP core. It chooses which stream feeds the
// core: test patterns from the BIST core's TPG ("Data4") when sel is
// SEL_TEST, or operands from the input buffer ("Data5") when sel is
// SEL_NORMAL. The chosen stream's valid and data go to the core ("Data6") and
// the core's ready goes back to the chosen source only; the other source sees
// ready low and is held off. Purely combinational.
//
// The architecture shows the MUX, its inputs and its "Select" from the
// hardware control unit; the valid/ready handshake is this design's choice.
module ip_mux
  import ft_pkg::*;
(
  input  sel_e  sel,
  input  logic  test_valid,
  output logic  test_ready,
  input  word_t test_data,
  input  logic  norm_valid,
  output logic  norm_ready,
  input  word_t norm_data,
  output logic  ip_valid,
  input  logic  ip_ready,
  output word_t ip_data
);

  always_comb begin
    if (sel == SEL_TEST) begin
      ip_valid = test_valid;
      ip_data  = test_data;
    end else begin
      ip_valid = norm_valid;
      ip_data  = norm_data;
    end
    test_ready = (sel == SEL_TEST)   && ip_ready;
    norm_ready = (sel == SEL_NORMAL) && ip_ready;
  end

endmodule
