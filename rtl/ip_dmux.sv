// ip_dmux: the DMUX behind the IP core. It steers each result of the core
// ("Data7" with its "Done1") either to the BIST core's TRA ("Data8", "Done2")
// when sel is SEL_TEST, or to the result memory of the hardware control unit
// ("Data9", "Done3") when sel is SEL_NORMAL. Only the selected sink sees valid;
// the core's out_ready comes from that sink, and the other sink's data bus is
// held at zero. Purely combinational.
//
// The architecture shows the DMUX, its outputs and its "Select"; the
// valid/ready handshake is this design's choice.
module ip_dmux
  import ft_pkg::*;
(
  input  sel_e  sel,
  input  logic  ip_valid,
  output logic  ip_ready,
  input  word_t ip_data,
  output logic  test_valid,
  input  logic  test_ready,
  output word_t test_data,
  output logic  norm_valid,
  input  logic  norm_ready,
  output word_t norm_data
);

  always_comb begin
    test_valid = (sel == SEL_TEST)   && ip_valid;
    norm_valid = (sel == SEL_NORMAL) && ip_valid;
    // the unselected sink sees a quiet (all-zero) data bus
    test_data  = (sel == SEL_TEST)   ? ip_data : '0;
    norm_data  = (sel == SEL_NORMAL) ? ip_data : '0;
    ip_ready   = (sel == SEL_TEST) ? test_ready : norm_ready;
  end

endmodule
