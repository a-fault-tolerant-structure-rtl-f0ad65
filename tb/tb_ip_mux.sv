// tb_ip_mux: exhaustive check of the IP input MUX over select, both valids and
// the core's ready, with random data words.
module tb_ip_mux;
  import ft_pkg::*;
  sel_e sel;
  logic test_valid, test_ready, norm_valid, norm_ready, ip_valid, ip_ready;
  word_t test_data, norm_data, ip_data;
  int checks = 0, failures = 0;

  ip_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 50; rep++)
      for (int v = 0; v < 16; v++) begin
        sel = v[0] ? SEL_TEST : SEL_NORMAL;
        test_valid = v[1]; norm_valid = v[2]; ip_ready = v[3];
        test_data = $urandom; norm_data = $urandom;
        #1;
        checks++;
        if (ip_valid !== (v[0] ? v[1] : v[2]) ||
            ip_data !== (v[0] ? test_data : norm_data) ||
            test_ready !== (v[0] && v[3]) ||
            norm_ready !== (!v[0] && v[3])) begin
          failures++;
          $display("FAIL mux case %0d", v);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
