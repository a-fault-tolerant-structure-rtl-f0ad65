// tb_ip_dmux: exhaustive check of the IP output DMUX over select, the core's
// valid and both sinks' ready, with random data words.
module tb_ip_dmux;
  import ft_pkg::*;
  sel_e sel;
  logic ip_valid, ip_ready, test_valid, test_ready, norm_valid, norm_ready;
  word_t ip_data, test_data, norm_data;
  int checks = 0, failures = 0;

  ip_dmux dut (.*);

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
        ip_valid = v[1]; test_ready = v[2]; norm_ready = v[3];
        ip_data = $urandom;
        #1;
        checks++;
        if (test_valid !== (v[0] && v[1]) || norm_valid !== (!v[0] && v[1]) ||
            ip_ready !== (v[0] ? v[2] : v[3]) ||
            test_data !== (v[0] ? ip_data : 0) || norm_data !== (v[0] ? 0 : ip_data)) begin
          failures++;
          $display("FAIL dmux case %0d", v);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
