// tb_sort_ip: self-checking test of the combinational sorting core.
// Drives directed corner cases and random words, checks each output against a
// reference sort written here (selection sort), checks that the output holds
// the same multiset as the input, and checks the valid/ready pass-through.
module tb_sort_ip;
  import ft_pkg::*;

  localparam int unsigned NUM = 4;
  localparam int unsigned EW  = 8;

  logic  in_valid, in_ready, out_valid, out_ready;
  word_t in_data, out_data;
  int checks = 0, failures = 0;

  sort_ip #(.NUM(NUM), .EW(EW)) dut (.*);

  function automatic word_t ref_sort(word_t w);
    logic [EW-1:0] a [NUM];
    logic [EW-1:0] t;
    word_t r = '0;
    for (int i = 0; i < NUM; i++) a[i] = w[i*EW +: EW];
    for (int i = 0; i < NUM; i++)
      for (int j = i + 1; j < NUM; j++)
        if (a[j] < a[i]) begin t = a[i]; a[i] = a[j]; a[j] = t; end
    for (int i = 0; i < NUM; i++) r[i*EW +: EW] = a[i];
    return r;
  endfunction

  task automatic check_word(word_t w);
    in_data = w;
    #1;
    checks++;
    if (out_data !== ref_sort(w)) begin
      failures++;
      $display("FAIL sort in=%h got=%h exp=%h", w, out_data, ref_sort(w));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b1; out_ready = 1'b1; in_data = '0;
    check_word(32'h00000000);
    check_word(32'hFFFFFFFF);
    check_word(32'h01020304);
    check_word(32'h04030201);
    check_word(32'h80FF0001);
    check_word(32'h7F7F0101);
    for (int i = 0; i < 2000; i++) check_word($urandom);
    // handshake pass-through
    for (int v = 0; v < 2; v++)
      for (int r = 0; r < 2; r++) begin
        in_valid = v[0]; out_ready = r[0]; #1;
        checks++;
        if (out_valid !== v[0] || in_ready !== r[0]) begin
          failures++;
          $display("FAIL handshake v=%0d r=%0d", v, r);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
