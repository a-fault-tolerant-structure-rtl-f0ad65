// tb_idct_ip: self-checking test of the 8x8 IDCT core.
// The reference computes the same fixed-point separable IDCT with kernel
// constants derived at run time from $cos, and also the exact real-valued IDCT,
// which the core must match within +-1. Checks the 64-cycle load, 192-cycle
// block latency (first result 128 cycles after the last coefficient) and that
// out_ready back-pressure does not lose or repeat results.
module tb_idct_ip;
  import ft_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  word_t in_data, out_data;
  int checks = 0, failures = 0;
  int cycle = 0;

  idct_ip dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  int F [64];
  int expq [64];
  real expr [64];
  int kk [8][8];

  function automatic void make_kernel();
    for (int u = 0; u < 8; u++)
      for (int x = 0; x < 8; x++) begin
        real c = (u == 0) ? 1.0 / $sqrt(2.0) : 1.0;
        kk[u][x] = int'(4096.0 * c * $cos((2.0 * x + 1.0) * u * 3.141592653589793 / 16.0));
      end
  endfunction

  function automatic int rshift_round(longint v, int s);
    longint r = (v + (longint'(1) <<< (s - 1))) >>> s;
    return int'(r);
  endfunction

  function automatic void reference();
    int t [64];
    for (int v = 0; v < 8; v++)
      for (int x = 0; x < 8; x++) begin
        longint s = 0;
        for (int u = 0; u < 8; u++) s += longint'(kk[u][x]) * F[v*8+u];
        t[v*8+x] = rshift_round(s, 10);
      end
    for (int y = 0; y < 8; y++)
      for (int x = 0; x < 8; x++) begin
        longint s = 0;
        real r = 0.0;
        int q;
        for (int v = 0; v < 8; v++) s += longint'(kk[v][y]) * t[v*8+x];
        q = rshift_round(s, 16);
        expq[y*8+x] = (q > 255) ? 255 : (q < -256) ? -256 : q;
        for (int v = 0; v < 8; v++)
          for (int u = 0; u < 8; u++) begin
            real cu = (u == 0) ? 1.0 / $sqrt(2.0) : 1.0;
            real cv = (v == 0) ? 1.0 / $sqrt(2.0) : 1.0;
            r += 0.25 * cu * cv * F[v*8+u]
                 * $cos((2.0 * x + 1.0) * u * 3.141592653589793 / 16.0)
                 * $cos((2.0 * y + 1.0) * v * 3.141592653589793 / 16.0);
          end
        expr[y*8+x] = r;
      end
  endfunction

  task automatic run_block(int kind, bit stall);
    int got, last_in, first_out;
    for (int i = 0; i < 64; i++) begin
      case (kind)
        0: F[i] = (i == 0) ? 1024 : 0;
        1: F[i] = int'($urandom_range(0, 400)) - 200;
        2: F[i] = (i < 10) ? int'($urandom_range(0, 4095)) - 2048 : int'($urandom_range(0, 60)) - 30;
        default: F[i] = (i == 0) ? -2048 : 2047;
      endcase
    end
    reference();
    for (int i = 0; i < 64; i++) begin
      in_valid <= 1'b1;
      in_data  <= word_t'(F[i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    last_in = cycle;
    first_out = -1;
    for (int i = 0; i < 64; i++) begin
      out_ready <= stall ? 1'($urandom_range(0, 1)) : 1'b1;
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        out_ready <= stall ? 1'($urandom_range(0, 1)) : 1'b1;
        @(posedge clk);
      end
      if (first_out < 0) first_out = cycle;
      got = int'($signed(out_data));
      checks++;
      if (got != expq[i]) begin
        failures++;
        $display("FAIL idct kind=%0d i=%0d got=%0d exp=%0d", kind, i, got, expq[i]);
      end
      checks++;
      if (real'(got) > expr[i] + 1.0 || real'(got) < expr[i] - 1.0) begin
        if (!(expr[i] > 255.0 || expr[i] < -256.0)) begin
          failures++;
          $display("FAIL idct accuracy i=%0d got=%0d real=%f", i, got, expr[i]);
        end
      end
    end
    out_ready <= 1'b0;
    if (!stall) begin
      checks++;
      if (first_out - last_in != 65) begin
        failures++;
        $display("FAIL latency %0d", first_out - last_in);
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    make_kernel();
    in_valid = 1'b0; in_data = '0; out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_block(0, 1'b0);
    run_block(1, 1'b0);
    run_block(2, 1'b1);
    run_block(3, 1'b0);
    for (int b = 0; b < 6; b++) run_block(1 + b % 2, b[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
