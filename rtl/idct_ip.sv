// idct_ip: sequential 8x8 two-dimensional inverse DCT, the "sequential
// circuit module" of the architecture's IDCT experiment and the hardware
// module of its MPEG-2 decoder case study.
//
// Operation, one block at a time:
//   LOAD  64 cycles  accept 64 coefficients F[v][u], row-major (index v*8+u),
//                    a signed 12-bit value in bits [11:0] of each word;
//   ROW   64 cycles  t[v][x] = round(sum_u K[u][x]*F[v][u] / 2^10), one per cycle;
//   COL   64 cycles  f[y][x] = clip(round(sum_v K[v][y]*t[v][x] / 2^16)), one per
//                    cycle, each written straight to the output stream
//                    (row-major y*8+x, sign-extended to 32 bits, clipped to
//                    -256..255 as MPEG-2 requires).
// K[u][x] = round(4096*C(u)*cos((2x+1)u*pi/16)), C(0) = 1/sqrt(2), C(u>0) = 1,
// is the separable IDCT kernel scaled by 2^13; only eight magnitudes occur and
// they are held in a small table. Each cycle uses eight multipliers and an adder
// tree. A block takes 192 cycles plus any stall of out_ready.
//
// Interface: valid/ready stream in and out; out_valid is the core's "Done".
// in_ready is high only in LOAD, so the next block can be loaded as soon as the
// last result of the previous one has been taken.
//
// The architecture gives only "IDCT module" and "sequential"; the 8x8 block
// size follows MPEG-2, the fixed-point precision and the schedule are this
// design's own choices.
module idct_ip
  import ft_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);

  typedef enum logic [1:0] {S_LOAD, S_ROW, S_COL} state_e;

  // |K| magnitudes for m = 0..7: round(4096*cos(m*pi/16)); 2896 is also 4096/sqrt(2).
  localparam logic [12:0] KMAG [8] = '{13'd4096, 13'd4017, 13'd3784, 13'd3406,
                                       13'd2896, 13'd2276, 13'd1567, 13'd799};

  // Kernel coefficient K[u][x] (scaled by 2^13), signed.
  function automatic logic signed [13:0] kcoef(input logic [2:0] u, input logic [2:0] x);
    logic [4:0] m;
    logic signed [13:0] mag;
    if (u == 3'd0) return 14'sd2896;
    m = 5'(u * ({x, 1'b1}));  // u*(2x+1) mod 32
    if (m <= 5'd8)       mag = (m == 5'd8)  ? 14'sd0 :  $signed({1'b0, KMAG[m[2:0]]});
    else if (m < 5'd16)  mag = -$signed({1'b0, KMAG[3'(5'd16 - m)]});
    else if (m <= 5'd24) mag = (m == 5'd24) ? 14'sd0 : -$signed({1'b0, KMAG[3'(m - 5'd16)]});
    else                 mag =  $signed({1'b0, KMAG[3'(6'd32 - 6'(m))]});
    return mag;
  endfunction

  state_e state;
  logic [5:0] idx;
  logic signed [11:0] coef [64];
  logic signed [17:0] tmp  [64];

  logic [2:0] hi, lo;
  assign hi = idx[5:3];
  assign lo = idx[2:0];

  // Row pass: t[hi][lo] = sum_u K[u][lo] * F[hi][u]
  // Column pass: f[hi][lo] = sum_v K[v][hi] * t[v][lo]
  logic signed [39:0] acc;
  logic signed [27:0] row_round;
  logic signed [39:0] col_round;
  logic signed [17:0] row_val;
  logic signed [23:0] col_val;
  logic signed [8:0]  col_clip;

  always_comb begin
    acc = '0;
    for (int k = 0; k < 8; k++) begin
      if (state == S_ROW)
        acc += 40'(coef[{hi, 3'(k)}] * kcoef(3'(k), lo));
      else
        acc += 40'(tmp[{3'(k), lo}] * kcoef(3'(k), hi));
    end
    row_round = 28'(acc + 40'sd512);
    row_val   = 18'(row_round >>> 10);
    col_round = acc + 40'sd32768;
    col_val   = 24'(col_round >>> 16);
    if (col_val > 24'sd255)       col_clip = 9'sd255;
    else if (col_val < -24'sd256) col_clip = -9'sd256;
    else                          col_clip = 9'(col_val);
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_COL);
  assign out_data  = word_t'(signed'(col_clip));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      idx   <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          coef[idx] <= in_data[11:0];
          idx <= idx + 6'd1;
          if (idx == 6'd63) state <= S_ROW;
        end
        S_ROW: begin
          tmp[idx] <= row_val;
          idx <= idx + 6'd1;
          if (idx == 6'd63) state <= S_COL;
        end
        S_COL: if (out_ready) begin
          idx <= idx + 6'd1;
          if (idx == 6'd63) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
