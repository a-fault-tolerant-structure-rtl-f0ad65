// bist_core: the BIST core of a fault-tolerant IP module, made of its three
// parts: the TPG (bist_tpg), the TRA (bist_tra) and the BIST control unit
// (bist_ctrl).
//
// The hardware control unit raises enable ("BIST_Enable") with the number N of
// test patterns and then streams, per pattern, IN_WORDS pattern words followed
// by OUT_WORDS correct-result words on one channel; pat_is_exp marks the
// correct-result words. The core sends pattern words to the IP core through the
// MUX (tpg_*, "Data4"), receives the IP core's responses through the DMUX
// (rsp_*, "Data8"/"Done2"), compares them, and after N*OUT_WORDS responses
// raises done ("Done") with result ("Result", 1 = fault) until enable falls.
// The channel is accepted only while a test is running.
//
// Storage: the TPG holds one pattern (IN_WORDS words) and the TRA one pattern's
// correct results (OUT_WORDS words). This is the on-chip "test pattern and test
// result pattern memory" of one pattern that the architecture counts in its
// cost; all other patterns stay in memory until fetched.
//
// Timing: patterns and responses move at up to one word per cycle; done rises
// two cycles after the last response is accepted.
module bist_core
  import ft_pkg::*;
#(
  parameter int unsigned IN_WORDS  = 1,
  parameter int unsigned OUT_WORDS = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [15:0] num_patterns,
  input  logic        pat_valid,
  output logic        pat_ready,
  input  word_t       pat_data,
  input  logic        pat_is_exp,
  output logic        tpg_valid,
  input  logic        tpg_ready,
  output word_t       tpg_data,
  input  logic        rsp_valid,
  output logic        rsp_ready,
  input  word_t       rsp_data,
  output logic        done,
  output logic        result,
  output logic [23:0] applied,
  output logic [23:0] mismatches
);

  logic clear, running, tpg_in_ready, exp_ready, tra_fault;
  logic [23:0] compared;

  assign pat_ready = running && (pat_is_exp ? exp_ready : tpg_in_ready);

  bist_tpg #(.DEPTH(IN_WORDS)) u_tpg (
    .clk, .rst_n, .clear,
    .in_valid(running && pat_valid && !pat_is_exp), .in_ready(tpg_in_ready), .in_data(pat_data),
    .out_valid(tpg_valid), .out_ready(tpg_ready), .out_data(tpg_data),
    .applied
  );

  bist_tra #(.DEPTH(OUT_WORDS)) u_tra (
    .clk, .rst_n, .clear,
    .exp_valid(running && pat_valid && pat_is_exp), .exp_ready, .exp_data(pat_data),
    .rsp_valid, .rsp_ready, .rsp_data,
    .compared, .mismatches, .fault(tra_fault)
  );

  bist_ctrl #(.OUT_WORDS(OUT_WORDS)) u_ctrl (
    .clk, .rst_n, .enable, .num_patterns, .compared, .tra_fault,
    .clear, .running, .done, .result
  );

endmodule
