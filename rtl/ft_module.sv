// ft_module: one fault-tolerant IP module, the part of the system that the
// architecture wraps in a BIST structure: the IP core (the hardware
// accelerator under test), the input BUFFER, the MUX and DMUX around the core,
// the BIST core (TPG, TRA, BIST control) and the hardware control unit with
// its result memory.
//
//   bus write REG_BUF --> BUFFER --Data5--> MUX --Data6--> IP core --Data7--> DMUX --Data9--> HCU result memory
//                                  BIST core TPG --Data4--^            DMUX --Data8--> BIST core TRA
//   HCU: Select to MUX/DMUX, BIST_Enable/Done/Result to the BIST core,
//        DMA master on the bus for patterns and correct results.
//
// The module has one bus slave port for its 256-word window: writes to
// REG_BUF go into the buffer (the write waits while the buffer is full), all
// other offsets are the hardware control unit's registers. It has one bus
// master port, the DMA of the control unit, which reads in bursts, and the
// ack and one-bit fault outputs to the processor. The slave port takes single
// transfers only; an assertion checks that no burst is sent to it.
//
// IP_KIND chooses the IP core: IP_SORT (sort_ip, one word per pattern and
// result) or IP_IDCT (idct_ip, 64 words per pattern and result).
// The structure follows the architecture figure of the fault-tolerant module;
// the bus protocol and the buffer-write path are this design's choices.
module ft_module
  import ft_pkg::*;
#(
  parameter ip_kind_e    IP_KIND       = IP_IDCT,
  parameter int unsigned BUF_DEPTH     = 64,
  parameter int unsigned RES_DEPTH     = 64,
  parameter int unsigned DEF_PAT_COUNT = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp,
  output bus_req_t m_req,
  input  bus_rsp_t m_rsp,
  output logic     ack,
  output logic     fault
);

  localparam int unsigned IN_WORDS  = ip_in_words(IP_KIND);
  localparam int unsigned OUT_WORDS = ip_out_words(IP_KIND);

  logic  buf_full, buf_empty, buf_read;

  // ---------------- slave decode: buffer window vs. control registers ------
  logic     is_buf, buf_wr, buf_ack;
  bus_req_t hcu_sreq;
  bus_rsp_t hcu_srsp;

  assign is_buf = s_req.addr[7:0] == REG_BUF && s_req.we;
  assign buf_wr = s_req.req && is_buf && !buf_ack && !buf_full;

  always_comb begin
    hcu_sreq     = s_req;
    hcu_sreq.req = s_req.req && !is_buf;
    s_rsp        = buf_ack ? '{ready: 1'b1, rdata: '0} : hcu_srsp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) buf_ack <= 1'b0;
    else        buf_ack <= buf_wr;
  end

  // ---------------- datapath signals ---------------------------------------
  sel_e  sel;
  word_t buf_data;
  logic  tpg_valid, tpg_ready, norm_ready;
  word_t tpg_data;
  logic  ip_in_valid, ip_in_ready, ip_out_valid, ip_out_ready;
  word_t ip_in_data, ip_out_data;
  logic  rsp_valid, rsp_ready, res_valid, res_ready;
  word_t rsp_data, res_data;
  logic  bist_enable, bist_done, bist_result;
  logic  pat_valid, pat_ready, pat_is_exp;
  word_t pat_data;
  logic [15:0] num_patterns;
  logic [23:0] applied, mismatches;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count;

  ip_buffer #(.W(DW), .DEPTH(BUF_DEPTH)) u_buffer (
    .clk, .rst_n, .clr(1'b0),
    .wr_en(buf_wr), .wr_data(s_req.wdata), .full(buf_full),
    .rd_en(buf_read), .rd_data(buf_data), .empty(buf_empty), .count(buf_count)
  );

  ip_mux u_mux (
    .sel,
    .test_valid(tpg_valid), .test_ready(tpg_ready), .test_data(tpg_data),
    .norm_valid(!buf_empty), .norm_ready, .norm_data(buf_data),
    .ip_valid(ip_in_valid), .ip_ready(ip_in_ready), .ip_data(ip_in_data)
  );

  if (IP_KIND == IP_IDCT) begin : g_idct
    idct_ip u_ip (
      .clk, .rst_n,
      .in_valid(ip_in_valid), .in_ready(ip_in_ready), .in_data(ip_in_data),
      .out_valid(ip_out_valid), .out_ready(ip_out_ready), .out_data(ip_out_data)
    );
  end else begin : g_sort
    sort_ip u_ip (
      .in_valid(ip_in_valid), .in_ready(ip_in_ready), .in_data(ip_in_data),
      .out_valid(ip_out_valid), .out_ready(ip_out_ready), .out_data(ip_out_data)
    );
  end

  ip_dmux u_dmux (
    .sel,
    .ip_valid(ip_out_valid), .ip_ready(ip_out_ready), .ip_data(ip_out_data),
    .test_valid(rsp_valid), .test_ready(rsp_ready), .test_data(rsp_data),
    .norm_valid(res_valid), .norm_ready(res_ready), .norm_data(res_data)
  );

  bist_core #(.IN_WORDS(IN_WORDS), .OUT_WORDS(OUT_WORDS)) u_bist (
    .clk, .rst_n,
    .enable(bist_enable), .num_patterns,
    .pat_valid, .pat_ready, .pat_data, .pat_is_exp,
    .tpg_valid, .tpg_ready, .tpg_data,
    .rsp_valid, .rsp_ready, .rsp_data,
    .done(bist_done), .result(bist_result), .applied, .mismatches
  );

  hcu #(.IN_WORDS(IN_WORDS), .OUT_WORDS(OUT_WORDS), .RES_DEPTH(RES_DEPTH),
        .DEF_PAT_COUNT(DEF_PAT_COUNT)) u_hcu (
    .clk, .rst_n,
    .s_req(hcu_sreq), .s_rsp(hcu_srsp), .m_req, .m_rsp,
    .bist_enable, .num_patterns, .bist_done, .bist_result,
    .bist_applied(applied), .bist_mismatches(mismatches),
    .pat_valid, .pat_ready, .pat_data, .pat_is_exp,
    .sel,
    .buf_empty, .buf_full, .norm_ready, .buf_read,
    .res_valid, .res_ready, .res_data,
    .ack, .fault
  );

  a_single_only: assert property (@(posedge clk) disable iff (!rst_n)
    s_req.req |-> s_req.blen == '0);

endmodule
