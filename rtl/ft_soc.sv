// ft_soc: top level of the fault-tolerant multi-core system slice. It holds
// the interconnection network (bus_interconnect), the on-chip memory
// (onchip_mem) and two fault-tolerant IP modules (ft_module): one wrapping the
// combinational sorting core and one wrapping the sequential 8x8 IDCT core.
// The processor cores are not part of this RTL: the bus port of a processor
// is brought out as cpu_req/cpu_rsp (master 0), and each module's ack and
// one-bit fault flag are brought out as pins for it.
//
// Word address map:
//   0x0000-0x0FFF  on-chip memory (MEM_WORDS words; test-pattern tables)
//   0x1000-0x10FF  fault-tolerant sorting module (registers, buffer, results)
//   0x1100-0x11FF  fault-tolerant IDCT module
// Bus masters: 0 processor, 1 sorting-module DMA, 2 IDCT-module DMA.
//
// Use: the processor stores a pattern table, programs a module's REG_PAT_BASE
// and REG_PAT_COUNT, writes start to REG_CTRL and goes on with its software;
// when it needs the accelerator it waits for ack and reads fault. With no
// fault it streams operands into REG_BUF and reads results back from the
// result memory; with a fault it runs the function in software instead.
// The system structure follows the architecture's system and module figures;
// the choice of two modules, the sizes and the map are this design's own.
module ft_soc
  import ft_pkg::*;
#(
  parameter int unsigned MEM_WORDS       = 4096,
  parameter int unsigned BUF_DEPTH       = 64,
  parameter int unsigned RES_DEPTH       = 64,
  parameter int unsigned SORT_PAT_COUNT  = 4,
  parameter int unsigned IDCT_PAT_COUNT  = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t cpu_req,
  output bus_rsp_t cpu_rsp,
  output logic     sort_ack,
  output logic     sort_fault,
  output logic     idct_ack,
  output logic     idct_fault
);

  localparam int unsigned NM = 3;
  localparam int unsigned NS = 3;

  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS];
  bus_rsp_t s_rsp [NS];

  assign m_req[0] = cpu_req;
  assign cpu_rsp  = m_rsp[0];

  bus_interconnect #(
    .NM(NM), .NS(NS),
    .SLV_BASE('{16'h0000, 16'h1000, 16'h1100}),
    .SLV_MASK('{16'hF000, 16'hFF00, 16'hFF00})
  ) u_bus (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  onchip_mem #(.WORDS(MEM_WORDS)) u_mem (
    .clk, .rst_n, .s_req(s_req[0]), .s_rsp(s_rsp[0])
  );

  ft_module #(
    .IP_KIND(IP_SORT), .BUF_DEPTH(BUF_DEPTH), .RES_DEPTH(RES_DEPTH),
    .DEF_PAT_COUNT(SORT_PAT_COUNT)
  ) u_ft_sort (
    .clk, .rst_n,
    .s_req(s_req[1]), .s_rsp(s_rsp[1]), .m_req(m_req[1]), .m_rsp(m_rsp[1]),
    .ack(sort_ack), .fault(sort_fault)
  );

  ft_module #(
    .IP_KIND(IP_IDCT), .BUF_DEPTH(BUF_DEPTH), .RES_DEPTH(RES_DEPTH),
    .DEF_PAT_COUNT(IDCT_PAT_COUNT)
  ) u_ft_idct (
    .clk, .rst_n,
    .s_req(s_req[2]), .s_rsp(s_rsp[2]), .m_req(m_req[2]), .m_rsp(m_rsp[2]),
    .ack(idct_ack), .fault(idct_fault)
  );

endmodule
