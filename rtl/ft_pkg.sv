// ft_pkg: types and constants shared by the fault-tolerant IP module, its
// BIST structure and the on-chip bus.
//
// The bus is a simple request/ready protocol of this design's own choosing
// (the architecture only says the parts meet on an "interconnection network",
// evaluated on an AMBA bus with burst transfers): a master raises req with
// we/addr/wdata/blen and holds them unchanged until the slave has answered with
// blen+1 ready pulses; for a read, rdata is valid in each ready cycle. blen > 0
// asks for an incrementing burst read of blen+1 words starting at addr; only
// the on-chip memory serves bursts, every other slave and all writes use
// blen = 0. Addresses count 32-bit words.
//
// Register map of one fault-tolerant module (word offsets inside its window)
// is this design's own choice; the architecture only names the signals
// (request to start BIST, ack, one-bit fault flag, result memory).
package ft_pkg;

  localparam int unsigned DW = 32;  // data word width
  localparam int unsigned AW = 16;  // word address width
  localparam int unsigned BLEN_W = 4;  // bursts of up to 16 words

  typedef logic [DW-1:0] word_t;
  typedef logic [AW-1:0] addr_t;

  // Master -> slave half of the bus (Addr/Cntrl/Data of the architecture figure).
  typedef struct packed {
    logic  req;
    logic  we;
    logic [BLEN_W-1:0] blen;  // burst length minus one (reads from memory only)
    addr_t addr;
    word_t wdata;
  } bus_req_t;

  // Slave -> master half of the bus.
  typedef struct packed {
    logic  ready;
    word_t rdata;
  } bus_rsp_t;


  // Kinds of IP core that can sit inside a fault-tolerant module.
  typedef enum logic [0:0] {IP_SORT = 1'b0, IP_IDCT = 1'b1} ip_kind_e;

  // Path selected by the hardware control unit for the MUX and DMUX.
  typedef enum logic [0:0] {SEL_NORMAL = 1'b0, SEL_TEST = 1'b1} sel_e;

  // Register offsets inside a fault-tolerant module window (8 offset bits).
  localparam logic [7:0] REG_CTRL      = 8'h00;  // W: bit0 start BIST, bit1 clear results
  localparam logic [7:0] REG_STATUS    = 8'h01;  // R: bit0 busy, bit1 ack, bit2 fault, bit3 buffer full
  localparam logic [7:0] REG_PAT_BASE  = 8'h02;  // RW: word address of the first test pattern
  localparam logic [7:0] REG_PAT_COUNT = 8'h03;  // RW: number N of test patterns to run
  localparam logic [7:0] REG_RES_COUNT = 8'h04;  // R: results held in the result memory
  localparam logic [7:0] REG_CYCLES    = 8'h05;  // R: cycles taken by the last BIST run
  localparam logic [7:0] REG_APPLIED   = 8'h06;  // R: pattern words applied by the TPG in the last run
  localparam logic [7:0] REG_MISMATCH  = 8'h07;  // R: responses the TRA found wrong in the last run
  localparam logic [7:0] REG_BUF       = 8'h08;  // W: operand word into the input buffer
  localparam logic [7:0] REG_RES_BASE  = 8'h80;  // R: result memory, offsets 0x80..0xFF

  // Words per pattern (input words, result words) for each IP kind.
  function automatic int unsigned ip_in_words(ip_kind_e k);
    return (k == IP_IDCT) ? 64 : 1;
  endfunction

  function automatic int unsigned ip_out_words(ip_kind_e k);
    return (k == IP_IDCT) ? 64 : 1;
  endfunction

endpackage
