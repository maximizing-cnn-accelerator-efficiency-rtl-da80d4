// clp_pkg: types shared by the convolutional layer processor (CLP) and the Multi-CLP top.
//
// Memory traffic of a CLP uses a data-mover style channel: a command (byte address and a
// length in 32-bit words) with a valid/ready handshake, followed by exactly that many data
// words on a valid/ready stream. A read channel returns words to the CLP, a write channel
// carries words from the CLP. The layer descriptor is the 32-byte block of eight 32-bit
// words that the CLP fetches when started: R, C, M, N, K, S, Tr, Tc in that order.
package clp_pkg;

  typedef logic [31:0] word_t;
  typedef logic [31:0] addr_t;

  // data-mover command: start byte address and burst length in words
  typedef struct packed {
    addr_t       addr;
    logic [15:0] len;
  } dm_cmd_t;

  // layer arguments carried by the descriptor
  typedef struct packed {
    logic [15:0] r;
    logic [15:0] c;
    logic [15:0] m;
    logic [15:0] n;
    logic [7:0]  k;
    logic [7:0]  s;
    logic [15:0] tr;
    logic [15:0] tc;
  } layer_desc_t;

  localparam int DESC_WORDS = 8;

  // base addresses of one layer job, written to a CLP through its AXI4-Lite registers
  typedef struct packed {
    addr_t desc;
    addr_t ibase;
    addr_t wbase;
    addr_t bbase;
    addr_t obase;
  } job_t;

  // AXI4-Lite register map of a CLP (byte offsets)
  localparam logic [7:0] REG_CTRL  = 8'h00; // bit0 start (W), bit1 done (R), bit2 idle (R)
  localparam logic [7:0] REG_DESC  = 8'h10;
  localparam logic [7:0] REG_IBASE = 8'h18;
  localparam logic [7:0] REG_WBASE = 8'h20;
  localparam logic [7:0] REG_BBASE = 8'h28;
  localparam logic [7:0] REG_OBASE = 8'h30;

endpackage
