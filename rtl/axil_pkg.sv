// AXI4-Lite channel types shared by the core's bus masters and the memory
// bridges. Each channel is a packed struct carrying VALID and its payload;
// READY travels the other way as a separate signal, so a combinational
// READY that depends on another channel never forms a false loop through a
// shared struct. AXI4-Lite (no bursts, IDs or caching attributes) is this
// design's own choice: the source only says the core reaches its tightly
// coupled memories "via AXI".
package axil_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned STRB_W = DATA_W / 8;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_e;

  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;
  } ax_t;  // AR and AW channels

  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
    logic [STRB_W-1:0] strb;
  } w_t;

  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
    resp_e             resp;
  } r_t;

  typedef struct packed {
    logic  valid;
    resp_e resp;
  } b_t;

endpackage
