// smartho_pkg -- types and constants shared by the SMARTHO NetFPGA-SUME data plane.
//
// The data plane sees packets as an AXI4-Stream of 256-bit beats, byte 0 of the
// frame in tdata[7:0] (the NetFPGA-SUME convention), with a 128-bit tuser side
// band whose bits [23:16] hold the ingress port (src_port) and bits [31:24] the
// egress port (dst_port).  In both port fields physical interface nfK is bit 2K
// and the host (DMA) copy of nfK is bit 2K+1, so nf0 = 0x01, nf1 = 0x04 and
// nf2 = 0x10; a dst_port of zero drops the packet.
//
// A SMARTHO control frame is an Ethernet II header with EtherType 0x1212
// followed by two 32-bit big-endian fields, ctrl_info (the number of the
// handover message, 1 to 12 in the intra-CU handover sequence) and
// frwd_tag_prt (the egress port the receiving switch is to use), then payload.
//
// From the paper: the two 32-bit header fields and their order, the port bit
// assignment, the values 1/4/16 for nf0/nf1/nf2, the EtherType 0x1212 (printed
// in the testbed screenshots).  This design's choices: the bus widths and the
// tuser layout (the usual NetFPGA-SUME ones), the table size.
package smartho_pkg;

  localparam int unsigned DATA_W  = 256;
  localparam int unsigned KEEP_W  = DATA_W / 8;
  localparam int unsigned USER_W  = 128;

  localparam logic [15:0] SMARTHO_ETHERTYPE = 16'h1212;

  // Byte offsets of the header fields in the frame.
  localparam int unsigned OFF_ETHERTYPE = 12;
  localparam int unsigned OFF_CTRL_INFO = 14;
  localparam int unsigned OFF_FRWD_TAG  = 18;
  localparam int unsigned HDR_BYTES     = 22;

  // tuser bit positions of the port fields.
  localparam int unsigned SRC_PORT_LSB = 16;
  localparam int unsigned DST_PORT_LSB = 24;

  // One-hot port codes of the physical interfaces.
  localparam logic [7:0] PORT_NF0 = 8'h01;
  localparam logic [7:0] PORT_NF1 = 8'h04;
  localparam logic [7:0] PORT_NF2 = 8'h10;
  localparam logic [7:0] PORT_NF3 = 8'h40;

  // One beat of the packet stream.
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [KEEP_W-1:0] tkeep;
    logic [USER_W-1:0] tuser;
    logic              tlast;
  } axis_beat_t;

  typedef struct packed {
    logic [47:0] dst_addr;
    logic [47:0] src_addr;
    logic [15:0] ether_type;
  } ethernet_h;

  // The custom header of the testbed (two scapy IntFields).
  typedef struct packed {
    logic [31:0] ctrl_info;
    logic [31:0] frwd_tag_prt;
  } smartho_h;

  // Parsed representation of the first beat.
  typedef struct packed {
    ethernet_h ethernet;
    logic      smartho_valid;
    smartho_h  smartho;
  } parsed_hdr_t;

  // look_up_table: key = control message and ingress port, exact match.
  typedef struct packed {
    logic [31:0] ctrl_info;
    logic [7:0]  src_port;
  } lut_key_t;

  // Action data: the next message of the sequence and the forwarding port
  // written into the header for the next hop.
  typedef struct packed {
    logic [31:0] next_ctrl_info;
    logic [31:0] next_frwd_tag_prt;
  } lut_action_t;

  typedef struct packed {
    logic        valid;
    lut_key_t    key;
    lut_action_t action;
  } lut_entry_t;

  // Read byte i of a beat (byte 0 is the first on the wire).
  function automatic logic [7:0] beat_byte(input logic [DATA_W-1:0] d, input int unsigned i);
    return d[8*i +: 8];
  endfunction

endpackage
