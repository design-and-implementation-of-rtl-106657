// smartho_parser -- the parser stage of the SMARTHO switch.
//
// It follows the Very Simple Switch parser: state start extracts the Ethernet
// header, then selects on etherType; 0x1212 goes to parse_smartho, which
// extracts ctrl_info and frwd_tag_prt and accepts, anything else accepts with
// the SMARTHO header invalid.  Since both headers fit in the first 256-bit beat
// (22 bytes of 32), the whole state machine collapses to one decision taken on
// the first beat of each packet; the only state kept is whether the next beat
// starts a packet (set by reset and by every beat with tlast).
//
// Interface: a beat (s_beat) and its handshake (s_fire = valid and ready, seen
// by the stage that owns the handshake).  Outputs are combinational: sop marks
// the first beat and hdr is the parsed header, meaningful while sop is high.
// The header bytes are big-endian on the wire, as scapy writes IntFields.
//
// From the paper: the parse graph (Ethernet, select on etherType, custom header
// of two 32-bit fields).  Own choices: extracting everything from the first beat
// and reporting frames shorter than the header as having no SMARTHO header.
module smartho_parser
  import smartho_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_beat_t  s_beat,
  input  logic        s_fire,
  output logic        sop,
  output parsed_hdr_t hdr
);

  logic first_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      first_q <= 1'b1;
    else if (s_fire) first_q <= s_beat.tlast;
  end

  assign sop = first_q;

  // Big-endian field of n bytes starting at byte offset off.
  function automatic logic [47:0] field_be(input logic [DATA_W-1:0] d,
                                           input int unsigned off,
                                           input int unsigned n);
    logic [47:0] v;
    v = '0;
    for (int unsigned i = 0; i < n; i++) v = {v[39:0], beat_byte(d, off + i)};
    return v;
  endfunction

  logic header_present;

  always_comb begin
    hdr = '0;
    hdr.ethernet.dst_addr   = field_be(s_beat.tdata, 0, 6);
    hdr.ethernet.src_addr   = field_be(s_beat.tdata, 6, 6);
    hdr.ethernet.ether_type = field_be(s_beat.tdata, OFF_ETHERTYPE, 2)[15:0];
    // All header bytes must be present in the first beat.
    header_present = &s_beat.tkeep[HDR_BYTES-1:0];
    if (hdr.ethernet.ether_type == SMARTHO_ETHERTYPE && header_present) begin
      hdr.smartho_valid        = 1'b1;
      hdr.smartho.ctrl_info    = field_be(s_beat.tdata, OFF_CTRL_INFO, 4)[31:0];
      hdr.smartho.frwd_tag_prt = field_be(s_beat.tdata, OFF_FRWD_TAG, 4)[31:0];
    end
  end

endmodule
