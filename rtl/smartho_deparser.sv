// smartho_deparser -- the deparser stage of the SMARTHO switch.
//
// It rebuilds the packet with the header fields the match-action stage
// changed: on the first beat of a packet it writes ctrl_info (bytes 14..17)
// and frwd_tag_prt (bytes 18..21) back big-endian, and writes the egress port
// into tuser[31:24] (sume_metadata.dst_port).  The Ethernet header, tkeep,
// tlast, the rest of tuser and every later beat pass unchanged.  When the
// packet carries no SMARTHO header the data bytes are left as they are.
// Purely combinational.
//
// From the paper: the deparser puts the extracted headers back with their
// modifications.  Own choices: the beat layout and tuser field position
// (NetFPGA-SUME conventions), metadata carried on the first beat only.
module smartho_deparser
  import smartho_pkg::*;
(
  input  axis_beat_t  in_beat,
  input  logic        sop,
  input  logic        smartho_valid,
  input  smartho_h    hdr,
  input  logic [7:0]  dst_port,
  output axis_beat_t  out_beat
);

  always_comb begin
    out_beat = in_beat;
    if (sop) begin
      out_beat.tuser[DST_PORT_LSB +: 8] = dst_port;
      if (smartho_valid) begin
        for (int unsigned i = 0; i < 4; i++) begin
          out_beat.tdata[8*(OFF_CTRL_INFO + i) +: 8] = hdr.ctrl_info[8*(3-i) +: 8];
          out_beat.tdata[8*(OFF_FRWD_TAG  + i) +: 8] = hdr.frwd_tag_prt[8*(3-i) +: 8];
        end
      end
    end
  end

endmodule
