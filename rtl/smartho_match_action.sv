// smartho_match_action -- the ingress control of the SMARTHO switch.
//
// It performs the three operations of the testbed switch on a parsed packet:
//   1. set the egress port: sume_metadata.dst_port takes the value of the
//      incoming frwd_tag_prt field (low 8 bits, the port field's width);
//   2. change the control information to the next message of the handover
//      sequence, and
//   3. change frwd_tag_prt to the port the next host is to use,
// where 2 and 3 come from the look_up_table, matched exactly on
// {ctrl_info, src_port}.  The module drives the table's key and receives its
// result in the same cycle; everything here is combinational.
//
// From the paper: the three operations and the table key.  Own choices, where
// the paper is silent: a packet without the SMARTHO header is dropped
// (dst_port = 0, the SUME "no port" value), and a SMARTHO packet that misses
// in the table is still sent to its frwd_tag_prt port with its header
// unchanged.  The verdict output tells which of the three cases applied.
module smartho_match_action
  import smartho_pkg::*;
(
  input  parsed_hdr_t  hdr,
  input  logic [7:0]   src_port,
  // look_up_table
  output lut_key_t     lut_key,
  input  logic         lut_hit,
  input  lut_action_t  lut_action,
  // results
  output smartho_h     hdr_out,
  output logic [7:0]   dst_port,
  output logic         is_hit,
  output logic         is_miss,
  output logic         is_drop
);

  assign lut_key.ctrl_info = hdr.smartho.ctrl_info;
  assign lut_key.src_port  = src_port;

  always_comb begin
    hdr_out  = hdr.smartho;
    dst_port = 8'h00;
    is_hit   = 1'b0;
    is_miss  = 1'b0;
    is_drop  = 1'b0;
    if (!hdr.smartho_valid) begin
      is_drop = 1'b1;
    end else begin
      dst_port = hdr.smartho.frwd_tag_prt[7:0];
      if (lut_hit) begin
        is_hit               = 1'b1;
        hdr_out.ctrl_info    = lut_action.next_ctrl_info;
        hdr_out.frwd_tag_prt = lut_action.next_frwd_tag_prt;
      end else begin
        is_miss = 1'b1;
      end
    end
  end

endmodule
