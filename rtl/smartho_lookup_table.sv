// smartho_lookup_table -- the exact-match look_up_table of the SMARTHO switch.
//
// The key is the control message (ctrl_info) put together with the ingress
// port (src_port); the action data are the next control message of the
// handover sequence and the forwarding-tag port to write into the header for
// the next host.  The table is a small content-addressable memory: every entry
// is compared with the key in parallel and the lowest-numbered valid entry
// that matches wins.  The lookup is combinational (result in the same cycle as
// the key).
//
// In the testbed the table is static and compiled into the bitstream.  Here it
// is cleared by reset and filled through a write port (cfg_we, cfg_idx,
// cfg_entry; one entry per cycle, visible to lookups from the next cycle),
// which stands in for the compile-time load; the paper does not give the
// table's contents, only that it is keyed as above.  DEPTH is this design's
// choice: 32 entries hold the twelve messages of an intra-CU handover
// arriving on either of the two ports the testbed uses (24 keys).
module smartho_lookup_table
  import smartho_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control-plane write port
  input  logic                     cfg_we,
  input  logic [$clog2(DEPTH)-1:0] cfg_idx,
  input  lut_entry_t               cfg_entry,
  // lookup
  input  lut_key_t                 key,
  output logic                     hit,
  output lut_action_t              action
);

  lut_entry_t table_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) table_q[i] <= '0;
    end else if (cfg_we) begin
      table_q[cfg_idx] <= cfg_entry;
    end
  end

  always_comb begin
    hit    = 1'b0;
    action = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (table_q[i].valid && table_q[i].key == key) begin
        hit    = 1'b1;
        action = table_q[i].action;
      end
    end
  end

endmodule
