// smartho_sume_switch -- the SMARTHO packet-processing data plane for one
// NetFPGA-SUME board, as a single-clock AXI4-Stream pipeline.
//
// A packet enters as 256-bit beats with its ingress port in tuser[23:16].  The
// parser recognises SMARTHO control frames (EtherType 0x1212) and extracts
// ctrl_info and frwd_tag_prt from the first beat; the match-action stage sets
// the egress port from frwd_tag_prt and looks {ctrl_info, src_port} up in the
// look_up_table, which supplies the next handover message and the next
// forwarding port; the deparser writes both back into the frame and the
// egress port into tuser[31:24].  Frames that are not SMARTHO frames leave
// with dst_port = 0, which the SUME output queues drop.
//
// Timing: one output register, so a beat accepted in cycle t is presented on
// the master side in cycle t+1; one beat per cycle when the sink is ready.
// s_axis_tready is high whenever the output register is empty or is being
// emptied in the same cycle; otherwise the input stalls (backpressure).
//
// The counters report how many packets hit in the table, missed in the
// table, or were dropped as non-SMARTHO, and how many cycles the input was
// held off by backpressure.
//
// From the paper: the three switch operations, the keyed table, the port
// codes and the header.  Own choices: the single register stage, the counters,
// the table write port and reset contents (the paper compiles its table in).
// The input arbiter, output queues, 10G MACs and PCIe DMA of the SUME
// reference design surround this block and are not part of it.
module smartho_sume_switch
  import smartho_pkg::*;
#(
  parameter int unsigned LUT_DEPTH = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // ingress stream
  input  logic [DATA_W-1:0]            s_axis_tdata,
  input  logic [KEEP_W-1:0]            s_axis_tkeep,
  input  logic [USER_W-1:0]            s_axis_tuser,
  input  logic                         s_axis_tvalid,
  input  logic                         s_axis_tlast,
  output logic                         s_axis_tready,
  // egress stream
  output logic [DATA_W-1:0]            m_axis_tdata,
  output logic [KEEP_W-1:0]            m_axis_tkeep,
  output logic [USER_W-1:0]            m_axis_tuser,
  output logic                         m_axis_tvalid,
  output logic                         m_axis_tlast,
  input  logic                         m_axis_tready,
  // look_up_table loading
  input  logic                         cfg_we,
  input  logic [$clog2(LUT_DEPTH)-1:0] cfg_idx,
  input  lut_entry_t                   cfg_entry,
  // statistics
  output logic [31:0]                  cnt_hit,
  output logic [31:0]                  cnt_miss,
  output logic [31:0]                  cnt_drop,
  output logic [31:0]                  cnt_stall
);

  axis_beat_t  in_beat, out_beat, out_q;
  logic        out_valid_q;
  logic        s_fire;
  logic        sop;
  parsed_hdr_t hdr;
  lut_key_t    lut_key;
  logic        lut_hit;
  lut_action_t lut_action;
  smartho_h    hdr_new;
  logic [7:0]  dst_port;
  logic        is_hit, is_miss, is_drop;

  assign in_beat.tdata = s_axis_tdata;
  assign in_beat.tkeep = s_axis_tkeep;
  assign in_beat.tuser = s_axis_tuser;
  assign in_beat.tlast = s_axis_tlast;

  assign s_axis_tready = !out_valid_q || m_axis_tready;
  assign s_fire        = s_axis_tvalid && s_axis_tready;

  smartho_parser u_parser (
    .clk    (clk),
    .rst_n  (rst_n),
    .s_beat (in_beat),
    .s_fire (s_fire),
    .sop    (sop),
    .hdr    (hdr)
  );

  smartho_match_action u_match_action (
    .hdr        (hdr),
    .src_port   (s_axis_tuser[SRC_PORT_LSB +: 8]),
    .lut_key    (lut_key),
    .lut_hit    (lut_hit),
    .lut_action (lut_action),
    .hdr_out    (hdr_new),
    .dst_port   (dst_port),
    .is_hit     (is_hit),
    .is_miss    (is_miss),
    .is_drop    (is_drop)
  );

  smartho_lookup_table #(.DEPTH(LUT_DEPTH)) u_lut (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we),
    .cfg_idx   (cfg_idx),
    .cfg_entry (cfg_entry),
    .key       (lut_key),
    .hit       (lut_hit),
    .action    (lut_action)
  );

  smartho_deparser u_deparser (
    .in_beat       (in_beat),
    .sop           (sop),
    .smartho_valid (hdr.smartho_valid),
    .hdr           (hdr_new),
    .dst_port      (dst_port),
    .out_beat      (out_beat)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_q <= 1'b0;
      out_q       <= '0;
    end else if (s_axis_tready) begin
      out_valid_q <= s_axis_tvalid;
      if (s_axis_tvalid) out_q <= out_beat;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_hit   <= '0;
      cnt_miss  <= '0;
      cnt_drop  <= '0;
      cnt_stall <= '0;
    end else begin
      if (s_fire && sop && is_hit)  cnt_hit  <= cnt_hit + 1;
      if (s_fire && sop && is_miss) cnt_miss <= cnt_miss + 1;
      if (s_fire && sop && is_drop) cnt_drop <= cnt_drop + 1;
      if (s_axis_tvalid && !s_axis_tready) cnt_stall <= cnt_stall + 1;
    end
  end

  assign m_axis_tdata  = out_q.tdata;
  assign m_axis_tkeep  = out_q.tkeep;
  assign m_axis_tuser  = out_q.tuser;
  assign m_axis_tlast  = out_q.tlast;
  assign m_axis_tvalid = out_valid_q;

  // AXI4-Stream rule: a presented beat stays put until it is taken.
  a_hold_until_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(out_q)));

endmodule
