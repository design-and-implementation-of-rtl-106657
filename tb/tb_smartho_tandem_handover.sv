// tb_smartho_tandem_handover -- tandem handovers through the SMARTHO switch,
// traditional sequence against SMARTHO sequence.
//
// The testbench plays the hosts of the testbed: it sends a control frame,
// takes the frame the switch emits, and sends it back on the port the
// switch addressed (the host at the other end of the link answers with the
// next message), until the switch emits message 12, the end of a handover.
// Messages are numbered as in the intra-CU handover sequence (1 = measurement
// report ... 12 = UE context release complete).
//
// Traditional table: message k arriving on nf1 or nf2 becomes k+1, so each
// handover takes the 11 table passes 1->2->...->12.
// SMARTHO table: after the first handover the preparation messages 2..5 have
// already been exchanged ahead of the UE, so message 1 is answered directly
// with message 6 (the reply the testbed sends to Smartho(1,4)); later
// handovers take 1->6->7->...->12, 7 passes.
// The test runs TANDEM handovers in each mode (the testbed runs 1,000 to
// 5,000; the switch is stateless per packet, so a handful exercise the same
// paths), checks every emitted message and port, and checks that a SMARTHO
// handover after the first uses fewer passes and fewer cycles than a
// traditional one.
module tb_smartho_tandem_handover;
  import smartho_pkg::*;

  localparam int TANDEM = 5;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic [DATA_W-1:0] s_tdata;
  logic [KEEP_W-1:0] s_tkeep;
  logic [USER_W-1:0] s_tuser;
  logic              s_tvalid, s_tlast, s_tready;
  logic [DATA_W-1:0] m_tdata;
  logic [KEEP_W-1:0] m_tkeep;
  logic [USER_W-1:0] m_tuser;
  logic              m_tvalid, m_tlast, m_tready;
  logic              cfg_we;
  logic [4:0]        cfg_idx;
  lut_entry_t        cfg_entry;
  logic [31:0]       cnt_hit, cnt_miss, cnt_drop, cnt_stall;

  int checks = 0;
  int failures = 0;
  int mode_switches = 0;

  smartho_sume_switch dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tuser(s_tuser),
    .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tkeep(m_tkeep), .m_axis_tuser(m_tuser),
    .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready),
    .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_entry(cfg_entry),
    .cnt_hit(cnt_hit), .cnt_miss(cnt_miss), .cnt_drop(cnt_drop), .cnt_stall(cnt_stall));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [7:0] other_port(input logic [7:0] p);
    return (p == PORT_NF1) ? PORT_NF2 : PORT_NF1;
  endfunction

  // Table entry i: message k on port p -> message nk addressed to the other port.
  task automatic load(input int idx, input int k, input logic [7:0] p, input int nk);
    @(negedge clk);
    cfg_we    = 1'b1;
    cfg_idx   = 5'(idx);
    cfg_entry = '{valid: 1'b1,
                  key: '{ctrl_info: 32'(k), src_port: p},
                  action: '{next_ctrl_info: 32'(nk), next_frwd_tag_prt: 32'(other_port(p))}};
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_table(input logic smartho);
    int idx;
    idx = 0;
    for (int k = 1; k <= 11; k++) begin
      for (int p = 0; p < 2; p++) begin
        load(idx, k, (p != 0) ? PORT_NF2 : PORT_NF1, (smartho && k == 1) ? 6 : k + 1);
        idx++;
      end
    end
  endtask

  // Send one single-beat control frame and wait for the switch's output.
  task automatic pass(input logic [31:0] ci, input logic [31:0] ft, input logic [7:0] sp,
                      output logic [31:0] ci_out, output logic [31:0] ft_out,
                      output logic [7:0] dp_out);
    logic [DATA_W-1:0] d;
    d = '0;
    d[8*12 +: 8] = 8'h12;
    d[8*13 +: 8] = 8'h12;
    for (int i = 0; i < 4; i++) begin
      d[8*(14 + i) +: 8] = ci[8*(3-i) +: 8];
      d[8*(18 + i) +: 8] = ft[8*(3-i) +: 8];
    end
    @(negedge clk);
    s_tdata  = d;
    s_tkeep  = KEEP_W'(32'h003f_ffff);   // 22-byte header only
    s_tuser  = {96'd0, 8'h00, sp, 16'd64};
    s_tlast  = 1'b1;
    s_tvalid = 1'b1;
    do @(posedge clk); while (!s_tready);
    @(negedge clk);
    s_tvalid = 1'b0;
    while (!m_tvalid) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      ci_out[8*(3-i) +: 8] = m_tdata[8*(14 + i) +: 8];
      ft_out[8*(3-i) +: 8] = m_tdata[8*(18 + i) +: 8];
    end
    dp_out = m_tuser[31:24];
  endtask

  // One handover starting with the measurement report from the radio head
  // side (nf1, frwd_tag_prt 4 as in Smartho(1,4)); returns passes and cycles.
  task automatic handover(input logic smartho_mode, input logic first,
                          output int passes, output int cycles);
    logic [31:0] ci, ft, nci, nft;
    logic [7:0]  sp, dp;
    int          expect_next;
    longint      t0;
    ci = 32'd1;
    ft = 32'(PORT_NF1);
    sp = PORT_NF1;
    passes = 0;
    t0 = longint'($time);
    while (ci != 32'd12) begin
      pass(ci, ft, sp, nci, nft, dp);
      passes++;
      expect_next = (smartho_mode && !first && ci == 32'd1) ? 6 : int'(ci) + 1;
      check(nci == 32'(expect_next), $sformatf("message %0d -> %0d, expected %0d", ci, nci, expect_next));
      check(dp == ft[7:0], "egress port is the incoming frwd_tag_prt");
      check(nft == 32'(other_port(sp)), "next frwd_tag_prt is the other link");
      // The host on the far link answers on its own port.
      ci = nci;
      ft = nft;
      sp = other_port(sp);
      if (passes > 20) break;
    end
    cycles = int'((longint'($time) - t0) / 10);
  endtask

  initial begin
    int trad_passes, trad_cycles, sm_passes, sm_cycles, p, c;
    int trad_total, sm_total;
    s_tvalid = 1'b0;
    s_tdata = '0;
    s_tkeep = '0;
    s_tuser = '0;
    s_tlast = 1'b0;
    m_tready = 1'b1;
    cfg_we = 1'b0;
    cfg_idx = '0;
    cfg_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Traditional handovers in tandem.
    load_table(1'b0);
    trad_total = 0;
    for (int h = 0; h < TANDEM; h++) begin
      handover(1'b0, h == 0, p, c);
      check(p == 11, $sformatf("traditional handover %0d took %0d passes", h, p));
      trad_total += c;
      if (h == 1) begin
        trad_passes = p;
        trad_cycles = c;
      end
    end

    // SMARTHO: the first handover is traditional (data setup), then the
    // table is switched so that later handovers skip preparation.
    load_table(1'b0);
    sm_total = 0;
    handover(1'b1, 1'b1, p, c);
    check(p == 11, "first SMARTHO handover is a full one");
    sm_total += c;
    load_table(1'b1);
    mode_switches++;
    for (int h = 1; h < TANDEM; h++) begin
      handover(1'b1, 1'b0, p, c);
      check(p == 7, $sformatf("SMARTHO handover %0d took %0d passes", h, p));
      sm_total += c;
      if (h == 1) begin
        sm_passes = p;
        sm_cycles = c;
      end
    end

    $display("per handover: traditional %0d passes / %0d cycles, SMARTHO %0d passes / %0d cycles",
             trad_passes, trad_cycles, sm_passes, sm_cycles);
    $display("%0d handovers in tandem: traditional %0d cycles, SMARTHO %0d cycles",
             TANDEM, trad_total, sm_total);
    check(sm_cycles < trad_cycles, "SMARTHO handover is shorter");
    check(sm_total < trad_total, "SMARTHO tandem is shorter");
    check(cnt_drop == 0, "no drops");
    check(cnt_miss == 0, "no misses");
    check(mode_switches > 0, "mode switch happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
