// tb_smartho_sume_switch -- end-to-end test of the SMARTHO switch at its
// default size (no parameter overrides).
//
// The table is loaded with an intra-CU handover chain: message k (1..11)
// arriving on nf1 becomes message k+1 addressed to nf2, and arriving on nf2
// becomes k+1 addressed to nf1; message 12, the last of the sequence, has no
// entry.  The test then sends
//   * the twelve messages of one handover, one after another, with the sink
//     always ready, checking that each beat appears exactly one cycle after it
//     is accepted (the pipeline's latency);
//   * a random mix of SMARTHO frames (hits and misses), non-SMARTHO frames
//     (dropped with dst_port 0) and multi-beat frames, with random gaps at
//     the source and a sink that is ready at random (backpressure).
// Every output beat is compared with a reference built by the testbench from
// the frame bytes.  The counters of the switch must equal the testbench's own
// counts, and each mechanism (table hit, table miss, drop, input stall) must
// occur at least once.
module tb_smartho_sume_switch;
  import smartho_pkg::*;

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
  int exp_hit = 0, exp_miss = 0, exp_drop = 0, seen_stall = 0;
  longint cycle = 0;
  // Messages lo_msg..hi_msg currently have table entries for nf1 and nf2.
  int lo_msg = 1, hi_msg = 8;

  axis_beat_t expq [$];
  longint     acc_cycle [$];
  logic       check_latency = 1'b0;

  smartho_sume_switch dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tuser(s_tuser),
    .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tkeep(m_tkeep), .m_axis_tuser(m_tuser),
    .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready),
    .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_entry(cfg_entry),
    .cnt_hit(cnt_hit), .cnt_miss(cnt_miss), .cnt_drop(cnt_drop), .cnt_stall(cnt_stall));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Reference table: next message / next port for a key, as loaded below.
  function automatic logic ref_lookup(input logic [31:0] ci, input logic [7:0] sp,
                                      output logic [31:0] nci, output logic [31:0] nft);
    nci = '0;
    nft = '0;
    if (ci >= 32'(lo_msg) && ci <= 32'(hi_msg) && (sp == PORT_NF1 || sp == PORT_NF2)) begin
      nci = ci + 1;
      nft = (sp == PORT_NF1) ? 32'(PORT_NF2) : 32'(PORT_NF1);
      return 1'b1;
    end
    return 1'b0;
  endfunction

  // Frame builder: first beat as bytes; later beats are random payload.
  function automatic axis_beat_t first_beat(input logic [15:0] et, input logic [31:0] ci,
                                            input logic [31:0] ft, input logic [7:0] sp,
                                            input logic last);
    axis_beat_t b;
    b.tdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    b.tdata[47:0]   = 48'h03_45_4d_55_53_02;   // 02:53:55:4d:45:03, byte 0 first
    b.tdata[95:48]  = 48'h2e_e1_bc_21_1b_00;   // 00:1b:21:bc:e1:2e
    b.tdata[8*12 +: 8] = et[15:8];
    b.tdata[8*13 +: 8] = et[7:0];
    for (int i = 0; i < 4; i++) begin
      b.tdata[8*(14 + i) +: 8] = ci[8*(3-i) +: 8];
      b.tdata[8*(18 + i) +: 8] = ft[8*(3-i) +: 8];
    end
    b.tkeep = '1;
    b.tuser = {96'($urandom), 8'h00, sp, 16'($urandom)};
    b.tlast = last;
    return b;
  endfunction

  // Expected output of a first beat.
  function automatic axis_beat_t expect_first(input axis_beat_t b, output int verdict);
    axis_beat_t e;
    logic [15:0] et;
    logic [31:0] ci, ft, nci, nft;
    e = b;
    et = {b.tdata[8*12 +: 8], b.tdata[8*13 +: 8]};
    for (int i = 0; i < 4; i++) begin
      ci[8*(3-i) +: 8] = b.tdata[8*(14 + i) +: 8];
      ft[8*(3-i) +: 8] = b.tdata[8*(18 + i) +: 8];
    end
    if (et != 16'h1212) begin
      e.tuser[31:24] = 8'h00;
      verdict = 2;
    end else begin
      e.tuser[31:24] = ft[7:0];
      if (ref_lookup(ci, b.tuser[23:16], nci, nft)) begin
        verdict = 0;
        for (int i = 0; i < 4; i++) begin
          e.tdata[8*(14 + i) +: 8] = nci[8*(3-i) +: 8];
          e.tdata[8*(18 + i) +: 8] = nft[8*(3-i) +: 8];
        end
      end else begin
        verdict = 1;
      end
    end
    return e;
  endfunction

  // Send one beat, waiting for tready; record the expectation.
  // Inputs change 1 time unit after a clock edge; tready is sampled at the
  // edge, before the switch's registers update.
  task automatic send_beat(input axis_beat_t b, input axis_beat_t e);
    #1;
    s_tdata  = b.tdata;
    s_tkeep  = b.tkeep;
    s_tuser  = b.tuser;
    s_tlast  = b.tlast;
    s_tvalid = 1'b1;
    @(posedge clk);
    while (!s_tready) begin
      seen_stall++;
      @(posedge clk);
    end
    expq.push_back(e);
    acc_cycle.push_back(cycle);
    #1;
    s_tvalid = 1'b0;
  endtask

  task automatic send_packet(input logic [15:0] et, input logic [31:0] ci,
                             input logic [31:0] ft, input logic [7:0] sp, input int nbeats);
    axis_beat_t b, e;
    int v;
    b = first_beat(et, ci, ft, sp, nbeats == 1);
    e = expect_first(b, v);
    case (v)
      0: exp_hit++;
      1: exp_miss++;
      default: exp_drop++;
    endcase
    send_beat(b, e);
    for (int i = 1; i < nbeats; i++) begin
      b.tdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      b.tkeep = (i == nbeats - 1) ? KEEP_W'(32'hffff_ffff >> $urandom_range(31)) : '1;
      b.tuser = {$urandom, $urandom, $urandom, $urandom};
      b.tlast = (i == nbeats - 1);
      send_beat(b, b);
    end
  endtask

  // Output monitor.
  always @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready) begin
      if (expq.size() == 0) begin
        check(1'b0, "unexpected output beat");
      end else begin
        axis_beat_t e;
        longint t;
        e = expq.pop_front();
        t = acc_cycle.pop_front();
        check(m_tdata == e.tdata, "tdata");
        check(m_tkeep == e.tkeep, "tkeep");
        check(m_tuser == e.tuser, "tuser");
        check(m_tlast == e.tlast, "tlast");
        if (check_latency) check(cycle == t + 1, $sformatf("latency %0d", cycle - t));
      end
    end
  end

  initial begin
    logic [31:0] ci;
    logic [7:0]  sp;
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
    rst_n <= 1'b1;
    @(posedge clk);

    // Load messages 1..8 for both ports; 9..11 are loaded later over the
    // entries of 1..3, so that phase 2 also sees messages that miss.
    for (int k = 1; k <= 8; k++) begin
      for (int p = 0; p < 2; p++) begin
        cfg_we    <= 1'b1;
        cfg_idx   <= 5'(2 * (k - 1) + p);
        cfg_entry <= '{valid: 1'b1,
                       key: '{ctrl_info: 32'(k), src_port: (p != 0) ? PORT_NF2 : PORT_NF1},
                       action: '{next_ctrl_info: 32'(k + 1),
                                 next_frwd_tag_prt: (p != 0) ? 32'(PORT_NF1) : 32'(PORT_NF2)}};
        @(posedge clk);
      end
    end
    cfg_we <= 1'b0;
    @(posedge clk);

    // Phase 1: messages 1..8 of one handover, sink always ready, latency 1.
    check_latency = 1'b1;
    for (int k = 1; k <= 8; k++) begin
      send_packet(16'h1212, 32'(k), 32'(PORT_NF2), (k % 2 != 0) ? PORT_NF1 : PORT_NF2, 1);
    end
    repeat (3) @(posedge clk);

    // Replace entries for 1..3 by 9..11 (both ports) and run 9..12.
    for (int k = 9; k <= 11; k++) begin
      for (int p = 0; p < 2; p++) begin
        cfg_we    <= 1'b1;
        cfg_idx   <= 5'(2 * (k - 9) + p);
        cfg_entry <= '{valid: 1'b1,
                       key: '{ctrl_info: 32'(k), src_port: (p != 0) ? PORT_NF2 : PORT_NF1},
                       action: '{next_ctrl_info: 32'(k + 1),
                                 next_frwd_tag_prt: (p != 0) ? 32'(PORT_NF1) : 32'(PORT_NF2)}};
        @(posedge clk);
      end
    end
    cfg_we <= 1'b0;
    lo_msg = 4;
    hi_msg = 11;
    @(posedge clk);
    for (int k = 9; k <= 12; k++) begin
      send_packet(16'h1212, 32'(k), 32'(PORT_NF1), (k % 2 != 0) ? PORT_NF1 : PORT_NF2, 1);
    end
    repeat (3) @(posedge clk);
    check(expq.size() == 0, "phase 1 drained");
    check_latency = 1'b0;

    // Phase 2: random traffic with backpressure.  Entries for 1..3 are gone,
    // so they miss; 4..11 hit on nf1/nf2.
    fork
      begin
        for (int n = 0; n < 400; n++) begin
          ci = 32'($urandom_range(14));
          sp = ($urandom_range(3) == 0) ? 8'($urandom) : (($urandom_range(1) != 0) ? PORT_NF1 : PORT_NF2);
          case ($urandom_range(5))
            0: send_packet(16'h0800, ci, 32'($urandom), sp, $urandom_range(1, 3));
            1: send_packet(16'h1212, ci, 32'(PORT_NF1), sp, $urandom_range(2, 4));
            default: send_packet(16'h1212, ci, 32'(PORT_NF2), sp, 1);
          endcase
          repeat ($urandom_range(2)) @(posedge clk);
        end
      end
      begin
        forever begin
          m_tready <= ($urandom_range(2) != 0);
          @(posedge clk);
        end
      end
    join_any
    m_tready <= 1'b1;
    repeat (20) @(posedge clk);
    disable fork;
    m_tready <= 1'b1;
    repeat (20) @(posedge clk);

    check(expq.size() == 0, "all beats delivered");
    check(cnt_hit == 32'(exp_hit), $sformatf("hit counter %0d vs %0d", cnt_hit, exp_hit));
    check(cnt_miss == 32'(exp_miss), $sformatf("miss counter %0d vs %0d", cnt_miss, exp_miss));
    check(cnt_drop == 32'(exp_drop), $sformatf("drop counter %0d vs %0d", cnt_drop, exp_drop));
    check(cnt_stall == 32'(seen_stall), $sformatf("stall counter %0d vs %0d", cnt_stall, seen_stall));
    $display("mechanisms: hit=%0d miss=%0d drop=%0d stall=%0d", exp_hit, exp_miss, exp_drop, seen_stall);
    check(exp_hit > 0, "table hit happened");
    check(exp_miss > 0, "table miss happened");
    check(exp_drop > 0, "non-SMARTHO drop happened");
    check(seen_stall > 0, "backpressure stall happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
