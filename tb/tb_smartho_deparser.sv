// tb_smartho_deparser -- self-checking test of the deparser.
//
// For random beats and headers it checks byte by byte that, on a first beat
// of a SMARTHO packet, bytes 14..21 hold the new ctrl_info and frwd_tag_prt
// big-endian and every other byte is untouched; that tuser[31:24] carries the
// egress port on every first beat and the rest of tuser is untouched; and that
// beats other than the first pass unchanged.
module tb_smartho_deparser;
  import smartho_pkg::*;

  axis_beat_t in_beat, out_beat;
  logic       sop;
  logic       smartho_valid;
  smartho_h   hdr;
  logic [7:0] dst_port;
  int         checks = 0;
  int         failures = 0;

  smartho_deparser dut (.in_beat(in_beat), .sop(sop), .smartho_valid(smartho_valid),
                        .hdr(hdr), .dst_port(dst_port), .out_beat(out_beat));

  initial begin
    #100000;
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

  initial begin
    logic [7:0] exp_byte;
    logic [7:0] hdr_bytes [8];
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 8; i++) in_beat.tdata[32*i +: 32] = $urandom;
      in_beat.tkeep = $urandom;
      for (int i = 0; i < 4; i++) in_beat.tuser[32*i +: 32] = $urandom;
      in_beat.tlast = 1'($urandom_range(1));
      sop           = 1'($urandom_range(1));
      smartho_valid = 1'($urandom_range(1));
      hdr           = {$urandom, $urandom};
      dst_port      = 8'($urandom);
      hdr_bytes = '{hdr.ctrl_info[31:24], hdr.ctrl_info[23:16], hdr.ctrl_info[15:8],
                    hdr.ctrl_info[7:0], hdr.frwd_tag_prt[31:24], hdr.frwd_tag_prt[23:16],
                    hdr.frwd_tag_prt[15:8], hdr.frwd_tag_prt[7:0]};
      #1;
      for (int i = 0; i < 32; i++) begin
        exp_byte = in_beat.tdata[8*i +: 8];
        if (sop && smartho_valid && i >= 14 && i < 22) exp_byte = hdr_bytes[i - 14];
        check(out_beat.tdata[8*i +: 8] == exp_byte, $sformatf("byte %0d", i));
      end
      check(out_beat.tuser[31:24] == (sop ? dst_port : in_beat.tuser[31:24]), "dst_port field");
      check(out_beat.tuser[23:0] == in_beat.tuser[23:0], "tuser low bits");
      check(out_beat.tuser[127:32] == in_beat.tuser[127:32], "tuser high bits");
      check(out_beat.tkeep == in_beat.tkeep && out_beat.tlast == in_beat.tlast, "tkeep/tlast");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
