// tb_smartho_match_action -- self-checking test of the ingress control.
//
// Drives random parsed headers, ingress ports and table results and checks
// against the three operations: dst_port is the incoming frwd_tag_prt's low
// byte, the table key is {ctrl_info, src_port}, on a hit both header fields take
// the table's action data, on a miss the header is unchanged, and a packet
// without the SMARTHO header is dropped (dst_port 0).  Exactly one of the
// verdicts is raised for every packet.
module tb_smartho_match_action;
  import smartho_pkg::*;

  parsed_hdr_t hdr;
  logic [7:0]  src_port;
  lut_key_t    lut_key;
  logic        lut_hit;
  lut_action_t lut_action;
  smartho_h    hdr_out;
  logic [7:0]  dst_port;
  logic        is_hit, is_miss, is_drop;
  int          checks = 0;
  int          failures = 0;
  int          n_hit = 0, n_miss = 0, n_drop = 0;

  smartho_match_action dut (
    .hdr(hdr), .src_port(src_port), .lut_key(lut_key), .lut_hit(lut_hit),
    .lut_action(lut_action), .hdr_out(hdr_out), .dst_port(dst_port),
    .is_hit(is_hit), .is_miss(is_miss), .is_drop(is_drop));

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
    for (int n = 0; n < 300; n++) begin
      hdr = 177'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      hdr.smartho_valid = ($urandom_range(4) != 0);
      hdr.smartho.frwd_tag_prt = (n % 2 != 0) ? {24'($urandom), PORT_NF2} : $urandom;
      src_port   = 8'($urandom);
      lut_hit    = 1'($urandom_range(1));
      lut_action = {$urandom, $urandom};
      #1;
      check(lut_key.ctrl_info == hdr.smartho.ctrl_info, "key ctrl_info");
      check(lut_key.src_port == src_port, "key src_port");
      check(32'(is_hit) + 32'(is_miss) + 32'(is_drop) == 1, "one verdict");
      if (!hdr.smartho_valid) begin
        n_drop++;
        check(is_drop, "drop verdict");
        check(dst_port == 8'h00, "dropped packet has no port");
      end else begin
        check(dst_port == hdr.smartho.frwd_tag_prt[7:0], "dst_port from frwd_tag_prt");
        if (lut_hit) begin
          n_hit++;
          check(is_hit, "hit verdict");
          check(hdr_out.ctrl_info == lut_action.next_ctrl_info, "next ctrl_info");
          check(hdr_out.frwd_tag_prt == lut_action.next_frwd_tag_prt, "next frwd_tag_prt");
        end else begin
          n_miss++;
          check(is_miss, "miss verdict");
          check(hdr_out == hdr.smartho, "header unchanged on miss");
        end
      end
    end
    check(n_hit > 0 && n_miss > 0 && n_drop > 0, "all three cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
