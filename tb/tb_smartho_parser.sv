// tb_smartho_parser -- self-checking test of the SMARTHO parser.
//
// Builds frames byte by byte (independently of the parser's own field
// extraction), drives them through the parser and checks: the SMARTHO header is
// valid only for EtherType 0x1212 with all 22 header bytes present, the
// Ethernet and SMARTHO fields come out big-endian, and sop marks exactly the
// first beat of each packet, including across multi-beat packets.
module tb_smartho_parser;
  import smartho_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  axis_beat_t  beat;
  logic        fire;
  logic        sop;
  parsed_hdr_t hdr;
  int          checks = 0;
  int          failures = 0;

  smartho_parser dut (.clk(clk), .rst_n(rst_n), .s_beat(beat), .s_fire(fire), .sop(sop), .hdr(hdr));

  always #5 clk = ~clk;

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

  // First beat of a frame: dst, src, ethertype, ctrl_info, frwd_tag_prt.
  function automatic axis_beat_t make_first(input logic [47:0] dst, input logic [47:0] src,
                                            input logic [15:0] et, input logic [31:0] ci,
                                            input logic [31:0] ft, input int nbytes,
                                            input logic last);
    axis_beat_t b;
    logic [7:0] bytes [32];
    for (int i = 0; i < 32; i++) bytes[i] = 8'($urandom);
    for (int i = 0; i < 6; i++) bytes[i]      = dst[8*(5-i) +: 8];
    for (int i = 0; i < 6; i++) bytes[6 + i]  = src[8*(5-i) +: 8];
    bytes[12] = et[15:8];
    bytes[13] = et[7:0];
    for (int i = 0; i < 4; i++) bytes[14 + i] = ci[8*(3-i) +: 8];
    for (int i = 0; i < 4; i++) bytes[18 + i] = ft[8*(3-i) +: 8];
    b = '0;
    for (int i = 0; i < 32; i++) begin
      b.tdata[8*i +: 8] = bytes[i];
      b.tkeep[i] = (i < nbytes);
    end
    b.tlast = last;
    return b;
  endfunction

  task automatic drive(input axis_beat_t b);
    beat = b;
    fire = 1'b1;
    #1;
  endtask

  initial begin
    logic [47:0] d, s;
    logic [31:0] ci, ft;
    beat = '0;
    fire = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Single-beat SMARTHO frames with random fields.
    for (int n = 0; n < 20; n++) begin
      d  = 48'({$urandom, $urandom});
      s  = 48'({$urandom, $urandom});
      ci = $urandom;
      ft = $urandom;
      drive(make_first(d, s, 16'h1212, ci, ft, 32, 1'b1));
      check(sop, "sop on single-beat packet");
      check(hdr.smartho_valid, "smartho valid for 0x1212");
      check(hdr.ethernet.dst_addr == d, "dst_addr");
      check(hdr.ethernet.src_addr == s, "src_addr");
      check(hdr.ethernet.ether_type == 16'h1212, "ether_type");
      check(hdr.smartho.ctrl_info == ci, "ctrl_info");
      check(hdr.smartho.frwd_tag_prt == ft, "frwd_tag_prt");
      @(negedge clk);
    end

    // Other EtherTypes: header invalid.
    drive(make_first(48'h1, 48'h2, 16'h0800, 32'd1, 32'd4, 32, 1'b1));
    check(!hdr.smartho_valid, "IPv4 frame has no smartho header");
    check(hdr.ethernet.ether_type == 16'h0800, "ether_type 0x0800");
    @(negedge clk);
    drive(make_first(48'h1, 48'h2, 16'h0101, 32'd1, 32'd4, 32, 1'b1));
    check(!hdr.smartho_valid, "0x0101 frame has no smartho header");
    @(negedge clk);

    // Truncated SMARTHO frame: 21 bytes only.
    drive(make_first(48'h1, 48'h2, 16'h1212, 32'd1, 32'd4, 21, 1'b1));
    check(!hdr.smartho_valid, "short frame has no smartho header");
    @(negedge clk);
    drive(make_first(48'h1, 48'h2, 16'h1212, 32'd1, 32'd4, 22, 1'b1));
    check(hdr.smartho_valid, "22-byte frame has the header");
    @(negedge clk);

    // Three-beat packet: sop only on the first beat.
    drive(make_first(48'h1, 48'h2, 16'h1212, 32'd7, 32'd16, 32, 1'b0));
    check(sop, "sop on first of three beats");
    @(negedge clk);
    drive(make_first(48'h0, 48'h0, 16'h1212, 32'd0, 32'd0, 32, 1'b0));
    check(!sop, "no sop on second beat");
    @(negedge clk);
    fire = 1'b0;     // idle cycle in mid-packet
    #1;
    check(!sop, "no sop while idle mid-packet");
    @(negedge clk);
    drive(make_first(48'h0, 48'h0, 16'h1212, 32'd0, 32'd0, 5, 1'b1));
    check(!sop, "no sop on last beat");
    @(negedge clk);
    drive(make_first(48'h3, 48'h4, 16'h1212, 32'd9, 32'd4, 32, 1'b1));
    check(sop, "sop again after tlast");
    check(hdr.smartho.ctrl_info == 32'd9, "ctrl_info of next packet");
    @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
