// tb_smartho_lookup_table -- self-checking test of the exact-match table.
//
// Loads random entries through the write port, keeps its own copy of the
// table, and checks a mix of keys that are present, keys that differ from an
// entry in only the ctrl_info or only the src_port part, and keys never
// written.  Also checks that an invalidated entry stops matching, that a
// lower index wins when two entries share a key, that the table is empty after
// reset and that a write is visible to a lookup in the next cycle.
module tb_smartho_lookup_table;
  import smartho_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        cfg_we;
  logic [3:0]  cfg_idx;
  lut_entry_t  cfg_entry;
  lut_key_t    key;
  logic        hit;
  lut_action_t action;
  lut_entry_t  model [DEPTH];
  int          checks = 0;
  int          failures = 0;

  smartho_lookup_table #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_entry(cfg_entry),
    .key(key), .hit(hit), .action(action));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (key %h)", what, key);
    end
  endtask

  task automatic write(input int idx, input lut_entry_t e);
    @(negedge clk);
    cfg_we    = 1'b1;
    cfg_idx   = 4'(idx);
    cfg_entry = e;
    @(negedge clk);
    cfg_we    = 1'b0;
    model[idx] = e;
  endtask

  // Reference lookup: first valid entry in index order with an equal key.
  task automatic lookup_check(input lut_key_t k);
    logic        exp_hit;
    lut_action_t exp_act;
    exp_hit = 1'b0;
    exp_act = '0;
    for (int i = 0; i < DEPTH; i++)
      if (!exp_hit && model[i].valid && model[i].key.ctrl_info == k.ctrl_info
          && model[i].key.src_port == k.src_port) begin
        exp_hit = 1'b1;
        exp_act = model[i].action;
      end
    key = k;
    #1;
    check(hit == exp_hit, "hit");
    if (exp_hit) check(action == exp_act, "action");
  endtask

  initial begin
    lut_entry_t e;
    lut_key_t   k;
    cfg_we = 1'b0;
    cfg_idx = '0;
    cfg_entry = '0;
    key = '0;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Empty after reset.
    lookup_check('{ctrl_info: 32'd0, src_port: 8'd0});
    lookup_check('{ctrl_info: 32'd1, src_port: 8'h04});

    // Handover sequence entries 1..12 arriving on nf1.
    for (int i = 0; i < 12; i++) begin
      e.valid = 1'b1;
      e.key.ctrl_info = 32'(i + 1);
      e.key.src_port = PORT_NF1;
      e.action.next_ctrl_info = 32'(i + 2);
      e.action.next_frwd_tag_prt = {24'd0, PORT_NF2};
      write(i, e);
      // Visible on the cycle after the write.
      lookup_check(e.key);
      check(hit, "new entry visible next cycle");
    end
    for (int i = 1; i <= 13; i++) begin
      lookup_check('{ctrl_info: 32'(i), src_port: PORT_NF1});
      lookup_check('{ctrl_info: 32'(i), src_port: PORT_NF2});
    end

    // Random entries in the remaining slots and random probes.
    for (int i = 12; i < DEPTH; i++) begin
      e.valid = 1'b1;
      e.key.ctrl_info = $urandom;
      e.key.src_port = 8'($urandom);
      e.action = {$urandom, $urandom};
      write(i, e);
    end
    for (int n = 0; n < 200; n++) begin
      k = model[$urandom_range(DEPTH - 1)].key;
      case ($urandom_range(3))
        0: ;
        1: k.ctrl_info = k.ctrl_info ^ (32'd1 << $urandom_range(31));
        2: k.src_port = k.src_port ^ 8'(1 << $urandom_range(7));
        default: k = {$urandom, 8'($urandom)};
      endcase
      lookup_check(k);
    end

    // Duplicate key: the lower index wins; invalidating it exposes the other.
    e = model[3];
    e.action = {32'hdead_beef, 32'h0000_0040};
    write(14, e);
    lookup_check(e.key);
    check(action.next_ctrl_info == 32'd5, "lower index wins");
    write(3, '0);
    lookup_check(e.key);
    check(hit && action.next_ctrl_info == 32'hdead_beef, "higher index after invalidate");
    write(14, '0);
    lookup_check(e.key);
    check(!hit, "invalidated key misses");

    // Reset clears the table.
    rst_n = 1'b0;
    #1;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    rst_n = 1'b1;
    @(negedge clk);
    lookup_check('{ctrl_info: 32'd1, src_port: PORT_NF1});
    check(!hit, "empty after second reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
