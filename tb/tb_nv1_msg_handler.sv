// tb_nv1_msg_handler -- self-checking test of the Message Handler: cfg decode
// (only writes to this node's index take effect, table writes pass to the
// Memory Handler), loading and shifting of the output chain register, and
// numbering of broadcast words with gaps, restarted by epoch_start.
module tb_nv1_msg_handler;
  import nv1_pkg::*;
  logic clk = 0, rst_n = 0;
  node_id_t node_idx;
  ctrl_t ctrl;
  cfg_t cfg;
  data_t sh_in, sh_out, res, bcast, in_data;
  logic bcast_valid, in_valid, tbl_we;
  node_id_t in_slot, tbl_wdata;
  logic [TABLE_AW-1:0] tbl_addr;
  logic [COUNT_W-1:0] count;
  opcode_e opcode;
  logic [7:0] imm;
  int checks = 0, failures = 0;

  nv1_msg_handler dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int node, input cfg_sel_e sel, input int addr, input int data);
    cfg.we = 1; cfg.node = node_id_t'(node); cfg.sel = sel;
    cfg.addr = TABLE_AW'(addr); cfg.data = 16'(data);
    #1;
    check(tbl_we == (node == int'(node_idx) && sel == CFG_TABLE), "tbl_we decode");
    if (tbl_we) check(tbl_addr == TABLE_AW'(addr) && tbl_wdata == 16'(data), "table write fields");
    @(negedge clk);
    cfg.we = 0;
  endtask

  initial begin
    int slot;
    node_idx = 16'd37;
    ctrl = '0; cfg = '0; sh_in = 0; res = 0; bcast = 0; bcast_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // configuration decode
    for (int i = 0; i < 200; i++) begin
      int node, cnt, op, im;
      node = ($urandom_range(1) == 1) ? 37 : $urandom_range(100);
      cnt = $urandom_range(256); op = $urandom_range(2); im = $urandom_range(255);
      begin
        logic [COUNT_W-1:0] old_count;
        opcode_e old_op;
        logic [7:0] old_imm;
        old_count = count; old_op = opcode; old_imm = imm;
        cfg_write(node, CFG_COUNT, 0, cnt);
        check(count == ((node == 37) ? COUNT_W'(cnt) : old_count), "count register");
        cfg_write(node, CFG_OP, 0, (im << 8) | op);
        check(opcode == ((node == 37) ? opcode_e'(op) : old_op) &&
              imm == ((node == 37) ? 8'(im) : old_imm), "op/imm register");
        cfg_write(node, CFG_TABLE, $urandom_range(255), $urandom);
      end
    end
    ctrl = '0; ctrl.epoch_start = 1;
    // output chain: load at epoch_start, shift on shift, hold otherwise
    res = 8'h5a;
    @(negedge clk); ctrl = '0;
    check(sh_out == 8'h5a, "load result at epoch start");
    sh_in = 8'h11; @(negedge clk);
    check(sh_out == 8'h5a, "hold without shift");
    for (int i = 0; i < 20; i++) begin
      ctrl.shift = 1; sh_in = data_t'($urandom);
      @(negedge clk);
      check(sh_out == sh_in, "shift takes upstream word");
    end
    ctrl = '0;
    // numbering of broadcast words
    for (int e = 0; e < 5; e++) begin
      ctrl.epoch_start = 1; bcast_valid = 1; @(negedge clk);
      ctrl.epoch_start = 0; bcast_valid = 0;
      check(!in_valid, "word in flight dropped at epoch start");
      slot = 0;
      for (int i = 0; i < 300; i++) begin
        bcast_valid = $urandom_range(1); bcast = data_t'($urandom);
        begin
          logic v; data_t d;
          v = bcast_valid; d = bcast;
          @(negedge clk);
          check(in_valid == v, "in_valid one clock after bcast_valid");
          if (v) begin
            check(in_data == d && in_slot == node_id_t'(slot),
                  $sformatf("word %0d: data %h slot %0d", slot, in_data, in_slot));
            slot++;
          end
        end
      end
      bcast_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
