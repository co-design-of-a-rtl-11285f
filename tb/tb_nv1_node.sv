// tb_nv1_node -- self-checking test of one node: programs a random sorted
// address table, instruction and immediate through the cfg bus, runs epochs
// of random broadcast words, and checks the result against the reference
// model, both on res and, after the next epoch_start, on the output chain.
// epoch_end is given at the earliest clock allowed (2 clocks after the last
// word), which checks the node's latency.
module tb_nv1_node;
  import nv1_pkg::*;
  import nv1_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  node_id_t node_idx;
  ctrl_t ctrl;
  cfg_t cfg;
  data_t sh_in, sh_out, bcast, res;
  logic bcast_valid;
  logic [COUNT_W-1:0] n_matched;
  int checks = 0, failures = 0;

  nv1_node dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int node, input cfg_sel_e sel, input int addr, input int data);
    cfg.we = 1; cfg.node = node_id_t'(node); cfg.sel = sel;
    cfg.addr = TABLE_AW'(addr); cfg.data = 16'(data);
    @(negedge clk);
    cfg.we = 0;
  endtask

  initial begin
    int prev_res;
    node_idx = 16'd5;
    ctrl = '0; cfg = '0; sh_in = 0; bcast = 0; bcast_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev_res = 0;
    for (int t = 0; t < 80; t++) begin
      int n, nslots, id, op, im, sum, exp, nm;
      bit listed [int];
      listed.delete();
      n = (t == 1) ? 256 : $urandom_range(0, 30);
      nslots = (t == 1) ? 600 : $urandom_range(50, 400);
      op = $urandom_range(3); im = $urandom_range(255);
      if (op != 1) im = im & 8'h83;
      // decoy writes to another node must not disturb this one
      cfg_write(6, CFG_COUNT, 0, 0);
      cfg_write(4, CFG_TABLE, 0, 16'hffff);
      id = $urandom_range(2);
      for (int i = 0; i < n; i++) begin
        cfg_write(5, CFG_TABLE, i, id);
        listed[id] = 1;
        id += (t == 1) ? 2 : $urandom_range(1, 12);
      end
      cfg_write(5, CFG_COUNT, 0, n);
      cfg_write(5, CFG_OP, 0, (im << 8) | op);
      // epoch: the previous result enters the chain
      ctrl.epoch_start = 1; @(negedge clk); ctrl.epoch_start = 0;
      check(int'(sh_out) == prev_res, $sformatf("epoch %0d chain load %0d exp %0d", t, sh_out, prev_res));
      sum = 0; nm = 0;
      for (int s = 0; s < nslots; s++) begin
        while ($urandom_range(4) == 0) begin bcast_valid = 0; @(negedge clk); end
        bcast_valid = 1; bcast = data_t'($urandom);
        if (listed.exists(s)) begin sum = wrap16(sum + int'(bcast)); nm++; end
        @(negedge clk);
      end
      bcast_valid = 0;
      @(negedge clk);
      ctrl.epoch_end = 1; @(negedge clk); ctrl.epoch_end = 0;
      exp = node_result(sum, op, im);
      check(int'(res) == exp, $sformatf("epoch %0d op %0d imm %0d sum %0d: res %0d exp %0d", t, op, im, sum, res, exp));
      check(int'(n_matched) == nm, $sformatf("epoch %0d matched %0d exp %0d", t, n_matched, nm));
      prev_res = exp;
      // chain shifts the upstream word through
      ctrl.shift = 1; sh_in = data_t'($urandom); @(negedge clk); ctrl.shift = 0;
      check(sh_out == sh_in, "chain shift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
