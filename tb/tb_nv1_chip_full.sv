// tb_nv1_chip_full -- the NV-1 chip at its full size (3200 nodes, parameters
// left at their defaults) through programming and three epochs.
//
// Nodes 0..2 hold the paper's example c = 2x + 3y with x and y appended by
// the host after the last node; the next 16 nodes listen to a full table of
// 256 senders spread over the stream; every other node gets a random sorted
// table of up to 8 senders, a random instruction and immediate. The chip's output stream is looped back to its broadcast input.
// Each epoch's stream (3200 node results, then the host words) is compared
// word by word with a reference model, and each epoch is checked to take
// exactly one clock per word plus the fixed overhead.
module tb_nv1_chip_full;
  import nv1_pkg::*;
  import nv1_ref_pkg::*;

  localparam int N = CHIP_NODES;
  localparam int K = 2;
  localparam int FULL = 16;   // nodes with a full 256-entry table

  logic clk = 0, rst_n = 0;
  ctrl_t ctrl;
  cfg_t cfg;
  data_t d_out, host_in;
  logic d_valid;
  int checks = 0, failures = 0;

  nv1_chip u_chip (
    .clk, .rst_n, .chip_base(16'd0), .ctrl, .cfg,
    .chain_in(host_in), .bcast_in(d_out), .bcast_valid(d_valid),
    .data_out(d_out), .data_out_valid(d_valid));

  always #5 clk = ~clk;

  int host_words [K];
  int shift_cnt;
  assign host_in = data_t'(host_words[shift_cnt < K ? shift_cnt : 0]);

  int stream [$];
  always @(posedge clk) if (d_valid) begin
    stream.push_back(int'(d_out));
    shift_cnt <= shift_cnt + 1;
  end

  int tbl [N][$];
  int op [N], imm [N], res [N];
  int n_match = 0, n_sat = 0, n_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic program_node(input int n, input int o, input int im, input int ids [$]);
    tbl[n] = ids; op[n] = o; imm[n] = im;
    foreach (ids[i]) cfg_write(n, CFG_TABLE, i, ids[i]);
    cfg_write(n, CFG_COUNT, 0, ids.size());
    cfg_write(n, CFG_OP, 0, (im << 8) | o);
  endtask

  task automatic run_epoch();
    int t, exp_stream [$];
    longint c0, c1;
    t = N + K;
    for (int i = 0; i < N; i++) exp_stream.push_back(res[i]);
    for (int i = 0; i < K; i++) exp_stream.push_back(host_words[i]);
    stream.delete();
    shift_cnt = 0;
    c0 = $time;
    ctrl = '0; ctrl.epoch_start = 1; @(negedge clk); ctrl = '0;
    ctrl.shift = 1; repeat (t) @(negedge clk); ctrl.shift = 0;
    repeat (END_GAP) @(negedge clk);
    ctrl.epoch_end = 1; @(negedge clk); ctrl.epoch_end = 0;
    c1 = $time;
    // one clock per word, plus epoch_start, END_GAP and epoch_end
    check((c1 - c0) / 10 == t + END_GAP + 2, $sformatf("epoch took %0d clocks", (c1 - c0) / 10));
    @(negedge clk);
    check(stream.size() == t, $sformatf("stream length %0d exp %0d", stream.size(), t));
    for (int s = 0; s < t && s < stream.size(); s++)
      check(stream[s] == exp_stream[s], $sformatf("slot %0d: %0d exp %0d", s, stream[s], exp_stream[s]));
    for (int i = 0; i < N; i++) begin
      int sum;
      sum = 0;
      foreach (tbl[i][j]) if (tbl[i][j] < t) begin
        sum = wrap16(sum + exp_stream[tbl[i][j]]);
        n_match++;
      end
      if (saturates(sum, op[i], imm[i])) n_sat++;
      res[i] = node_result(sum, op[i], imm[i]);
    end
  endtask

  initial begin
    int ids [$];
    ctrl = '0; cfg = '0;
    for (int i = 0; i < N; i++) begin tbl[i] = {}; op[i] = 0; imm[i] = 0; res[i] = 0; end
    host_words[0] = -9; host_words[1] = 4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    program_node(0, 1, 2, '{N + 0});      // MUL(x, 2)
    program_node(1, 1, 3, '{N + 1});      // MUL(y, 3)
    program_node(2, 0, 0, '{0, 1});       // SUM(inputs)
    for (int i = 3; i < N; i++) begin
      int id, n;
      ids.delete();
      if (i < 3 + FULL) begin
        // full fan-in: 256 senders spread over the whole stream
        id = $urandom_range(0, 3);
        for (int j = 0; j < TABLE_DEPTH; j++) begin
          ids.push_back(id);
          id += $urandom_range(1, 24);
        end
        n_full++;
      end else begin
        n = $urandom_range(0, 8);
        id = $urandom_range(0, 400);
        for (int j = 0; j < n && id < N + K; j++) begin
          ids.push_back(id);
          id += $urandom_range(1, 800);
        end
      end
      program_node(i, $urandom_range(3), $urandom_range(255) & (($urandom_range(1) == 1) ? 8'hff : 8'h83), ids);
    end
    for (int e = 0; e < 3; e++) run_epoch();
    check(stream[2] == -6, $sformatf("2x+3y with x=-9, y=4: %0d exp -6", stream[2]));
    check(n_match > 0 && n_sat > 0, "words accepted and results saturated");
    check(n_full == FULL, "nodes with a full table");
    $display("full size: %0d nodes, %0d words accepted, %0d saturated results", N, n_match, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
