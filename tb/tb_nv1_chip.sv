// tb_nv1_chip -- end-to-end test of the NV-1 array, at 12 nodes per chip.
//
// Two chips are built. In single-chip mode chip A alone forms the array: its
// chain input comes from the host, which so appends input words to each
// epoch's stream. In two-chip mode chip B (chip_base = 12) is chained behind
// chip A and the host feeds chip B. In both modes the stream at chip A's
// data_out is looped back to the broadcast inputs of both chips.
//
// The test first runs the paper's two-layer example, c = 2x + 3y (two
// multiply nodes feeding a sum node), then random networks over several
// epochs. Every word of every epoch's stream is compared with a reference
// model: node results of the previous epoch in ID order, then the host words.
// It counts the mechanisms the design has and fails if one never happened:
// accepted words, each instruction, saturation, host input words, words from
// the second chip, a full 256-entry table, gaps in the shift stream, and
// configuration writes meant for the other chip.
module tb_nv1_chip;
  import nv1_pkg::*;
  import nv1_ref_pkg::*;

  localparam int N = 12;
  localparam int MAXN = 2 * N;
  localparam int MAXK = 300;

  logic clk = 0, rst_n = 0;
  ctrl_t ctrl;
  cfg_t cfg;
  data_t a_out, b_out, a_chain_in, host_in;
  logic a_out_valid, b_out_valid;
  bit two_chip;
  int checks = 0, failures = 0;

  nv1_chip #(.N_NODES(N)) u_a (
    .clk, .rst_n, .chip_base(16'd0), .ctrl, .cfg,
    .chain_in(a_chain_in), .bcast_in(a_out), .bcast_valid(a_out_valid),
    .data_out(a_out), .data_out_valid(a_out_valid));
  nv1_chip #(.N_NODES(N)) u_b (
    .clk, .rst_n, .chip_base(16'(N)), .ctrl, .cfg,
    .chain_in(host_in), .bcast_in(a_out), .bcast_valid(a_out_valid),
    .data_out(b_out), .data_out_valid(b_out_valid));

  assign a_chain_in = two_chip ? b_out : host_in;

  always #5 clk = ~clk;

  // host words for the current epoch, presented in the order of the shifts
  int host_words [MAXK];
  int shift_cnt;
  assign host_in = data_t'(host_words[shift_cnt < MAXK ? shift_cnt : 0]);

  // stream capture
  int stream [$];
  always @(posedge clk) if (a_out_valid) begin
    stream.push_back(int'(a_out));
    shift_cnt <= shift_cnt + 1;
  end

  // reference model state
  int tbl [MAXN][$];
  int op [MAXN], imm [MAXN], res [MAXN];

  // mechanism counters
  int n_match = 0, n_op [4] = '{0, 0, 0, 0}, n_sat = 0, n_host = 0, n_chip_b = 0;
  int n_full = 0, n_gap = 0, n_foreign = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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

  // program node n of the reference and of the hardware
  task automatic program_node(input int n, input int o, input int im, input int ids [$]);
    tbl[n] = ids; op[n] = o; imm[n] = im;
    foreach (ids[i]) cfg_write(n, CFG_TABLE, i, ids[i]);
    cfg_write(n, CFG_COUNT, 0, ids.size());
    cfg_write(n, CFG_OP, 0, (im << 8) | o);
    if (ids.size() == 256) n_full++;
  endtask

  // one epoch over nn nodes and k host words, with optional gaps in the shifts
  task automatic run_epoch(input int nn, input int k, input bit gaps);
    int t, exp_stream [$];
    t = nn + k;
    for (int i = 0; i < nn; i++) exp_stream.push_back(res[i]);
    for (int i = 0; i < k; i++) exp_stream.push_back(host_words[i]);
    stream.delete();
    shift_cnt = 0;
    ctrl = '0; ctrl.epoch_start = 1; @(negedge clk); ctrl = '0;
    for (int s = 0; s < t; s++) begin
      while (gaps && $urandom_range(3) == 0) begin ctrl.shift = 0; @(negedge clk); n_gap++; end
      ctrl.shift = 1; @(negedge clk);
    end
    ctrl.shift = 0;
    repeat (END_GAP) @(negedge clk);
    ctrl.epoch_end = 1; @(negedge clk); ctrl.epoch_end = 0;
    @(negedge clk);
    // the stream
    check(stream.size() == t, $sformatf("stream length %0d exp %0d", stream.size(), t));
    for (int s = 0; s < t && s < stream.size(); s++) begin
      check(stream[s] == exp_stream[s], $sformatf("slot %0d: %0d exp %0d", s, stream[s], exp_stream[s]));
      if (s >= nn) n_host++;
      else if (s >= N) n_chip_b++;
    end
    // reference epoch
    for (int i = 0; i < nn; i++) begin
      int sum;
      sum = 0;
      foreach (tbl[i][j]) if (tbl[i][j] < t) begin
        sum = wrap16(sum + exp_stream[tbl[i][j]]);
        n_match++;
      end
      n_op[op[i]]++;
      if (saturates(sum, op[i], imm[i])) n_sat++;
      res[i] = node_result(sum, op[i], imm[i]);
    end
  endtask

  function automatic void random_table(output int ids [$], input int t, input int maxn);
    int id, n;
    ids.delete();
    n = $urandom_range(0, maxn);
    id = $urandom_range(3);
    for (int i = 0; i < n && id < t + 4; i++) begin
      ids.push_back(id);
      id += $urandom_range(1, 5);
    end
  endfunction

  initial begin
    int ids [$];
    ctrl = '0; cfg = '0; two_chip = 0;
    foreach (host_words[i]) host_words[i] = 0;
    for (int i = 0; i < MAXN; i++) begin tbl[i] = {}; op[i] = 0; imm[i] = 0; res[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- the paper's example: c = 2x + 3y, x and y from the host ----
    program_node(0, 1, 2, '{N + 0});      // MUL(x, 2)
    program_node(1, 1, 3, '{N + 1});      // MUL(y, 3)
    program_node(2, 0, 0, '{0, 1});       // SUM(inputs)
    host_words[0] = 5; host_words[1] = 7;
    run_epoch(N, 2, 0);
    run_epoch(N, 2, 0);
    check(res[2] == 31, "reference example");
    run_epoch(N, 2, 0);
    // the third epoch's stream carried node 2's result of the second
    check(stream[2] == 31, $sformatf("2x+3y on the chip output: %0d exp 31", stream[2]));

    // ---- random single-chip networks, one node with a full table ----
    for (int r = 0; r < 6; r++) begin
      int k;
      k = (r == 0) ? 270 : $urandom_range(0, 10);
      for (int i = 0; i < k; i++) host_words[i] = $urandom_range(0, 255) - 128;
      for (int i = 0; i < N; i++) begin
        if (r == 0 && i == 3) begin
          ids.delete();
          for (int j = 0; j < 256; j++) ids.push_back(j + 5);
        end else random_table(ids, N + k, 12);
        program_node(i, $urandom_range(3), $urandom_range(255) & (($urandom_range(1) == 1) ? 8'hff : 8'h83), ids);
      end
      for (int e = 0; e < 3; e++) run_epoch(N, k, r % 2 == 1);
    end

    // ---- two chained chips ----
    two_chip = 1;
    for (int i = 0; i < MAXN; i++) res[i] = 0;
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < 6; r++) begin
      int k;
      k = $urandom_range(0, 10);
      for (int i = 0; i < k; i++) host_words[i] = $urandom_range(0, 255) - 128;
      for (int i = 0; i < MAXN; i++) begin
        random_table(ids, MAXN + k, 15);
        program_node(i, $urandom_range(3), $urandom_range(255) & (($urandom_range(1) == 1) ? 8'hff : 8'h83), ids);
        if (i >= N) n_foreign++;
      end
      for (int e = 0; e < 3; e++) run_epoch(MAXN, k, r % 2 == 0);
    end

    $display("mechanisms: match=%0d sum=%0d mul=%0d shift=%0d rsvd=%0d sat=%0d host=%0d chipB=%0d full=%0d gap=%0d foreign_cfg=%0d",
             n_match, n_op[0], n_op[1], n_op[2], n_op[3], n_sat, n_host, n_chip_b, n_full, n_gap, n_foreign);
    check(n_match > 0, "words accepted");
    check(n_op[0] > 0 && n_op[1] > 0 && n_op[2] > 0, "every instruction used");
    check(n_sat > 0, "saturation happened");
    check(n_host > 0, "host words through the chain");
    check(n_chip_b > 0, "second chip's words in the stream");
    check(n_full > 0, "full 256-entry table");
    check(n_gap > 0, "gaps in the shift stream");
    check(n_foreign > 0, "cfg writes for the other chip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
