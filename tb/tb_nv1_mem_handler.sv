// tb_nv1_mem_handler -- self-checking test of the Memory Handler with its
// SRAM: writes sorted random address tables, streams numbered words with
// random gaps, and checks that exactly the listed senders are accepted, in
// the clock the word arrives (so at one word per clock with no stall), and
// that the count of accepted words is right. Covers empty and full tables.
module tb_nv1_mem_handler;
  import nv1_pkg::*;
  logic clk = 0, rst_n = 0;
  logic epoch_start, tbl_we, in_valid, match, sram_we;
  logic [COUNT_W-1:0] count, n_matched;
  logic [TABLE_AW-1:0] tbl_addr, sram_addr;
  node_id_t tbl_wdata, in_slot, sram_wdata, sram_rdata;
  int checks = 0, failures = 0;

  nv1_mem_handler dut (.*);
  nv1_sram #(.DEPTH(TABLE_DEPTH), .WIDTH(NODE_ID_W)) u_sram (
    .clk, .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit listed [int];

  initial begin
    epoch_start = 0; tbl_we = 0; in_valid = 0; count = 0; tbl_addr = 0; tbl_wdata = 0; in_slot = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n, nslots, next_id, exp_matched, max_id;
      bit dense;
      listed.delete();
      // table size: empty, full, or random
      n = (t == 0) ? 0 : (t == 1 || t == 2) ? TABLE_DEPTH : $urandom_range(1, 40);
      dense = (t == 2);
      nslots = 300 + $urandom_range(200);
      next_id = dense ? 0 : $urandom_range(3);
      for (int i = 0; i < n; i++) begin
        tbl_we = 1; tbl_addr = TABLE_AW'(i); tbl_wdata = node_id_t'(next_id);
        listed[next_id] = 1;
        @(negedge clk);
        next_id += dense ? 1 : $urandom_range(1, 6);
      end
      tbl_we = 0;
      count = COUNT_W'(n);
      epoch_start = 1; @(negedge clk); epoch_start = 0;
      exp_matched = 0;
      for (int s = 0; s < nslots; s++) begin
        // random gaps, none for the dense case
        while (!dense && $urandom_range(3) == 0) begin
          in_valid = 0; @(negedge clk);
          check(!match, "no match without a word");
        end
        in_valid = 1; in_slot = node_id_t'(s);
        #1;
        check(match == listed.exists(s), $sformatf("table %0d slot %0d match %0b exp %0b", t, s, match, listed.exists(s)));
        if (listed.exists(s)) exp_matched++;
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      check(int'(n_matched) == exp_matched, $sformatf("table %0d matched %0d exp %0d", t, n_matched, exp_matched));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
