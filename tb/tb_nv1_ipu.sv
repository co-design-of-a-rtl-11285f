// tb_nv1_ipu -- self-checking test of the IPU: random epochs of random input
// words with random instruction and immediate, compared with the reference
// arithmetic; also checks that res holds between epochs and that clear
// empties the accumulator.
module tb_nv1_ipu;
  import nv1_pkg::*;
  import nv1_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, finalize;
  data_t in_data, res;
  opcode_e opcode;
  logic [7:0] imm;
  int checks = 0, failures = 0;
  int n_sat = 0, n_op[4] = '{0, 0, 0, 0};

  nv1_ipu dut (.clk, .rst_n, .clear, .in_valid, .in_data, .finalize, .opcode, .imm, .res);

  always #5 clk = ~clk;

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

  initial begin
    clear = 0; in_valid = 0; finalize = 0; in_data = 0; opcode = OP_SUM; imm = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(res == 0, "res zero after reset");
    for (int e = 0; e < 2000; e++) begin
      int s, n, op, im, exp;
      data_t res_prev;
      clear = 1; @(negedge clk); clear = 0;
      s = 0;
      n = $urandom_range(e % 4 == 0 ? 40 : 4);
      for (int k = 0; k < n; k++) begin
        in_valid = $urandom_range(1);
        in_data  = data_t'($urandom);
        if (in_valid) s = wrap16(s + int'(in_data));
        @(negedge clk);
      end
      in_valid = 0;
      op = $urandom_range(3); im = $urandom_range(255);
      if (op == 2 && $urandom_range(1)) im = im & 8'h87;  // small shifts
      opcode = opcode_e'(op); imm = 8'(im);
      res_prev = res;
      @(negedge clk);
      check(res == res_prev, "res held until finalize");
      finalize = 1; @(negedge clk); finalize = 0;
      exp = node_result(s, op, im);
      n_op[op]++;
      if (saturates(s, op, im)) n_sat++;
      check(int'(res) == exp, $sformatf("epoch %0d op %0d imm %0d sum %0d: res %0d exp %0d",
                                        e, op, im, s, res, exp));
    end
    check(n_sat > 0 && n_op[0] > 0 && n_op[1] > 0 && n_op[2] > 0, "all ops and saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
