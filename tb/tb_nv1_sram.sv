// tb_nv1_sram -- self-checking test of the address-table SRAM: fills all 256
// words with random data, reads them back in random order and checks the
// one-clock read latency and that a write leaves the read port unchanged.
module tb_nv1_sram;
  localparam int DEPTH = 256;
  logic clk = 0;
  logic we;
  logic [7:0] addr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  nv1_sram dut (.clk, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] held;
    we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; addr = 8'(i); wdata = 16'($urandom); model[i] = wdata;
      @(negedge clk);
    end
    // random reads: data appears after one edge
    for (int n = 0; n < 1000; n++) begin
      int a;
      a = $urandom_range(DEPTH-1);
      we = 0; addr = 8'(a);
      @(negedge clk);
      check(rdata == model[a], $sformatf("read %0d got %h exp %h", a, rdata, model[a]));
    end
    // a write does not change rdata; the new data reads back afterwards
    held = rdata;
    we = 1; addr = 8'd7; wdata = ~model[7]; model[7] = wdata;
    @(negedge clk);
    check(rdata == held, "rdata held during write");
    we = 0; addr = 8'd7;
    @(negedge clk);
    check(rdata == model[7], "read after overwrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
