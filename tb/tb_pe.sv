// tb_pe: feeds random operand streams into one PE and checks the forwarded
// operands (one-cycle delay), the accumulated dot product and the clear.
//
// The four-byte operands follow the paper; the PE structure is this design's own.
module tb_pe;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [31:0] a_in = 0, b_in = 0, a_out, b_out, acc;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    logic [31:0] exp, pa, pb;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 5; run++) begin
      clr = 1; @(negedge clk); clr = 0;
      chk(acc == 0, "clear");
      exp = 0;
      for (int i = 0; i < 20; i++) begin
        a_in = (run == 4) ? $urandom : $urandom_range(0, 1000);
        b_in = (run == 4) ? $urandom : $urandom_range(0, 1000);
        pa = a_in; pb = b_in;
        exp = exp + pa * pb;
        @(negedge clk);
        chk(a_out == pa && b_out == pb, "operands forwarded");
        chk(acc == exp, $sformatf("acc %0d exp %0d", acc, exp));
      end
      a_in = 0; b_in = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
