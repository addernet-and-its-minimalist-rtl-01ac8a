// tb_adder_kernel: checks |a - b| of the 2A adder kernel against integer
// arithmetic, at the paper's 16-bit width, on the extreme values and on
// random pairs. Combinational block: a clock only paces the stimulus.
module tb_adder_kernel;
  localparam int unsigned DW = 16;
  logic signed [DW-1:0] a, b;
  logic        [DW-1:0] y;
  int checks = 0, failures = 0;

  adder_kernel #(.DW(DW)) dut (.a, .b, .y);

  task automatic check(input int av, input int bv);
    int exp;
    a = DW'(av);
    b = DW'(bv);
    #1;
    exp = (av > bv) ? av - bv : bv - av;
    checks++;
    if (int'(y) != exp) begin
      failures++;
      $display("FAIL a=%0d b=%0d y=%0d exp=%0d", av, bv, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0);
    check(-32768, 32767);
    check(32767, -32768);
    check(-32768, -32768);
    check(5, -9);
    check(-3, 7);
    check(100, 99);
    for (int i = 0; i < 5000; i++)
      check($signed(16'($urandom)), $signed(16'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
