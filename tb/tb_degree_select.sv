// tb_degree_select: exhaustive check of the usage/miss matrix and of the
// degree-to-lines mapping (1, 4, 8 lines at the default parameters).
module tb_degree_select;
  import umbp_pkg::*;
  int checks = 0, failures = 0;
  logic common, low_miss;
  degree_e degree;
  logic [DEG_W-1:0] lines;

  degree_select dut (.common, .low_miss, .degree, .lines);

  task automatic expect_deg(input logic c, input logic l, input degree_e d, input int n);
    common = c; low_miss = l; #1;
    checks++;
    if (degree != d || lines != DEG_W'(n)) begin
      failures++;
      $display("FAIL common=%0b low_miss=%0b degree=%s lines=%0d (want %s %0d)",
               c, l, degree.name(), lines, d.name(), n);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_deg(1'b1, 1'b1, DEG_CLASS_STANDARD, 4);
    expect_deg(1'b1, 1'b0, DEG_CLASS_HIGH,     8);
    expect_deg(1'b0, 1'b1, DEG_CLASS_LOW,      1);
    expect_deg(1'b0, 1'b0, DEG_CLASS_STANDARD, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
