// tb_exact_adder: exact adder checked on corner and random operands.
module tb_exact_adder;
  logic [15:0] x, y;
  logic [16:0] s;
  int checks = 0, failures = 0;

  exact_adder #(.W(16)) u_dut (.x, .y, .s);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int xa, int ya);
    x = 16'(xa);
    y = 16'(ya);
    #1;
    checks++;
    if (int'(s) != xa + ya) begin
      failures++;
      $display("%0d + %0d gave %0d", xa, ya, s);
    end
  endtask

  initial begin
    try(0, 0);
    try(65535, 65535);
    try(65535, 1);
    try(32768, 32768);
    for (int k = 0; k < 2000; k++) try(int'($urandom_range(65535)), int'($urandom_range(65535)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
