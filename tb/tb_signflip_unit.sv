// tb_signflip_unit: the sign-flip unit passes x when flip = 0 and returns -x
// when flip = 1; checked on edge values and 2000 random values.
module tb_signflip_unit;
  logic signed [23:0] x, y;
  logic flip;
  int checks = 0, failures = 0;

  signflip_unit #(.W(24)) dut (.x, .flip, .y);

  task automatic check(input int v, input bit f);
    int exp;
    x = 24'(v); flip = f;
    #1;
    exp = f ? -v : v;
    checks++;
    if (int'(y) != exp) begin
      failures++;
      $display("FAIL x=%0d flip=%0d y=%0d exp=%0d", v, f, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int edges [6] = '{0, 1, -1, 8388607, -8388607, 1048576};
    foreach (edges[i]) begin
      check(edges[i], 0);
      check(edges[i], 1);
    end
    for (int i = 0; i < 2000; i++) begin
      int v;
      v = int'($urandom_range(0, 16777214)) - 8388607;
      check(v, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
