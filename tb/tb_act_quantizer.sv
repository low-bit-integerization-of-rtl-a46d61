// tb_act_quantizer: random values against random ascending references; the code must equal
// the number of references exceeded minus 2^(NBIT-1).  Includes values equal to a reference.
module tb_act_quantizer;
  import sa_ref_pkg::*;
  localparam int W = 16, NBIT = 3, NT = 7;
  logic signed [W-1:0] x, th [NT];
  logic signed [NBIT-1:0] code;
  int checks = 0, failures = 0;

  act_quantizer #(.W(W), .NBIT(NBIT)) dut (.x(x), .th(th), .code(code));

  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t[];
    t = new[NT];
    for (int it = 0; it < 2000; it++) begin
      automatic int base = $urandom_range(0, 400) - 200;
      for (int k = 0; k < NT; k++) begin
        base += $urandom_range(1, 60);
        th[k] = W'(base); t[k] = base;
      end
      x = (it % 5 == 0) ? th[$urandom_range(0, NT-1)] : W'($urandom_range(0, 1200) - 600);
      #1;
      checks++;
      if (code != quant(x, t, NBIT)) begin
        failures++;
        if (failures < 5) $display("x=%0d code=%0d exp=%0d", x, code, quant(x, t, NBIT));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
