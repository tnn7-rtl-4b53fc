// tb_stabilize_func: for every select value and random BRV vectors checks
// out == f[sel]; also walks a single one through f to check each leg.
module tb_stabilize_func;
  logic [7:0] f;
  logic [2:0] sel;
  logic out;
  int checks = 0, failures = 0;

  stabilize_func dut (.f(f), .sel(sel), .out(out));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++)
      for (int s = 0; s < 8; s++) begin
        f = 8'(1 << i); sel = 3'(s); #1;
        checks++; if (out !== (i == s)) begin failures++; $display("i=%0d s=%0d out=%0b", i, s, out); end
      end
    repeat (200) begin
      f = 8'($urandom); sel = 3'($urandom); #1;
      checks++; if (out !== f[sel]) begin failures++; $display("f=%b sel=%0d", f, sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
