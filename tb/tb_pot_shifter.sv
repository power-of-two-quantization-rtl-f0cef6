// tb_pot_shifter: exhaustive check of the PoT shifter.
//
// Drives every 8-bit activation with every 3-bit exponent code into two
// instances, one with the zero code disabled (default) and one with it
// enabled, and compares the 12-bit product with floor(a * 16 / 2^e) worked
// out in real arithmetic. The zero-code instance must give 0 for e = 7.
// Combinational: each vector is checked 1 ns after it is applied.
module tb_pot_shifter;
  logic signed [7:0]  act;
  logic        [2:0]  e;
  logic signed [11:0] prod, prod_z;
  int checks = 0, failures = 0;

  pot_shifter dut (.act(act), .exp_i(e), .prod(prod));
  pot_shifter #(.PRUNE_ZERO(1'b1)) dut_z (.act(act), .exp_i(e), .prod(prod_z));

  function automatic int ref_prod(int a, int ee);
    real r;
    r = $floor(real'(a) * 16.0 / (2.0 ** ee));
    return int'(r);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -128; a < 128; a++) begin
      for (int ee = 0; ee < 8; ee++) begin
        act = 8'(a);
        e   = 3'(ee);
        #1;
        checks++;
        if (int'(prod) != ref_prod(a, ee)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d e=%0d prod=%0d exp=%0d", a, ee, prod, ref_prod(a, ee));
        end
        checks++;
        if (int'(prod_z) != ((ee == 7) ? 0 : ref_prod(a, ee))) begin
          failures++;
          if (failures < 10) $display("FAIL zero-code a=%0d e=%0d prod=%0d", a, ee, prod_z);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
