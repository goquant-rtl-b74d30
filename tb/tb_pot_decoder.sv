// tb_pot_decoder -- exhaustive check of the 3-bit PoT code decoder.
// Every code is decoded and the signed value (-1)^neg * 8 * 2^-shift (0 when
// zero) is compared with the lattice value from the reference table; the
// zero flag must be set for the zero code only and must leave sign and shift
// at 0 (gated lane).
module tb_pot_decoder;
  import goquant_pkg::*;
  import goquant_ref_pkg::*;

  pot_code_t code;
  pot_op_t   op;
  int checks = 0, failures = 0;

  pot_decoder dut (.code(code), .op(op));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    for (int c = 0; c < 8; c++) begin
      code = 3'(c);
      #1;
      v = op.zero ? 0 : ((op.neg ? -1 : 1) * (8 >> op.shift));
      checks++;
      if (v != code_val8(code)) begin
        failures++;
        $display("FAIL code=%b value*8=%0d expected %0d", code, v, code_val8(code));
      end
      checks++;
      if (op.zero != (code_val8(code) == 0) || (op.zero && (op.neg || op.shift != 0))) begin
        failures++;
        $display("FAIL code=%b zero handling %p", code, op);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
