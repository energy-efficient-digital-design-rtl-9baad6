// tb_weights_rom: checks that every channel address returns its weight, for
// the default table and for an overridden table, and that the read is
// combinational (valid 1 time unit after the address changes).
module tb_weights_rom;
  int checks = 0, failures = 0;
  logic [2:0]        addr;
  logic signed [5:0] w_def, w_alt;
  int exp_def [8] = '{12, -5, 20, 7, -9, 31, 3, 15};
  int exp_alt [8] = '{-32, 31, 0, 1, -1, 17, -17, 5};

  weights_rom u_def (.addr(addr), .weight(w_def));
  weights_rom #(.WEIGHTS({6'h05, 6'h2F, 6'h11, 6'h3F, 6'h01, 6'h00, 6'h1F, 6'h20}))
    u_alt (.addr(addr), .weight(w_alt));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 8; i++) begin
        addr = 3'(r == 1 ? 7 - i : i);
        #1;
        checks += 2;
        if (int'(w_def) != exp_def[addr]) begin failures++; $display("FAIL def a=%0d got %0d", addr, w_def); end
        if (int'(w_alt) != exp_alt[addr]) begin failures++; $display("FAIL alt a=%0d got %0d", addr, w_alt); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
