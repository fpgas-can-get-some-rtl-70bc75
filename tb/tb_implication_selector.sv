// Testbench for implication_selector: random sets of valid implications on
// 16 inputs; the output must be the valid input with the lowest index, or
// nothing when no input is valid.
module tb_implication_selector;
  import sat_pkg::*;

  localparam int unsigned N = 16;
  impl_t [N-1:0] impl_in;
  impl_t impl_out;
  int checks = 0, failures = 0;

  implication_selector #(.N(N)) dut (.impl_in, .impl_out);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      impl_t exp;
      int density;
      density = $urandom_range(0, 20);
      for (int i = 0; i < N; i++) begin
        impl_in[i].valid = ($urandom_range(0, 99) < density);
        impl_in[i].vid   = var_t'($urandom);
        impl_in[i].value = 1'($urandom);
      end
      if (t == 0) impl_in = '0;
      if (t == 1) begin impl_in = '0; impl_in[N-1] = {1'b1, 6'd63, 1'b1}; end
      #1;
      exp = '0;
      for (int i = 0; i < N; i++)
        if (impl_in[i].valid) begin exp = impl_in[i]; break; end
      checks++;
      if (impl_out !== exp) begin
        failures++;
        $display("FAIL: in=%h out=%h expected=%h", impl_in, impl_out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
