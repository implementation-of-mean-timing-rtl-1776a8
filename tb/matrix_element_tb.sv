// matrix_element_tb -- exhaustive check of one matrix pixel.
module matrix_element_tb;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic h1_in, h2_in, sel, coinc_in;
  logic h1_out, h2_out, coinc_out;

  matrix_element u_dut (.*);

  initial begin
    #(1_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {h1_in, h2_in, sel, coinc_in} = 4'(v);
      #10;
      checks += 3;
      if (h1_out != h1_in) begin failures++; $display("FAIL h1 pass, v=%b", 4'(v)); end
      if (h2_out != h2_in) begin failures++; $display("FAIL h2 pass, v=%b", 4'(v)); end
      if (coinc_out != ((v == 4'b1110) || (v[0] == 1'b1))) begin
        failures++; $display("FAIL coincidence, v=%b", 4'(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
