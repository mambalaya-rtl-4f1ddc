// tb_log_unit: checks the logarithm unit against $ln.
//
// Every positive Q8.8 value from 1/256 to 127.99 (step 3) must give ln(x)
// within 0.02 + 1 LSB; zero and negative operands must give the most
// negative Q8.8 value.
module tb_log_unit;
  import mambalaya_pkg::*;

  data_t x, y;
  int checks = 0, failures = 0;

  log_unit dut (.x(x), .y(y));

  initial begin
    for (int v = 1; v < 32768; v += 3) begin
      real got, ref_v;
      x = data_t'(v);
      #1;
      got   = real'(y) / 256.0;
      ref_v = $ln(real'(v) / 256.0);
      checks++;
      if ((got - ref_v) > 0.024 || (ref_v - got) > 0.024) begin
        failures++;
        if (failures < 10) $display("FAIL x=%f got=%f ref=%f", real'(v) / 256.0, got, ref_v);
      end
    end
    for (int v = -5; v <= 0; v++) begin
      x = data_t'(v);
      #1;
      checks++;
      if (y != DATA_MIN) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
