// tb_tanh_lut: checks every index of the 38-entry tanh table against
// round(127*tanh(i/8)) computed with the simulator's real arithmetic, and the
// saturation of indices past the end.
module tb_tanh_lut;
  logic [7:0] idx;
  logic [6:0] y0, y1;
  int checks = 0, failures = 0;

  tanh_lut dut (.idx, .y0, .y1);

  function automatic int ref_t(int i);
    if (i > 37) i = 37;
    return int'($floor(127.0 * $tanh(real'(i) / 8.0) + 0.5));
  endfunction

  initial begin
    for (int i = 0; i < 48; i++) begin
      idx = 8'(i);
      #1;
      checks += 2;
      if (int'(y0) != ref_t(i))     begin failures++; $display("FAIL idx %0d y0 %0d exp %0d", i, y0, ref_t(i)); end
      if (int'(y1) != ref_t(i + 1)) begin failures++; $display("FAIL idx %0d y1 %0d exp %0d", i, y1, ref_t(i + 1)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
