// tb_input_current_mux: exhaustive check of the input-current selection:
// free-run gives the activation, host mode the zero-extended 4-bit weight.
module tb_input_current_mux;
  logic        free_run;
  logic [7:0]  activation;
  logic [3:0]  weight;
  logic [15:0] current;
  int checks = 0, failures = 0;

  input_current_mux dut (.*);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < 256; a++)
        for (int w = 0; w < 16; w++) begin
          free_run = 1'(m); activation = 8'(a); weight = 4'(w);
          #1;
          checks++;
          if (current !== (m ? 16'(a) : 16'(w))) begin
            failures++;
            $display("FAIL: mode=%0d a=%0d w=%0d current=%0d", m, a, w, current);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
