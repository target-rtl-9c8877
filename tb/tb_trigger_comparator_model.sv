`timescale 1ns/1ps
// tb_trigger_comparator_model: random channel voltages around a threshold,
// both trigger senses, compared with the expected comparator outputs.
module tb_trigger_comparator_model;
  import target_pkg::*;
  mv_t vin_mv [NUM_CH];
  mv_t vthr_mv;
  logic falling;
  logic [NUM_CH-1:0] hit;
  int checks = 0, failures = 0;

  trigger_comparator_model dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      vthr_mv = mv_t'(1400 + $urandom % 200);
      falling = k[0];
      for (int c = 0; c < NUM_CH; c++) vin_mv[c] = mv_t'(int'(vthr_mv) + int'($urandom % 41) - 20);
      #1;
      for (int c = 0; c < NUM_CH; c++) begin
        logic e;
        e = falling ? (int'(vin_mv[c]) < int'(vthr_mv)) : (int'(vin_mv[c]) > int'(vthr_mv));
        checks++;
        if (hit[c] !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
