`timescale 1ns/1ps
// tb_input_termination_model: applies currents to the 16 inputs for all 8
// switch settings and compares the output voltage with Vped + I x R, R being
// the parallel value of the closed 100 ohm / 1 kohm / 10 kohm resistors.
module tb_input_termination_model;
  import target_pkg::*;
  ua_t i_ua [NUM_CH];
  logic [2:0] sel_term;
  mv_t vped_mv = 16'd1200;
  mv_t vout_mv [NUM_CH];
  int checks = 0, failures = 0;

  input_termination_model dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 8; t++) begin
      real r_ohm;
      sel_term = 3'(t);
      r_ohm = 1.0 / ((t & 1 ? 1.0/100.0 : 0.0) + (t & 2 ? 1.0/1000.0 : 0.0) + (t & 4 ? 1.0/10000.0 : 0.0) + 1e-30);
      for (int k = 0; k < 4; k++) begin
        for (int c = 0; c < NUM_CH; c++) i_ua[c] = ua_t'(int'($urandom % 200) - 100);
        #1;
        for (int c = 0; c < NUM_CH; c++) begin
          real e;
          e = (t == 0) ? 1200.0 : 1200.0 + real'(i_ua[c]) * 1e-6 * r_ohm * 1000.0;
          checks++;
          if (real'(vout_mv[c]) < e - 1.01 || real'(vout_mv[c]) > e + 1.01) begin
            failures++;
            if (failures < 5) $display("FAIL term=%0d ch%0d I=%0d uA got %0d mV exp %f", t, c, i_ua[c], vout_mv[c], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
