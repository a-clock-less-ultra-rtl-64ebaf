// Testbench of the LVDS driver model: every combination of Din and WKUP.
// Asleep, both pair wires must be low (common mode at ground); awake,
// LVDS.t must equal Din and LVDS.f its complement.
module tb_lvds_driver;
  import lvds_link_pkg::*;
  logic din, wkup, cm_on;
  lvds_pair_t pad;
  int checks = 0, failures = 0;

  lvds_driver dut (.din, .wkup, .pad, .cm_on);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++)
      for (int k = 0; k < 4; k++) begin
        {wkup, din} = 2'(k);
        #1;
        checks++;
        if (wkup ? (pad.t !== din || pad.f !== ~din || !cm_on)
                 : (pad.t !== 1'b0 || pad.f !== 1'b0 || cm_on)) begin
          failures++;
          $display("FAIL: wkup=%0b din=%0b -> t=%0b f=%0b cm=%0b", wkup, din, pad.t, pad.f, cm_on);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
