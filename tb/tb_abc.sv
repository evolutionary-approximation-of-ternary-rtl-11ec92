// tb_abc -- self-checking test of the analog-to-binary converter model.
//
// Three converters with different R1/R2 ratios are swept with sensor voltages
// from 0 to Vref in 1 mV steps, at two reference voltages. The expected bit is
// worked out from the divider rule written in cross-multiplied form,
// Vin * (R1 + R2) > Vref * R2, and compared with each converter output.
// The threshold crossing (0 to 1) is also checked to lie within one step of
// Vref * R2 / (R1 + R2).
module tb_abc;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam real RA1 = 100.0e3, RA2 = 100.0e3;  // threshold Vref/2
  localparam real RB1 = 300.0e3, RB2 = 100.0e3;  // threshold Vref/4
  localparam real RC1 = 50.0e3,  RC2 = 150.0e3;  // threshold 3*Vref/4

  real vin, vref;
  logic oa, ob, oc;

  abc #(.R1(RA1), .R2(RA2)) u_a (.vin(vin), .vref(vref), .out(oa));
  abc #(.R1(RB1), .R2(RB2)) u_b (.vin(vin), .vref(vref), .out(ob));
  abc #(.R1(RC1), .R2(RC2)) u_c (.vin(vin), .vref(vref), .out(oc));

  task automatic check_bit(input logic got, input real r1, input real r2, input string nm);
    logic exp;
    exp = (vin * (r1 + r2) > vref * r2);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s vin=%f vref=%f got=%0b exp=%0b", nm, vin, vref, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vrefs[2];
    real cross_a;
    logic prev_a;
    vrefs[0] = 0.6; vrefs[1] = 1.0;
    foreach (vrefs[k]) begin
      vref = vrefs[k];
      prev_a = 0; cross_a = -1.0;
      for (int mv = 0; mv <= int'(vref * 1000.0); mv++) begin
        vin = mv / 1000.0 + 0.0003;
        #1;
        check_bit(oa, RA1, RA2, "a");
        check_bit(ob, RB1, RB2, "b");
        check_bit(oc, RC1, RC2, "c");
        if (oa && !prev_a) cross_a = vin;
        prev_a = oa;
      end
      // crossing of converter a must be within 1 mV above Vref/2
      checks++;
      if (!(cross_a > vref / 2.0 && cross_a < vref / 2.0 + 0.0011)) begin
        failures++;
        $display("FAIL crossing at %f for vref %f", cross_a, vref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
