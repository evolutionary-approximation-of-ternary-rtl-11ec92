// tb_tnn_datasets -- the classifier at each published network topology.
//
// Five classifiers are built with the (inputs, hidden, outputs) topologies of
// the evaluated ternary networks: Arrhythmia (274,3,16), Breast Cancer
// (10,10,2), Cardio (21,3,3), Red Wine (11,3,6) and White Wine (11,11,7).
// Weights and thresholds are pseudo-random (see tnn_dataset_run), since the
// trained models are not given; what is tested is that the hardware computes
// the network it is built for, at the real sizes. Each run is checked cycle
// by cycle against a reference model. Argmax ties and zero-sum hidden
// neurons are counted over all runs and must both occur.
module tb_tnn_datasets;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NR = 5;
  int   c [NR], f [NR], t [NR], z [NR];
  logic d [NR];

  tnn_dataset_run #(.N_IN(274), .N_HID(3),  .N_OUT(16), .SEED(11)) u_arr (clk, c[0], f[0], t[0], z[0], d[0]);
  tnn_dataset_run #(.N_IN(10),  .N_HID(10), .N_OUT(2),  .SEED(22)) u_bc  (clk, c[1], f[1], t[1], z[1], d[1]);
  tnn_dataset_run #(.N_IN(21),  .N_HID(3),  .N_OUT(3),  .SEED(33)) u_car (clk, c[2], f[2], t[2], z[2], d[2]);
  tnn_dataset_run #(.N_IN(11),  .N_HID(3),  .N_OUT(6),  .SEED(44)) u_red (clk, c[3], f[3], t[3], z[3], d[3]);
  tnn_dataset_run #(.N_IN(11),  .N_HID(11), .N_OUT(7),  .SEED(55)) u_wht (clk, c[4], f[4], t[4], z[4], d[4]);

  int checks, failures, ties, zsums;

  task automatic report();
    checks = 0; failures = 0; ties = 0; zsums = 0;
    for (int i = 0; i < NR; i++) begin
      checks += c[i]; failures += f[i]; ties += t[i]; zsums += z[i];
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NR; i++) if (d[i] !== 1'b1) all = 0;
    end while (!all);
    report();
    checks += 2;
    if (ties == 0)  begin failures++; $display("FAIL no argmax tie"); end
    if (zsums == 0) begin failures++; $display("FAIL no zero-sum hidden neuron"); end
    $display("argmax ties=%0d zero-sum hidden outputs=%0d", ties, zsums);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
