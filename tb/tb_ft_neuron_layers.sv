// tb_ft_neuron_layers -- the fault-tolerant neuron at the fan-ins of the
// layers of the evaluated LeNet-style network: 16 and 32 weights per filter
// of the two convolution layers, 120 and 84 inputs of the second and third
// fully connected layers (the first, 576, is covered at full size by
// tb_ft_neuron_full). One neuron per size runs in parallel, each driven and
// checked by tb_neuron_driver; the results are summed here.
module tb_ft_neuron_layers;
  localparam int NL = 4;
  localparam int SIZES [NL] = '{16, 32, 84, 120};

  int checks [NL];
  int fails  [NL];
  bit done   [NL];
  int cycles = 0;
  logic clk = 0;

  for (genvar g = 0; g < NL; g++) begin : g_layer
    tb_neuron_driver #(.N(SIZES[g]), .TRIALS(6)) u_drv (
      .checks_o   (checks[g]),
      .failures_o (fails[g]),
      .done_o     (done[g])
    );
  end

  always #5 clk = ~clk;

  // watchdog
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      int c, f;
      c = 0; f = 1;
      for (int i = 0; i < NL; i++) begin c += checks[i]; f += fails[i]; end
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", c, f);
      $finish;
    end
  end

  initial begin
    int c, f;
    wait (done[0] && done[1] && done[2] && done[3]);
    c = 0; f = 0;
    for (int i = 0; i < NL; i++) begin c += checks[i]; f += fails[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
