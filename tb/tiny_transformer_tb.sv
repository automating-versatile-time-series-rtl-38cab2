// tiny_transformer_tb: end-to-end test of the accelerator at its default
// size (the PeMS forecasting configuration: 24 steps, 1 feature,
// d_model 16, 1 output, 6-bit codes), with no parameter overridden.
//
// A random model (weights, biases, quantisation constants, exponential
// table, sinusoidal positional table) is loaded through the parameter port,
// then windows are written, run and read back; each output and the encoder
// output buffer are compared with the reference chain tt_ref_pkg::model_p.
// Mechanisms counted, each of which must occur at least once: back-to-back
// inferences on one loaded model, a reload of the whole model between
// inferences, output saturation in a requantiser, the ReLU of the
// feed-forward block cutting a value, and busy held high while an inference
// runs. The latency must equal tt_ref_pkg::lat_model.
module tiny_transformer_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, N = 24, M = 1, D = 16, K = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            x_we, cfg_we, start, busy, done;
  logic [$clog2(N*M)-1:0] x_addr;
  logic [BITS-1:0] x_data, y_data;
  logic [7:0]      cfg_sel;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  logic [0:0]      y_addr;

  tiny_transformer dut (
    .clk, .rst_n, .x_we, .x_addr, .x_data, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
    .start, .busy, .done, .y_addr, .y_data);

  task automatic drive(cfg_q_t q);
    foreach (q[i]) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = 8'(q[i].sel); cfg_addr = 16'(q[i].addr); cfg_data = q[i].data;
    end
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_infer = 0, n_reload = 0, n_busy_seen = 0;

  initial begin
    model_p p;
    arr_t x, y;
    cfg_q_t q;
    int cycles, lat;
    x_we = 0; x_addr = 0; x_data = 0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    start = 0; y_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lat = lat_model(N, M, D, K);
    for (int model = 0; model < 2; model++) begin
      p = new(BITS, N, M, D, K);
      q.delete(); p.cfg(q, D, M, K); drive(q);
      if (model > 0) n_reload++;
      for (int win = 0; win < 2; win++) begin
        x = rnd_codes(N*M, BITS);
        foreach (x[i]) begin
          @(negedge clk); x_we = 1; x_addr = $bits(x_addr)'(i); x_data = BITS'(x[i]);
        end
        @(negedge clk); x_we = 0; start = 1;
        @(posedge clk); #1 start = 0;
        cycles = 0;
        while (!done) begin
          @(posedge clk); #1 cycles++;
          if (busy && cycles == 10) n_busy_seen++;
        end
        n_infer++;
        checks++;
        if (cycles !== lat) begin failures++; $display("latency %0d expected %0d", cycles, lat); end
        y = p.run(x, N, M, D, K, BITS);
        // the encoder output buffer must hold the reference encoder output
        foreach (p.last_enc[i]) begin
          checks++;
          if ($signed(dut.u_obuf.mem[i]) !== p.last_enc[i]) begin
            failures++;
            if (failures < 10) $display("encoder out[%0d]=%0d expected %0d", i, $signed(dut.u_obuf.mem[i]), p.last_enc[i]);
          end
        end
        for (int k = 0; k < K; k++) begin
          @(negedge clk); y_addr = 1'(k);
          @(posedge clk); #1;
          checks++;
          if ($signed(y_data) !== y[k]) begin
            failures++; $display("model %0d window %0d y[%0d]=%0d expected %0d", model, win, k, $signed(y_data), y[k]);
          end
        end
      end
    end
    $display("inferences=%0d reloads=%0d saturations=%0d relu_cuts=%0d busy_seen=%0d latency=%0d cycles (%0.3f ms at 100 MHz)",
             n_infer, n_reload, n_sat, n_relu, n_busy_seen, lat, lat / 1.0e5);
    checks++; if (n_infer < 2)     begin failures++; $display("fewer than two inferences"); end
    checks++; if (n_reload == 0)   begin failures++; $display("model never reloaded"); end
    checks++; if (n_sat == 0)      begin failures++; $display("no saturation occurred"); end
    checks++; if (n_relu == 0)     begin failures++; $display("ReLU never cut a value"); end
    checks++; if (n_busy_seen == 0) begin failures++; $display("busy never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
