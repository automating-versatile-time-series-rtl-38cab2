// tt_infer_check: drives one tiny_transformer of a given size through a
// random model load and two inferences, and compares every output with the
// reference chain tt_ref_pkg::model_p and the latency with
// tt_ref_pkg::lat_model. Used by tt_workload_tb to run the configurations
// of the evaluated workloads side by side; reports its counts on its
// output ports and raises fin when it is finished.
module tt_infer_check #(
  parameter int BITS = 6,
  parameter int N = 24,
  parameter int M = 1,
  parameter int D = 16,
  parameter int K = 1,
  parameter string NAME = "pems"
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic fin
);
  import tt_ref_pkg::*;
  localparam int KW = (K > 1) ? $clog2(K) : 1;

  logic            rst_n, x_we, cfg_we, start, busy, done;
  logic [((N*M) > 1 ? $clog2(N*M) : 1)-1:0] x_addr;
  logic [BITS-1:0] x_data, y_data;
  logic [7:0]      cfg_sel;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  logic [KW-1:0]   y_addr;

  tiny_transformer #(.DATA_W(BITS), .N_STEPS(N), .N_FEAT(M), .D_MODEL(D), .N_OUT(K)) dut (
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
    model_p p;
    arr_t x, y;
    cfg_q_t q;
    int cycles, lat;
    checks = 0; failures = 0; fin = 0; rst_n = 0;
    x_we = 0; x_addr = 0; x_data = 0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    start = 0; y_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lat = lat_model(N, M, D, K);
    p = new(BITS, N, M, D, K);
    q.delete(); p.cfg(q, D, M, K); drive(q);
    for (int win = 0; win < 2; win++) begin
      x = rnd_codes(N*M, BITS);
      foreach (x[i]) begin
        @(negedge clk); x_we = 1; x_addr = $bits(x_addr)'(i); x_data = BITS'(x[i]);
      end
      @(negedge clk); x_we = 0; start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!done) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== lat) begin failures++; $display("%s: latency %0d expected %0d", NAME, cycles, lat); end
      y = p.run(x, N, M, D, K, BITS);
      for (int k = 0; k < K; k++) begin
        @(negedge clk); y_addr = KW'(k);
        @(posedge clk); #1;
        checks++;
        if ($signed(y_data) !== y[k]) begin
          failures++; $display("%s: window %0d y[%0d]=%0d expected %0d", NAME, win, k, $signed(y_data), y[k]);
        end
      end
    end
    $display("%s: b=%0d n=%0d m=%0d d=%0d k=%0d latency %0d cycles = %0.3f ms at 100 MHz, checks=%0d failures=%0d",
             NAME, BITS, N, M, D, K, lat, lat / 1.0e5, checks, failures);
    fin = 1;
  end
endmodule
