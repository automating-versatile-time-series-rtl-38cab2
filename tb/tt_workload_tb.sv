// tt_workload_tb: runs the accelerator at the sizes of the evaluated
// workloads other than the default one: AirU forecasting, UCIHAR and
// WISDM activity classification, ALFA and SKAB anomaly detection (b, d_model,
// inputs and outputs as evaluated; windows of 24 steps where no length is
// stated). Each configuration gets a random model and two windows; outputs
// and latencies are checked by tt_infer_check instances running in parallel.
module tt_workload_tb;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NW = 5;
  int   c [NW], f [NW];
  logic fin [NW];

  tt_infer_check #(.BITS(8), .N(24), .M(1),  .D(8),  .K(1),  .NAME("airu"))   u_airu   (.clk, .checks(c[0]), .failures(f[0]), .fin(fin[0]));
  tt_infer_check #(.BITS(8), .N(32), .M(9),  .D(8),  .K(6),  .NAME("ucihar")) u_ucihar (.clk, .checks(c[1]), .failures(f[1]), .fin(fin[1]));
  tt_infer_check #(.BITS(6), .N(50), .M(3),  .D(40), .K(6),  .NAME("wisdm"))  u_wisdm  (.clk, .checks(c[2]), .failures(f[2]), .fin(fin[2]));
  tt_infer_check #(.BITS(4), .N(24), .M(17), .D(8),  .K(10), .NAME("alfa"))   u_alfa   (.clk, .checks(c[3]), .failures(f[3]), .fin(fin[3]));
  tt_infer_check #(.BITS(6), .N(24), .M(8),  .D(24), .K(1),  .NAME("skab"))   u_skab   (.clk, .checks(c[4]), .failures(f[4]), .fin(fin[4]));

  initial begin
    int checks, failures;
    repeat (2) @(posedge clk);
    fork
      begin
        wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
      end
      begin
        repeat (5_000_000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < NW; i++) begin
      checks += c[i]; failures += f[i];
      if (!fin[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
