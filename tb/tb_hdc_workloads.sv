// tb_hdc_workloads: the ablation configurations of the accelerator, one
// complete inference each, run side by side: 5x5 and 7x7 patches (36 and 16
// patches) at D=10000, and 3x3 patches at D=5000 and D=20000. The 3x3,
// D=10000 configuration is the default and is covered by tb_hdc_accel_full.
module tb_hdc_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  int   c [4], f [4];
  logic fin [4];

  hdc_config_bench #(.M(5), .D(10000), .WIN(1)) u_m5  (.clk, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  hdc_config_bench #(.M(7), .D(10000), .WIN(2)) u_m7  (.clk, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  hdc_config_bench #(.M(3), .D(5000),  .WIN(4)) u_d5k (.clk, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  hdc_config_bench #(.M(3), .D(20000), .WIN(9)) u_d20k(.clk, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  initial begin
    int checks, failures;
    @(posedge clk);   // let every bench clear its `finished` flag first
    fork
      begin
        wait (fin[0] && fin[1] && fin[2] && fin[3]);
      end
      begin
        repeat (20000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < 4; i++) begin
      checks += c[i]; failures += f[i];
      if (!fin[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
