// tb_teeod_configs: the fabric in the configurations of the published
// evaluation: one, two, three and four enclaves (the synthesized cases) and
// six (the most the evaluation board's block RAM allows), each run through
// the flow of teeod_tb_config_run in parallel, with 64 KiB TCMs.
module tb_teeod_configs;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 5;
  int   c [NCFG], f [NCFG];
  logic fin [NCFG];

  teeod_tb_config_run #(.N_ENCLAVES(1)) run1 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  teeod_tb_config_run #(.N_ENCLAVES(2)) run2 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  teeod_tb_config_run #(.N_ENCLAVES(3)) run3 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  teeod_tb_config_run #(.N_ENCLAVES(4)) run4 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .finished(fin[3]));
  teeod_tb_config_run #(.N_ENCLAVES(6)) run6 (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .finished(fin[4]));

  int checks, failures;
  task automatic total();
    checks = 0; failures = 0;
    for (int i = 0; i < NCFG; i++) begin checks += c[i]; failures += f[i]; end
  endtask

  initial begin
    repeat (500_000) @(posedge clk);
    total();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    total();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
