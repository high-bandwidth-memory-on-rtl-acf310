// tb_hbm_analytics_top: end-to-end test of the whole system in all three
// builds (14 selection engines, 7 join engines, 14 SGD engines), each run
// through a complete job by sys_harness: data in through the datamovers,
// engines started and polled through the register interface, results out
// through the datamovers and checked against software models.
// The engine counts, port use and data paths follow the paper's system
// figure; data sizes are reduced and chosen by this testbench.
module tb_hbm_analytics_top;
  import hbm_pkg::*;
  int c [3], f [3];
  bit fin [3];

  sys_harness #(.ENGINE(ENG_SELECTION)) u_sel  (.checks(c[0]), .failures(f[0]), .finished(fin[0]));
  sys_harness #(.ENGINE(ENG_JOIN))      u_join (.checks(c[1]), .failures(f[1]), .finished(fin[1]));
  sys_harness #(.ENGINE(ENG_SGD))       u_sgd  (.checks(c[2]), .failures(f[2]), .finished(fin[2]));

  initial begin
    wait (fin[0] && fin[1] && fin[2]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2], f[0]+f[1]+f[2]);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2], f[0]+f[1]+f[2]+1);
    $finish;
  end
endmodule
