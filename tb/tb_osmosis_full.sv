// tb_osmosis_full -- the same end-to-end test with the top at its default
// size (128 FMQs, 32 PUs, 32 IO streams, 512-byte fragments). The scenario and all
// checks are in osmosis_env; this wrapper adds the watchdog and the result
// line.
module tb_osmosis_full;
  int checks, failures, wd_fail;
  bit finished;
  osmosis_env #(.FULL(1'b1)) env (.checks, .failures, .finished);

  initial begin
    wd_fail = 0;
    fork
      wait (finished);
      begin
        repeat (400000) @(posedge env.clk);
        $display("FAIL watchdog: started %0d %0d %0d %0d, dma %0d egr %0d kill %0d",
                 env.started[0], env.started[1], env.started[2], env.started[3], env.n_dma_ok, env.n_egr, env.n_kill);
        wd_fail = 1;
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks + wd_fail, failures + wd_fail);
    $finish;
  end
endmodule
