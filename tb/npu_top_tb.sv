// npu_top_tb: the end-to-end scenario on a reduced NPU (2 clusters, small
// memories); see npu_top_run for the scenario and the checks.
module npu_top_tb;
  npu_top_run #(.FULL(0)) u_run ();
endmodule
