// End-to-end test of the tracking module with a 256-slot ring buffer, small
// enough for the input interface to stall on a full buffer. See
// stt_tracker_env for the stimulus and the checks.
module tb_stt_tracker;
  stt_tracker_env #(.RB_DEPTH(256), .MAX_SEEDS(64), .USE_DEFAULTS(1'b0),
                    .EXPECT_FULL(1'b1), .PT_ITERS(4), .PT_TOL(0.05)) env ();
endmodule
