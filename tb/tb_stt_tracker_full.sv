// End-to-end test of the tracking module at its default sizes (1024-slot ring
// buffer, 16384-bin map). See stt_tracker_env for the stimulus and checks.
module tb_stt_tracker_full;
  stt_tracker_env #(.USE_DEFAULTS(1'b1)) env ();
endmodule
