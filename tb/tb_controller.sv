// tb_controller: test of the controller's sequencing in a rank with small
// caches and queue (LNC-T of 4 lines, LNC-D of 32 sets x 2 ways, 4-entry
// queues), inner-product metric, and a memory that inserts random idle
// cycles between beats. The small caches make the controller go through many
// evictions and refetches; checks are those of tb_rank_env (see there).
module tb_controller;
  tb_rank_env #(.QDEPTH(4), .LNCT_BYTES(256), .LNCD_BYTES(4096), .LNCD_WAYS(2),
                .IP(1'b1), .GAPS(1'b1)) env ();
endmodule
