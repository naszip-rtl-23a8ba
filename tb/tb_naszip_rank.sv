// tb_naszip_rank: end-to-end test of the rank at its default sizes (8 KB
// LNC-T, 256 KB 8-way LNC-D, 16 queries x 16-entry priority queue, 4096-entry
// query buffers, 128 FEE steps), L2 metric. All stimulus and checking is in
// tb_rank_env, see there.
module tb_naszip_rank;
  tb_rank_env env ();
endmodule
