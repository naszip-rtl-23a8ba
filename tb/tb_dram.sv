// tb_dram: behavioural model of the four x8 DRAM devices of one sub-channel,
// as seen by the rank logic's read port.
// The memory is a sparse array of 64-byte lines written by the testbench
// (task write_line). A request (req_valid and req_ready high at a clock edge,
// address in line units) is answered after LAT cycles by 16 beats on
// rsp_valid/rsp_data, byte p of beat t being byte 16p + t of the line, that
// is byte t of device p's 16-byte burst. With GAPS set, idle cycles are
// inserted at random between beats. One request is served at a time;
// req_ready is low while a request is in flight. A request to a line that was
// never written is counted in bad_reqs. reqs counts all requests.
module tb_dram #(
  parameter int LAT  = 6,
  parameter bit GAPS = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  logic [31:0] req_addr,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [31:0] rsp_data
);
  logic [511:0] mem [int unsigned];
  int bad_reqs = 0, reqs = 0;
  logic         busy = 0;
  logic [511:0] line;

  task automatic write_line(input int unsigned a, input logic [511:0] d);
    mem[a] = d;
  endtask

  assign req_ready = rst_n && !busy;

  initial begin
    rsp_valid = 0;
    rsp_data  = '0;
    forever begin
      @(posedge clk);
      if (req_valid && req_ready) begin
        reqs++;
        busy <= 1;
        if (mem.exists(req_addr)) line = mem[req_addr];
        else begin
          bad_reqs++;
          $display("tb_dram: read of unwritten line %h", req_addr);
          line = '0;
        end
        repeat (LAT) @(posedge clk);
        for (int t = 0; t < 16; t++) begin
          while (GAPS && $urandom_range(0, 3) == 0) begin
            rsp_valid <= 0;
            @(posedge clk);
          end
          rsp_valid <= 1;
          for (int p = 0; p < 4; p++) rsp_data[8*p +: 8] <= line[(16*p + t)*8 +: 8];
          @(posedge clk);
        end
        rsp_valid <= 0;
        busy      <= 0;
      end
    end
  end
endmodule
