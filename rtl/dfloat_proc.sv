// dfloat_proc: Dfloat decoder of one device path of the vector processing
// engine (VPE).
//
// A DRAM device returns a 128-bit burst as 16 beats of 8 bits. A beat counter
// steers each byte into its lane of a 128-bit register (the 16-to-1 selection
// the paper draws between the device and the register). When the 16th byte
// arrives the register is full and extraction starts: an offset register,
// cleared at the start and advanced by the element width every cycle, drives
// a barrel shifter that cuts one n-bit Dfloat element out of the register per
// cycle. The element is zero-padded on the right to a 32-bit float.
//
// Following the paper: 16 beats x 8 bits per burst, 128-bit register, counter,
// barrel shifter with offset register, zero padding to FP32. This design's
// choices: byte t of the burst is register bits [8t+7:8t]; element j sits at
// bits [j*n + n-1 : j*n]; a Dfloat element keeps the 8-bit FP32 exponent and
// drops low mantissa bits, so that zero padding alone yields the FP32 value
// (the paper emulates Dfloat by masking FP32 bits); extraction is one element
// per cycle.
//
// Interface: beat_valid/beat_data deliver the burst; width and count (elements
// held by this burst, 0..10) are sampled when the last beat arrives. Timing:
// the first element appears on elem_valid one cycle after the 16th beat, then
// one per cycle; done pulses in the cycle after the last element (or one cycle
// after the 16th beat when count is 0).
module dfloat_proc
  import naszip_pkg::*;
#(
  parameter int unsigned BURST_BITS_P = BURST_BITS,
  parameter int unsigned DEV_BITS_P   = DEV_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  beat_valid,
  input  logic [DEV_BITS_P-1:0] beat_data,
  input  logic [5:0]            width,
  input  logic [3:0]            count,
  output logic                  elem_valid,
  output fp32_t                 elem_fp32,
  output logic                  done
);
  localparam int unsigned BEATS = BURST_BITS_P / DEV_BITS_P;
  localparam int unsigned CW    = $clog2(BEATS);

  logic [CW-1:0]           cnt;          // beat counter (16:1 lane select)
  logic [BURST_BITS_P-1:0] burst_reg;
  logic [7:0]              offset_reg;   // bit offset of the next element
  logic [5:0]              w_q;
  logic [3:0]              n_left;
  logic                    extracting;
  logic                    full;

  assign full = beat_valid && (cnt == CW'(BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      burst_reg  <= '0;
      offset_reg <= '0;
      w_q        <= 6'd32;
      n_left     <= '0;
      extracting <= 1'b0;
    end else begin
      if (beat_valid) begin
        burst_reg[cnt*DEV_BITS_P +: DEV_BITS_P] <= beat_data;
        cnt <= cnt + CW'(1);
      end
      if (full) begin
        offset_reg <= '0;
        w_q        <= width;
        n_left     <= count;
        extracting <= 1'b1;
      end else if (extracting) begin
        if (n_left == 4'd0) extracting <= 1'b0;
        else begin
          offset_reg <= offset_reg + 8'(w_q);
          n_left     <= n_left - 4'd1;
        end
      end
    end
  end

  // Barrel shifter and zero padding.
  logic [31:0] raw, mask;
  always_comb begin
    mask      = (w_q >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << w_q) - 32'd1);
    raw       = 32'(burst_reg >> offset_reg) & mask;
    elem_fp32 = raw << (6'd32 - w_q);
  end

  assign elem_valid = extracting && (n_left != 4'd0);
  assign done       = extracting && (n_left == 4'd0);

endmodule
