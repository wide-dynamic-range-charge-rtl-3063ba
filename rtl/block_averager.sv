// block_averager: boxcar average and decimation ahead of the PID controller.
//
// The feedback loop averages the filtered V_rf stream before the PID input, and
// the PID runs with a sampling time T_S of 90 ns while the digitizer samples at
// 100 MS/s. This block therefore sums avg_len consecutive input samples (9 for
// T_S = 90 ns) and emits one average per block, so it sets the PID update rate.
// The division is a multiplication by avg_recip = round(2^16 / avg_len), which
// the host supplies along with avg_len, followed by rounding to the nearest code:
//     out = floor((sum * avg_recip + 2^15) / 2^16), saturated to DATA_W bits.
// avg_len = 0 is treated as 1. Both settings should change only between blocks.
//
// Interface: one sample per in_valid; out_valid pulses one clock after the
// sample that completes a block. Synchronous active-low reset empties the block.
module block_averager #(
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned LEN_W   = 8,
  parameter int unsigned RECIP_W = 17
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic [LEN_W-1:0]         avg_len,
  input  logic [RECIP_W-1:0]       avg_recip,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);

  localparam int unsigned SUM_W  = DATA_W + LEN_W;
  localparam int unsigned PROD_W = SUM_W + RECIP_W + 1;
  localparam int unsigned R_FRAC = RECIP_W - 1;

  localparam logic signed [PROD_W-1:0] MAXV = PROD_W'((2 ** (DATA_W - 1)) - 1);
  localparam logic signed [PROD_W-1:0] MINV = -PROD_W'(2 ** (DATA_W - 1));

  logic signed [SUM_W-1:0]  sum_q, sum_d;
  logic [LEN_W-1:0]         cnt_q;
  logic                     last;
  logic signed [PROD_W-1:0] scaled;

  always_comb begin
    sum_d  = sum_q + SUM_W'(in_data);
    last   = (avg_len <= LEN_W'(1)) || (cnt_q >= avg_len - LEN_W'(1));
    scaled = (PROD_W'(sum_d) * PROD_W'($signed({1'b0, avg_recip}))
              + PROD_W'(2 ** (R_FRAC - 1))) >>> R_FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum_q     <= '0;
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (last) begin
          sum_q     <= '0;
          cnt_q     <= '0;
          out_valid <= 1'b1;
          if (scaled > MAXV)      out_data <= DATA_W'(MAXV);
          else if (scaled < MINV) out_data <= DATA_W'(MINV);
          else                    out_data <= DATA_W'(scaled);
        end else begin
          sum_q <= sum_d;
          cnt_q <= cnt_q + LEN_W'(1);
        end
      end
    end
  end

  // An average only ever follows an accepted sample.
  a_out_after_in: assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid |-> $past(in_valid));

endmodule
