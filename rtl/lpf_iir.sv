// lpf_iir: first-order digital low-pass filter on the digitized V_rf stream.
//
// The feedback loop low-pass filters the reflectometry voltage before the PID
// controller to limit aliasing; the measured noise bandwidth is 5 MHz. Only the
// filter's purpose and bandwidth are known, so this block is the simplest filter
// that provides it: a single-pole exponential smoother
//     y(k) = y(k-1) + alpha * (x(k) - y(k-1))
// held with FRAC extra fraction bits so small inputs are not lost. alpha is an
// unsigned Q1.16 runtime setting; 2^16 passes the input through unchanged and
// 17668 (0.2696) gives the 5 MHz corner at 100 MS/s.
//
// Interface: one sample per in_valid; out_valid/out_data follow one clock later.
// out_data is y rounded to the nearest code and saturated to DATA_W bits.
// Synchronous active-low reset clears the filter state to 0.
module lpf_iir #(
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ALPHA_W = 17,
  parameter int unsigned FRAC    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic [ALPHA_W-1:0]       alpha,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);

  localparam int unsigned Y_W    = DATA_W + FRAC + 1;
  localparam int unsigned DIFF_W = Y_W + 1;
  localparam int unsigned PROD_W = DIFF_W + ALPHA_W + 1;
  localparam int unsigned A_FRAC = ALPHA_W - 1;

  localparam logic signed [Y_W-1:0] MAXV = Y_W'((2 ** (DATA_W - 1)) - 1);
  localparam logic signed [Y_W-1:0] MINV = -Y_W'(2 ** (DATA_W - 1));

  logic signed [Y_W-1:0]    y_q, y_d, y_rnd;
  logic signed [DIFF_W-1:0] diff;
  logic signed [PROD_W-1:0] prod;

  always_comb begin
    diff  = (DIFF_W'(in_data) <<< FRAC) - DIFF_W'(y_q);
    prod  = PROD_W'(diff) * PROD_W'($signed({1'b0, alpha}));
    y_d   = y_q + Y_W'(prod >>> A_FRAC);
    y_rnd = (y_d + Y_W'(2 ** (FRAC - 1))) >>> FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_q       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y_q <= y_d;
        if (y_rnd > MAXV)      out_data <= DATA_W'(MAXV);
        else if (y_rnd < MINV) out_data <= DATA_W'(MINV);
        else                   out_data <= DATA_W'(y_rnd);
      end
    end
  end

  // Every input sample yields a filtered sample one clock later.
  a_valid: assert property (@(posedge clk) disable iff (!rst_n)
                            in_valid |=> out_valid);

endmodule
