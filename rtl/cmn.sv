// cmn: common mode noise correction and trigger seeds.
//
// Noise picked up by all channels alike is removed by subtracting, from each
// channel, the mean of all NCH channels in the same sample (enable en_i).
// The mean is the sum shifted right by log2(NCH), so NCH must be a power of
// two. The corrected samples are compared with seed_thr_i to give one
// trigger seed per channel, used for trigger primitives. The estimator
// (plain mean over all channels) is this design's choice; the published
// description names only "common mode noise correction" and "trigger seeds".
// One clock of latency.
module cmn #(
  parameter int unsigned NCH   = 64,
  parameter int unsigned SW    = 14,
  parameter int unsigned THR_W = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_i,
  input  logic [THR_W-1:0]     seed_thr_i,
  input  logic                 vld_i,
  input  logic signed [SW-1:0] x_i [NCH],
  output logic                 vld_o,
  output logic signed [SW-1:0] y_o [NCH],
  output logic [NCH-1:0]       seed_o
);
  localparam int unsigned SUM_W = SW + $clog2(NCH);
  localparam int unsigned LOG_N = $clog2(NCH);

  if ((1 << LOG_N) != NCH) begin : g_bad_nch
    $error("cmn: NCH must be a power of two");
  end

  logic signed [SUM_W-1:0] sum;
  logic signed [SW-1:0]    mean;
  logic signed [SW:0]      corr [NCH];
  logic signed [SW-1:0]    sat  [NCH];

  always_comb begin
    sum = '0;
    for (int i = 0; i < NCH; i++) sum += SUM_W'(x_i[i]);
    mean = SW'(sum >>> LOG_N);
    for (int i = 0; i < NCH; i++) begin
      corr[i] = en_i ? ((SW+1)'(x_i[i]) - (SW+1)'(mean)) : (SW+1)'(x_i[i]);
      if (corr[i] > (SW+1)'(2**(SW-1)-1))        sat[i] = SW'(2**(SW-1)-1);
      else if (corr[i] < -(SW+1)'(2**(SW-1)))    sat[i] = SW'(-(2**(SW-1)));
      else                                       sat[i] = SW'(corr[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o  <= 1'b0;
      seed_o <= '0;
      for (int i = 0; i < NCH; i++) y_o[i] <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) begin
        for (int i = 0; i < NCH; i++) begin
          y_o[i]    <= sat[i];
          seed_o[i] <= sat[i] > $signed(SW'(seed_thr_i));
        end
      end
    end
  end
endmodule
