// hw_correlator: hardware correlator for contrastive-divergence learning (FPGA side).
//
// Sits next to the chip on the learning board and turns spin samples into the statistics that
// the learning rule needs. After a start pulse it takes n_samples samples of N spins, one per
// cycle with sample = 1, and accumulates, with spins read as bipolar values s = +1 / -1,
//     sum_m[i]    = sum over samples of s_i
//     sum_c[i][j] = sum over samples of s_i * s_j        (i < j; other entries stay 0)
// Each product is +1 when the two spins agree and -1 otherwise, so the accumulator is an
// XNOR-driven up/down counter (the multiply-and-delay loop of the correlator drawing). done rises
// the cycle after the last sample and stays high until the next start; the sums then hold
// n * <s_i> and n * <s_i s_j>, and the host divides by n.
//
// From the paper: a hardware correlator that forms <m_i m_j> from n samples for the processor
// that computes new J and h. The bipolar encoding, the interface and the sizes are this design's
// choices.
module hw_correlator #(
  parameter int unsigned N    = 8,      // spins observed
  parameter int unsigned CNT_W = 16     // accumulator width (signed), n_samples < 2^(CNT_W-1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CNT_W-2:0]        n_samples,
  input  logic                    sample,
  input  logic [N-1:0]            spins,
  output logic                    busy,
  output logic                    done,
  output logic signed [CNT_W-1:0] sum_m [N],
  output logic signed [CNT_W-1:0] sum_c [N][N]
);

  localparam logic signed [CNT_W-1:0] ONE = 1;

  logic [CNT_W-2:0] remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      remaining <= '0;
      for (int i = 0; i < int'(N); i++) begin
        sum_m[i] <= '0;
        for (int j = 0; j < int'(N); j++) sum_c[i][j] <= '0;
      end
    end else if (start) begin
      busy      <= (n_samples != '0);
      done      <= (n_samples == '0);
      remaining <= n_samples;
      for (int i = 0; i < int'(N); i++) begin
        sum_m[i] <= '0;
        for (int j = 0; j < int'(N); j++) sum_c[i][j] <= '0;
      end
    end else if (busy && sample) begin
      for (int i = 0; i < int'(N); i++) begin
        sum_m[i] <= spins[i] ? sum_m[i] + ONE : sum_m[i] - ONE;
        for (int j = i + 1; j < int'(N); j++)
          sum_c[i][j] <= (spins[i] ~^ spins[j]) ? sum_c[i][j] + ONE : sum_c[i][j] - ONE;
      end
      remaining <= remaining - 1'b1;
      if (remaining == 1) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
