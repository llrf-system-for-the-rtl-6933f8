// cic_filter: cascaded integrator-comb low-pass filter, optionally decimating.
//
// STAGES integrators run at the input rate; every R-th input one sample is
// passed to STAGES comb sections with differential delay M (in output
// samples). The DC gain is (R*M)^STAGES and the output grows by
// STAGES*clog2(R*M) bits over the input, so the modulo arithmetic of the
// integrators never corrupts the result. The response has zeros at
// multiples of f_in/(R*M).
//
// In the PLL it is used non-decimating (R=1) with M=9: a length-9 moving sum
// whose first zero is at 50 MHz/9 = 5.56 MHz, next to the 5.6 MHz mixing
// product of the sampled 52.8 MHz reference. In the marker path it
// decimates by one revolution. The CIC type, the non-decimating use and the
// 5.56 MHz zero are the paper's; the stage counts and the marker path's
// decimation ratio are this design's choices.
//
// Timing: in_valid qualifies x. out_valid is a one-clock pulse every R
// accepted inputs. Integrators and combs are combinational between the
// state registers, so y is valid 1 clock after the input that completes it.
module cic_filter #(
  parameter int IN_W   = 20,
  parameter int STAGES = 1,
  parameter int M      = 9,
  parameter int R      = 1,
  localparam int OUT_W = IN_W + STAGES * $clog2(R * M)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y
);
  localparam int CW = (R > 1) ? $clog2(R) : 1;

  logic signed [OUT_W-1:0] integ [STAGES];
  logic signed [OUT_W-1:0] dly   [STAGES][M];   // comb delay lines
  logic [CW-1:0]           cnt;
  logic signed [OUT_W-1:0] integ_next [STAGES];
  logic signed [OUT_W-1:0] comb_in    [STAGES+1];

  always_comb begin
    for (int s = 0; s < STAGES; s++)
      integ_next[s] = integ[s] + ((s == 0) ? OUT_W'(x) : integ_next[s-1]);
    // The decimated sample entering the combs is the newest integrator output.
    comb_in[0] = integ_next[STAGES-1];
    for (int s = 0; s < STAGES; s++)
      comb_in[s+1] = comb_in[s] - dly[s][M-1];
  end

  logic take;
  always_comb take = in_valid && (R == 1 || cnt == CW'(R - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < STAGES; s++) begin
        integ[s] <= '0;
        for (int k = 0; k < M; k++) dly[s][k] <= '0;
      end
      cnt       <= '0;
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int s = 0; s < STAGES; s++) integ[s] <= integ_next[s];
        if (R > 1) cnt <= take ? '0 : cnt + 1'b1;
      end
      if (take) begin
        for (int s = 0; s < STAGES; s++) begin
          dly[s][0] <= comb_in[s];
          for (int k = 1; k < M; k++) dly[s][k] <= dly[s][k-1];
        end
        y         <= comb_in[STAGES];
        out_valid <= 1'b1;
      end
    end
  end
endmodule
