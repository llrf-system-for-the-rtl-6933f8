// phase_correction: turns a marker phase measurement into the 2.5 MHz
// (h=28) phase offset and latches it.
//
// det_phase is the marker phase against the h=1 phase in 22-bit units
// (+-pi = +-2^21). Rescaled to 30-bit accumulator units (x 2^8) and
// multiplied by 28 modulo 2^30 it becomes the h=28 offset. After align_req
// (once per machine cycle) the next valid measurement is latched into
// offset28, which then holds until the next request; 'aligned' reports that
// the latch has happened. The x28 and the latch are the paper's; arming by a
// request and holding between requests are this design's choices.
//
// Timing: offset28 updates 1 clock after the det_valid that is latched.
module phase_correction
  import llrf_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    align_req,
  input  logic signed [PH_W-1:0]  det_phase,
  input  logic                    det_valid,
  output logic [PHASE_W-1:0]      offset28,
  output logic                    aligned
);
  logic armed;
  logic [PHASE_W-1:0] ofs_c;
  always_comb ofs_c = PHASE_W'((PHASE_W'(det_phase) << (PHASE_W - PH_W)) * PHASE_W'(H28));

  always_ff @(posedge clk) begin
    if (rst) begin
      armed    <= 1'b0;
      aligned  <= 1'b0;
      offset28 <= '0;
    end else if (align_req) begin
      armed   <= 1'b1;
      aligned <= 1'b0;
    end else if (armed && det_valid) begin
      offset28 <= ofs_c;
      armed    <= 1'b0;
      aligned  <= 1'b1;
    end
  end
endmodule
