// input_registers: per-core input shift register of the multicore decoder.
//
// A core has N*Q/P LLR input pins. In every IO clock cycle one beat of N/P LLRs arrives;
// beat k (phase = k) carries LLRs k*N/P .. (k+1)*N/P-1. Beats 0..P-2 shift into a
// (P-1)-beat shift register; on the last beat (core_en high, phase = P-1) the shift
// register together with the beat on the pins is copied into a holding register that
// feeds the core for one full core cycle (P IO cycles), the time the core's first stage
// has to use it. in_valid is sampled on beat 0 and travels with the codeword.
// The distributed input stage of every core replaces a central input demultiplexer.
module input_registers
  import mcsc_pkg::*;
#(
  parameter int unsigned N = N_CW,
  parameter int unsigned P = N_CORES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(P)-1:0] phase,
  input  logic                 core_en,
  input  logic                 in_valid,
  input  llr_t [N/P-1:0]       beat_in,
  output llr_t [N-1:0]         llr,
  output logic                 llr_valid
);
  localparam int unsigned B = N / P;
  llr_t [P-2:0][B-1:0] sr;
  logic                v0;

  always_ff @(posedge clk) begin
    sr[P-2] <= beat_in;
    for (int k = 0; k < int'(P) - 2; k++) sr[k] <= sr[k+1];
    if (core_en) llr <= {beat_in, sr};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v0        <= 1'b0;
      llr_valid <= 1'b0;
    end else begin
      if (phase == '0) v0 <= in_valid;
      if (core_en) llr_valid <= v0;
    end
  end
endmodule
