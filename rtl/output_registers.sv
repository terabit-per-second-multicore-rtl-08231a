// output_registers: per-core output register of the multicore decoder.
//
// On the core clock edge (core_en) the K decoded bits of the core's last pipeline stage
// are loaded, padded to P beats of OW = ceil(K/P) bits. During the following P IO cycles
// the register shifts out one beat per cycle, beat 0 (bits 0..OW-1) first, with out_valid
// high when the loaded word was valid. For K = 854 and P = 4 a beat has 214 bits; the two
// padding bits of the last beat are zero.
module output_registers #(
  parameter int unsigned K  = 854,
  parameter int unsigned P  = 4,
  parameter int unsigned OW = (K + P - 1) / P
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          core_en,
  input  logic [K-1:0]  data_in,
  input  logic          valid_in,
  output logic          out_valid,
  output logic [OW-1:0] out_beat
);
  logic [P-1:0][OW-1:0] sr;
  logic [P-1:0]         vr;

  always_ff @(posedge clk) begin
    if (core_en) sr <= (P*OW)'(data_in);
    else         sr <= {OW'(0), sr[P-1:1]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n)       vr <= '0;
    else if (core_en) vr <= {P{valid_in}};
    else              vr <= {1'b0, vr[P-1:1]};
  end

  assign out_beat  = sr[0];
  assign out_valid = vr[0];
endmodule
