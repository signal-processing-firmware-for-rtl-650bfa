// sincos_rom: sine/cosine of a 12-bit phase (4096 steps per turn, the phase
// resolution of the beamformer in the paper), read from a quarter-wave table.
// The table sin_quarter.hex holds round(32767*sin(2*pi*i/4096)) for
// i = 0..1024. Output is combinational; both values are signed 16 bit.
// The FFT twiddles use the same table (a 1024-point twiddle is phase 4*k).
// Table format and the 16-bit amplitude are this design's choice.
module sincos_rom (
  input  logic [11:0]        phase,
  output logic signed [15:0] cos_o,
  output logic signed [15:0] sin_o
);
  logic [15:0] q [0:1024];
  initial $readmemh("rtl/sin_quarter.hex", q);

  function automatic logic signed [15:0] sin_of(input logic [11:0] p);
    logic [9:0]  r;
    logic [10:0] i;
    r = p[9:0];
    unique case (p[11:10])
      2'd0: i = {1'b0, r};
      2'd1: i = 11'd1024 - {1'b0, r};
      2'd2: i = {1'b0, r};
      default: i = 11'd1024 - {1'b0, r};
    endcase
    return p[11] ? -$signed(q[i]) : $signed(q[i]);
  endfunction

  always_comb begin
    sin_o = sin_of(phase);
    cos_o = sin_of(phase + 12'd1024);
  end
endmodule
