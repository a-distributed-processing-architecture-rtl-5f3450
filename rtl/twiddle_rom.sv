// twiddle_rom: read-only memory of the N_FFT/2 twiddle factors
// W^m = exp(-j*2*pi*m/N_FFT), m = 0 .. N_FFT/2-1, used by the radix-2 DIT
// butterflies of the FFT and (conjugated by the PE) of the IFFT.
// The paper lists this ROM with N_FFT/2 words of W_TF bits; W_TF is not given,
// so the words here are W_comp = 12+12 bits in the same Q2.10 format as all
// PE operands (+1.0 = 1024). Contents are computed at elaboration:
//   re = round(2^FRAC * cos(2*pi*m/N)),  im = round(-2^FRAC * sin(2*pi*m/N)).
// Timing: synchronous read, data one cycle after the address.
module twiddle_rom
  import mimo_pkg::*;
#(
  parameter int unsigned LOGN = 11
) (
  input  logic            clk,
  input  logic            en,
  input  logic [LOGN-2:0] addr,
  output cplx_t           data
);

  localparam int unsigned NH = 1 << (LOGN - 1);

  typedef logic signed [WC-1:0] part_t [NH];

  // one component of the table: cosine (im_part = 0) or minus sine (im_part = 1)
  function automatic part_t make_part(input bit im_part);
    part_t r;
    real ang, s, v;
    s = real'(1 << FRAC);
    for (int m = 0; m < int'(NH); m++) begin
      ang = 2.0 * 3.14159265358979323846 * real'(m) / real'(2 * NH);
      v = im_part ? -s * $sin(ang) : s * $cos(ang);
      r[m] = WC'($rtoi($floor(v + 0.5)));
    end
    return r;
  endfunction

  localparam part_t ROM_RE = make_part(1'b0);
  localparam part_t ROM_IM = make_part(1'b1);

  always_ff @(posedge clk) begin
    if (en) begin
      data.re <= ROM_RE[addr];
      data.im <= ROM_IM[addr];
    end
  end

endmodule
