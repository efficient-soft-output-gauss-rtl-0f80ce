// recip_lut -- LUT-based reciprocal y = 1/x of an unsigned fixed-point value.
//
// The input is normalised by a leading-one detector: x = 2^e * 1.m, and the
// 10 bits of m below the leading one address a 1024-entry table holding
// round(2^25 / (1024 + m)) (= 2^15 / 1.m, clipped to 15 bits). The table
// output is then shifted by the exponent into the requested output format
// and saturated. Table size (1024 addresses, 15-bit words) and the use of a
// table follow the paper; the normalisation around it is this design's own.
//
// Timing: three register stages (normalise, table read as a block-RAM style
// synchronous read, shift). A new input may be given every cycle; out is
// valid 3 cycles after in_valid. x = 0 gives the largest output value.
module recip_lut #(
  parameter int IN_W  = 15,
  parameter int IN_F  = 12,
  parameter int OUT_W = 14,
  parameter int OUT_F = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  x,
  output logic             out_valid,
  output logic [OUT_W-1:0] y
);
  localparam int AW = 10;
  localparam int LW = 15;
  typedef logic [LW-1:0] rom_t [1 << AW];

  function automatic rom_t gen_rom();
    rom_t r;
    for (int a = 0; a < (1 << AW); a++) begin
      int v;
      v = ((1 << 25) + ((1024 + a) >> 1)) / (1024 + a);
      if (v > (1 << LW) - 1) v = (1 << LW) - 1;
      r[a] = LW'(v);
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  // stage 1: leading-one detection
  logic [AW-1:0] addr_c;
  int            msb_c;
  logic          zero_c;
  logic [IN_W+AW-1:0] xpad;

  always_comb begin
    msb_c  = 0;
    zero_c = (x == '0);
    for (int i = 0; i < IN_W; i++)
      if (x[i]) msb_c = i;
    xpad   = {x, {AW{1'b0}}} << (IN_W - 1 - msb_c);
    addr_c = xpad[IN_W+AW-2 -: AW];
  end

  logic [AW-1:0] addr_q;
  logic [7:0]    msb_q, msb_q2;
  logic          zero_q, zero_q2, v1, v2;
  logic [LW-1:0] rom_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr_q <= '0; msb_q <= '0; zero_q <= 1'b0; v1 <= 1'b0;
      rom_q  <= '0; msb_q2 <= '0; zero_q2 <= 1'b0; v2 <= 1'b0;
      out_valid <= 1'b0; y <= '0;
    end else begin
      addr_q  <= addr_c;
      msb_q   <= 8'(msb_c);
      zero_q  <= zero_c;
      v1      <= in_valid;
      rom_q   <= ROM[addr_q];
      msb_q2  <= msb_q;
      zero_q2 <= zero_q;
      v2      <= v1;
      out_valid <= v2;
      y       <= shift_out(rom_q, msb_q2, zero_q2);
    end
  end

  // 1/x = 2^(IN_F - msb) * rom/2^15 ; in OUT_F fraction bits:
  // rom * 2^(IN_F - msb + OUT_F - 15)
  function automatic logic [OUT_W-1:0] shift_out(input logic [LW-1:0] r,
                                                 input logic [7:0] msb,
                                                 input logic zero);
    int sh;
    logic [127:0] v;
    logic [127:0] mx;
    mx = (128'd1 << OUT_W) - 128'd1;
    sh = IN_F - int'(msb) + OUT_F - LW;
    if (zero) return OUT_W'(mx);
    if (sh >= 0) begin
      if (sh > 100) return OUT_W'(mx);
      v = 128'(r) << sh;
    end else begin
      if (-sh > 100) v = '0;
      else v = (128'(r) + (128'd1 << (-sh - 1))) >> (-sh);
    end
    if (v > mx) return OUT_W'(mx);
    return OUT_W'(v);
  endfunction
endmodule
