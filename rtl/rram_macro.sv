// rram_macro: BEHAVIOURAL MODEL (not synthesizable logic) of the analogue
// in-memory computing macro, a 40 nm 512x512 1T1R resistive crossbar, together
// with its board read chain (row drivers, trans-impedance amplifier, 14-bit
// ADC).
//
// Every cell holds a fixed random conductance. In the real part it comes from
// a uniform forming pulse applied to all fresh cells, whose outcome is random
// and close to normally distributed. Here each cell's code is a fixed
// pseudo-random function of (SEED, row, column), a 32-bit integer hash,
// evaluated whenever the cell is read. The code is the
// sum of four uniform 5-bit values plus 74, in units of 0.25 uS: 18.5..49.5 uS
// with a mean near 34 uS, matching the measured spread.
//
// A read drives the 64 rows of one row group (grp) with a binary read voltage
// (row_drive) and converts the difference of the currents of one column pair,
// columns 2*col and 2*col+1. That pair is one signed synapse:
// w = G(2*col) - G(2*col+1). The ADC code is the sum over the driven rows of
// the conductance-code differences. With 64 rows this is at most 64*124 = 7936
// in magnitude, so it always fits the 14-bit signed range. The TIA gain and
// the read voltage are folded into that unit.
//
// Timing: conv_start is sampled on a rising edge. conv_done is high for one
// cycle ADC_LAT cycles later, and adc_code then holds the result until the
// next conversion. grp, row_drive and col need to be valid only in the
// conv_start cycle. Read noise is not modelled: repeated reads are identical.
// The distribution, the differential pairing and the latency are choices of
// this model. The array size, the 64-row parallel drive and the 14-bit ADC
// follow the published system.
module rram_macro
  import lsm_pkg::*;
#(
  parameter int          ROWS    = XB_ROWS,
  parameter int          COLS    = XB_COLS,
  parameter int          RG      = ROW_GROUP,
  parameter int          AW      = ADC_W,
  parameter int          GW      = G_W,
  parameter int          ADC_LAT = 2,
  parameter int unsigned SEED    = 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            conv_start,
  input  logic [$clog2(ROWS/RG)-1:0]      grp,
  input  logic [RG-1:0]                   row_drive,
  input  logic [$clog2(COLS/2)-1:0]       col,
  output logic                            conv_done,
  output logic signed [AW-1:0]            adc_code
);

  localparam int SW = AW + 2;

  // Conductance code of cell (r, c). It is fixed for the life of the part, so
  // the model evaluates it where it is read instead of storing 512x512 codes.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x >> 16);
    y = y * 32'h7feb352d;
    y = y ^ (y >> 15);
    y = y * 32'h846ca68b;
    y = y ^ (y >> 16);
    return y;
  endfunction

  function automatic logic [GW-1:0] g_code(input int r, input int c);
    logic [31:0] h;
    h = mix32((SEED * 32'h9e3779b9) ^ ((32'(r) << 16) | 32'(c)));
    return GW'(32'd74 + 32'(h[4:0]) + 32'(h[12:8]) + 32'(h[20:16]) + 32'(h[28:24]));
  endfunction

  // Differential column-pair current of the driven rows
  function automatic logic signed [SW-1:0] pair_sum(input logic [$clog2(ROWS/RG)-1:0] gsel,
                                                    input logic [RG-1:0] drive,
                                                    input logic [$clog2(COLS/2)-1:0] csel);
    logic signed [SW-1:0] s;
    s = '0;
    for (int r = 0; r < RG; r++) begin
      if (drive[r]) begin
        s = s + SW'($signed({1'b0, g_code(int'(gsel) * RG + r, 2 * int'(csel))}))
              - SW'($signed({1'b0, g_code(int'(gsel) * RG + r, 2 * int'(csel) + 1)}));
      end
    end
    return s;
  endfunction

  function automatic logic signed [AW-1:0] sat_adc(input logic signed [SW-1:0] v);
    localparam logic signed [SW-1:0] MAXV = SW'((1 << (AW - 1)) - 1);
    localparam logic signed [SW-1:0] MINV = -SW'(1 << (AW - 1));
    if (v > MAXV) return MAXV[AW-1:0];
    if (v < MINV) return MINV[AW-1:0];
    return v[AW-1:0];
  endfunction

  // ADC conversion latency
  logic [7:0] busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= '0;
      conv_done <= 1'b0;
      adc_code  <= '0;
    end else begin
      conv_done <= 1'b0;
      if (conv_start) begin
        adc_code <= sat_adc(pair_sum(grp, row_drive, col));
        if (ADC_LAT <= 1) conv_done <= 1'b1;
        else              busy      <= 8'(ADC_LAT - 1);
      end else if (busy != 0) begin
        busy <= busy - 8'd1;
        if (busy == 8'd1) conv_done <= 1'b1;
      end
    end
  end

endmodule
