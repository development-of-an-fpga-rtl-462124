// cordic -- pipelined rotation-mode CORDIC producing the LO cosine and sine.
//
// The input phase (PHASE_W bits, 2^PHASE_W = one turn) is split into its
// quadrant (top two bits) and the angle inside the quadrant. The angle is
// rotated to zero by ITER shift-and-add micro-rotations, starting from the
// vector (K x (2^(OUT_W-1)-1), 0), where K = 0.60725 is the CORDIC gain
// compensation, so that the final vector is (cos, sin) at full scale. The
// quadrant is then restored by swapping/negating the two components. One
// micro-rotation per pipeline stage gives one new (cos, sin) pair per clock.
// That the LO is produced by a CORDIC follows the published design (which
// used a vendor core); this pipeline, its widths and its iteration count are
// choices of this implementation; four guard bits below the output LSB keep
// the error within about one LSB. The arctangent table is computed at
// elaboration time from atan(2^-i).
//
// Timing: latency LAT = ITER + 2 clocks from `phase` to `cos_o`/`sin_o`.
module cordic #(
  parameter int unsigned PHASE_W = 20,
  parameter int unsigned OUT_W   = 16,
  parameter int unsigned ITER    = 16
) (
  input  logic                     clk,
  input  logic [PHASE_W-1:0]       phase,
  output logic signed [OUT_W-1:0]  cos_o,
  output logic signed [OUT_W-1:0]  sin_o
);
  localparam int unsigned Z_W = 26;           // angle: 2^(Z_W-2) = one turn
  localparam int unsigned GUARD = 4;             // extra fraction bits
  localparam int unsigned V_W = OUT_W + 2 + GUARD;
  localparam int X0 = int'(0.6072529350088813 * real'((1 << (OUT_W-1)) - 1)
                           * real'(1 << GUARD));

  typedef logic signed [Z_W-1:0] z_t;
  typedef z_t atan_arr_t [ITER];

  function automatic atan_arr_t atan_tab();
    atan_arr_t t;
    for (int i = 0; i < int'(ITER); i++)
      t[i] = z_t'(longint'($atan(1.0 / real'(longint'(1) << i)) / (2.0 * 3.141592653589793)
                  * real'(longint'(1) << (Z_W-2)) + 0.5));
    return t;
  endfunction
  localparam atan_arr_t ATAN = atan_tab();

  logic signed [V_W-1:0] x [ITER+1];
  logic signed [V_W-1:0] y [ITER+1];
  z_t                    z [ITER+1];
  logic [1:0]            q [ITER+1];

  // stage 0: quadrant split
  always_ff @(posedge clk) begin
    x[0] <= V_W'(X0);
    y[0] <= '0;
    z[0] <= z_t'({phase[PHASE_W-3:0], {(Z_W-PHASE_W){1'b0}}}) >>> 2;
    q[0] <= phase[PHASE_W-1:PHASE_W-2];
  end

  // micro-rotations
  for (genvar i = 0; i < int'(ITER); i++) begin : g_iter
    always_ff @(posedge clk) begin
      if (!z[i][Z_W-1]) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - ATAN[i];
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + ATAN[i];
      end
      q[i+1] <= q[i];
    end
  end

  // drop the guard bits (round to nearest) and clip to +-(2^(OUT_W-1)-1)
  function automatic logic signed [OUT_W-1:0] sat(input logic signed [V_W-1:0] v);
    logic signed [V_W-1:0] r;
    r = (v + V_W'(1 << (GUARD-1))) >>> GUARD;
    if (r > V_W'((1 << (OUT_W-1)) - 1))  return OUT_W'((1 << (OUT_W-1)) - 1);
    if (r < -V_W'((1 << (OUT_W-1)) - 1)) return -OUT_W'((1 << (OUT_W-1)) - 1);
    return r[OUT_W-1:0];
  endfunction

  // quadrant restore
  logic signed [V_W-1:0] c, s;
  assign c = x[ITER];
  assign s = y[ITER];
  always_ff @(posedge clk) begin
    unique case (q[ITER])
      2'd0: begin cos_o <= sat(c);  sin_o <= sat(s);  end
      2'd1: begin cos_o <= sat(-s); sin_o <= sat(c);  end
      2'd2: begin cos_o <= sat(-c); sin_o <= sat(-s); end
      default: begin cos_o <= sat(s); sin_o <= sat(-c); end
    endcase
  end
endmodule
