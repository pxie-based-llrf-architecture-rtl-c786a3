// Phase detector: atan2(Q, I) by a pipelined vectoring CORDIC.
//
// The vector (I, Q) is first folded into the right half-plane (a rotation by
// 180 degrees when I < 0, which presets the angle accumulator to 180
// degrees). Each of the ITER stages then rotates the vector by
// +-atan(2^-k) towards the I axis, choosing the sign from the sign of Q, and
// adds the rotation to the angle accumulator. After the last stage the
// accumulator holds the input's phase as a PH_W-bit binary angle
// (2^PH_W = 360 degrees). The accumulator carries 4 guard bits and the vector 6 fractional
// guard bits; the
// arctangent table is computed at elaboration. The paper gives the block
// ("CORDIC rotation" with output "Phase"); the stage count and word widths
// are this design's.
//
// Timing: fully pipelined, one vector per clock, latency ITER + 1 cycles
// from in_valid to out_valid.
module cordic_phase
  import llrf_pkg::*;
#(
  parameter int ITER = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  iq_t    i,
  input  iq_t    q,
  output logic   out_valid,
  output phase_t phase
);
  localparam int GUARD = 6;            // fractional guard bits of the vector
  localparam int XW = IQ_W + 2 + GUARD; // room for the CORDIC gain of 1.647
  localparam int ZW = PH_W + 4;        // angle with guard bits
  localparam real PI = 3.14159265358979323846;

  function automatic logic signed [ZW-1:0] atan_tab(int k);
    return ZW'($rtoi($atan(1.0 / (2.0 ** k)) / (2.0 * PI) * (2.0 ** ZW) + 0.5));
  endfunction

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [ZW-1:0] zs [ITER+1];
  logic                 vs [ITER+1];

  // stage 0: fold into the right half-plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
      vs[0] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
      if (i < 0) begin
        xs[0] <= -(XW'(i) <<< GUARD);
        ys[0] <= -(XW'(q) <<< GUARD);
        zs[0] <= {1'b1, {(ZW-1){1'b0}}};   // 180 degrees
      end else begin
        xs[0] <= XW'(i) <<< GUARD;
        ys[0] <= XW'(q) <<< GUARD;
        zs[0] <= '0;
      end
    end
  end

  for (genvar k = 0; k < ITER; k++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[k+1] <= '0;
        ys[k+1] <= '0;
        zs[k+1] <= '0;
        vs[k+1] <= 1'b0;
      end else begin
        vs[k+1] <= vs[k];
        if (ys[k] >= 0) begin
          xs[k+1] <= xs[k] + (ys[k] >>> k);
          ys[k+1] <= ys[k] - (xs[k] >>> k);
          zs[k+1] <= zs[k] + atan_tab(k);
        end else begin
          xs[k+1] <= xs[k] - (ys[k] >>> k);
          ys[k+1] <= ys[k] + (xs[k] >>> k);
          zs[k+1] <= zs[k] - atan_tab(k);
        end
      end
    end
  end

  logic signed [ZW-1:0] z_round;
  assign z_round   = zs[ITER] + ZW'(2 ** (ZW - PH_W - 1));
  assign phase     = z_round[ZW-1 -: PH_W];
  assign out_valid = vs[ITER];
endmodule
