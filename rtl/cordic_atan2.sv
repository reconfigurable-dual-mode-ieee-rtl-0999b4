// Sequential CORDIC in vectoring mode: angle of the vector (x, y).
//
// Gives the arctangent that the carrier phase estimator needs. The vector is
// first turned by pi into the right half plane if x < 0, then ITER
// micro-rotations drive y to zero while the rotation angles are summed. The
// angle is returned in units of 1/65536 turn (0..65535 covers 0..2*pi). The
// angle table atan(2^-i) is computed at elaboration.
//
// Timing: start loads x, y; done pulses ITER clocks later with angle valid
// (it holds until the next start). CORDIC itself is this design's choice: the
// description only names one arctangent per estimate.
module cordic_atan2 #(
  parameter int DW   = 16,
  parameter int ITER = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] y,
  output logic                 done,
  output logic [15:0]          angle
);
  localparam int IW = DW + 3;

  typedef logic [15:0] atab_t [ITER];
  function automatic atab_t gen_atan();
    atab_t t;
    for (int i = 0; i < ITER; i++)
      t[i] = 16'($rtoi($atan(1.0 / (2.0 ** i)) / (2.0 * 3.14159265358979) * 65536.0 + 0.5));
    return t;
  endfunction
  localparam atab_t ATAN = gen_atan();

  logic signed [IW-1:0] cx, cy;
  logic [15:0]          acc;
  logic [$clog2(ITER+1)-1:0] it;
  logic                 run;

  assign angle = acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cx <= '0; cy <= '0; acc <= '0; it <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1; it <= '0;
        if (x < 0) begin cx <= -IW'(x); cy <= -IW'(y); acc <= 16'h8000; end
        else       begin cx <=  IW'(x); cy <=  IW'(y); acc <= 16'h0000; end
      end else if (run) begin
        if (cy > 0) begin
          cx <= cx + (cy >>> it); cy <= cy - (cx >>> it); acc <= acc + ATAN[$clog2(ITER)'(it)];
        end else begin
          cx <= cx - (cy >>> it); cy <= cy + (cx >>> it); acc <= acc - ATAN[$clog2(ITER)'(it)];
        end
        it <= it + 1'b1;
        if (32'(it) == ITER - 1) begin run <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
