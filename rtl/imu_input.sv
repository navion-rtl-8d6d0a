// imu_input: inertial measurement input of the inertial frontend. Measurements
// arrive over a 32-bit bus as six IEEE-754 single-precision words (three
// accelerometer axes, then three gyroscope axes) and are handed on in double
// precision, the format the inertial frontend computes in.
//
// Following the paper: six values per measurement, a 32-bit input bus, single
// precision in and double precision inside. This design's choices: the word
// order (acc x, y, z, gyro x, y, z), one word per in_valid, and an exact
// conversion of every single-precision value, subnormals included (they are
// normalised with a leading-zero count; infinities and NaNs keep their class
// and payload bits).
//
// Interface and timing: each in_valid takes in_word. The clock after the sixth
// word of a measurement, meas_valid pulses for one clock with all six values in
// acc[0..2] and gyro[0..2], which hold until the next measurement completes.
// resync returns the word counter to the first word (for a restart of the stream).
module imu_input (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        resync,
  input  logic        in_valid,
  input  logic [31:0] in_word,
  output logic        meas_valid,
  output logic [63:0] acc  [3],
  output logic [63:0] gyro [3]
);
  // exact single to double conversion
  function automatic logic [63:0] f32_to_f64(input logic [31:0] f);
    logic        s;
    logic [7:0]  e;
    logic [22:0] m;
    logic [22:0] mn;
    int          lz;
    s = f[31]; e = f[30:23]; m = f[22:0];
    if (e == 8'hFF) return {s, 11'h7FF, m, 29'd0};
    if (e != 8'd0)  return {s, 11'(int'(e) + 896), m, 29'd0};
    if (m == 23'd0) return {s, 63'd0};
    // subnormal: value = m * 2^-149; bring the leading one to the hidden bit
    lz = 0;
    for (int i = 22; i >= 0; i--) begin
      if (m[i]) break;
      lz++;
    end
    mn = m << (lz + 1);
    return {s, 11'(896 - lz), mn, 29'd0};
  endfunction

  logic [2:0]  widx;
  logic [63:0] buf_q [5];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx <= '0; meas_valid <= 1'b0;
      for (int i = 0; i < 5; i++) buf_q[i] <= '0;
      for (int i = 0; i < 3; i++) begin acc[i] <= '0; gyro[i] <= '0; end
    end else begin
      meas_valid <= 1'b0;
      if (resync) widx <= '0;
      else if (in_valid) begin
        if (widx == 3'd5) begin
          widx <= '0;
          meas_valid <= 1'b1;
          for (int i = 0; i < 3; i++) acc[i] <= buf_q[i];
          gyro[0] <= buf_q[3];
          gyro[1] <= buf_q[4];
          gyro[2] <= f32_to_f64(in_word);
        end else begin
          buf_q[widx] <= f32_to_f64(in_word);
          widx <= widx + 3'd1;
        end
      end
    end
  end
endmodule
