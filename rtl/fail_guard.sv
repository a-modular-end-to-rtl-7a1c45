// fail_guard: disables firmware updates after repeated failed attempts.
//
// Each fail pulse counts one failed update (late package, key not found, digest or
// metadata mismatch). The count restarts when WINDOW_CYCLES clocks have passed since
// the first failure of the current run. When MAX_FAILS failures fall inside one
// window, locked goes high and stays high, whatever the window does, until an
// administrator pulses admin_clear, which also zeroes the count. While locked the
// update controller refuses to start. The lock-out follows the published design
// (updates stay disabled until an administrator acts); the limit of 3 failures in
// 60 s is this design's choice, as the text gives no numbers.
module fail_guard #(
  parameter int unsigned MAX_FAILS     = 3,
  parameter logic [63:0] WINDOW_CYCLES = 64'd6_000_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       fail,
  input  logic       admin_clear,
  output logic       locked,
  output logic [7:0] fail_count
);
  logic [63:0] age;     // clocks since the first failure of the run

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; fail_count <= '0; age <= '0;
    end else if (admin_clear) begin
      locked <= 1'b0; fail_count <= '0; age <= '0;
    end else if (!locked) begin
      if (fail_count != 0) age <= age + 64'd1;
      if (fail) begin
        if (fail_count == 0 || age >= WINDOW_CYCLES) begin
          fail_count <= 8'd1; age <= '0;
          if (MAX_FAILS <= 1) locked <= 1'b1;
        end else begin
          fail_count <= fail_count + 1'b1;
          if (32'(fail_count) + 1 >= MAX_FAILS) locked <= 1'b1;
        end
      end else if (fail_count != 0 && age >= WINDOW_CYCLES) begin
        fail_count <= '0; age <= '0;
      end
    end
  end
endmodule
