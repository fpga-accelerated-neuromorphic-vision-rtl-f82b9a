// tb_grid_divider: self-checking test of the Divide stage.
//
// Drives grid_divider with corner cases (zero and maximal coordinates,
// divisor 1, divisor 16, divisor larger than the coordinate, divisor zero)
// and with random coordinates and divisors, and compares both quotients
// with a bit-serial restoring long division written here, which does not use
// the division operator. A zero divisor must give all ones.
module tb_grid_divider;
  localparam int unsigned W = 16;

  logic [W-1:0] x, y, gs, cx, cy;
  int checks = 0, failures = 0;

  grid_divider dut (.x(x), .y(y), .grid_size(gs), .cell_x(cx), .cell_y(cy));

  // Restoring long division, one quotient bit per step.
  function automatic logic [W-1:0] ref_div(logic [W-1:0] n, logic [W-1:0] d);
    logic [W:0]   rem;
    logic [W-1:0] q;
    rem = '0;
    q   = '0;
    for (int i = W - 1; i >= 0; i--) begin
      rem = {rem[W-1:0], n[i]};
      if (rem >= {1'b0, d}) begin
        rem  = rem - {1'b0, d};
        q[i] = 1'b1;
      end
    end
    return q;
  endfunction

  task automatic check(logic [W-1:0] xi, logic [W-1:0] yi, logic [W-1:0] gi);
    x = xi; y = yi; gs = gi;
    #1;
    checks += 2;
    if (cx !== ref_div(xi, gi)) begin
      failures++;
      $display("FAIL x=%0d gs=%0d cell_x=%0d expected %0d", xi, gi, cx, ref_div(xi, gi));
    end
    if (cy !== ref_div(yi, gi)) begin
      failures++;
      $display("FAIL y=%0d gs=%0d cell_y=%0d expected %0d", yi, gi, cy, ref_div(yi, gi));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'd0, 16'd0, 16'd16);
    check(16'd15, 16'd16, 16'd16);
    check(16'd639, 16'd479, 16'd16);
    check(16'd580, 16'd420, 16'd16);
    check(16'hFFFF, 16'hFFFE, 16'd1);
    check(16'd7, 16'd300, 16'd301);
    check(16'hFFFF, 16'h8000, 16'hFFFF);
    check(16'd123, 16'd456, 16'd0);   // zero divisor: all ones
    // Sweep the divisors a grid may use against random coordinates.
    for (int g = 1; g <= 64; g++)
      for (int k = 0; k < 20; k++)
        check(16'($urandom_range(0, 639)), 16'($urandom_range(0, 479)), 16'(g));
    // Fully random words.
    for (int k = 0; k < 2000; k++)
      check(16'($urandom), 16'($urandom), 16'($urandom_range(1, 65535)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
