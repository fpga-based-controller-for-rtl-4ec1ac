// tb_motion_ctrl: self-checking testbench of the L293D direction logic.
//
// For each movement command and both PWM levels it checks the six driver
// pins one clock later against the L293 truth table, written out here as the
// pin strings ENA ENB 1A 2A 3A 4A, with the enables ANDed with the PWM level.
// It also checks the all-off state in reset and the one-cycle latency.
module tb_motion_ctrl;
  import robot_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  motion_cmd_e cmd = MOVE_FORWARD;
  logic        pwm = 1'b1;
  l293_t       drive;

  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  motion_ctrl dut (.clk(clk), .rst_n(rst_n), .cmd(cmd), .pwm(pwm), .drive(drive));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [5:0] expected(motion_cmd_e c, logic p);
    string row;
    logic [5:0] r;
    case (c)
      MOVE_FORWARD: row = "111010";
      MOVE_REVERSE: row = "110101";
      MOVE_LEFT:    row = "010010";
      default:      row = "101000";
    endcase
    foreach (row[i]) r[5 - i] = (row[i] == "1");
    r[5] &= p;
    r[4] &= p;
    return r;
  endfunction

  initial begin
    automatic motion_cmd_e cmds [4] = '{MOVE_FORWARD, MOVE_REVERSE, MOVE_LEFT, MOVE_RIGHT};
    repeat (2) @(posedge clk);
    #1 check(drive == 6'b000000, "all pins low in reset");
    rst_n = 1'b1;
    foreach (cmds[k]) begin
      for (int p = 1; p >= 0; p--) begin
        @(negedge clk);
        cmd = cmds[k];
        pwm = p[0];
        @(posedge clk);
        #1 check(drive == expected(cmd, pwm),
                 $sformatf("cmd %s pwm %0d: pins %b expected %b", cmd.name(), p, drive, expected(cmd, pwm)));
      end
    end
    // One-cycle latency: a change is not visible before the clock edge.
    @(negedge clk);
    cmd = MOVE_LEFT;
    pwm = 1'b1;
    @(posedge clk);
    @(negedge clk);
    cmd = MOVE_RIGHT;
    #1 check(drive == expected(MOVE_LEFT, 1'b1), "output held until the next edge");
    @(posedge clk);
    #1 check(drive == expected(MOVE_RIGHT, 1'b1), "new row after the edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
