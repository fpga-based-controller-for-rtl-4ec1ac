// robot_pkg: types and constants shared by the mobile-robot controller.
//
// The L293D dual H-bridge is driven through six pins, listed in the order
// ENA ENB 1A 2A 3A 4A. l293_t packs them in that order, so a 6-bit constant
// written as that pin string (for example 6'b111010 for Forward) maps onto the
// struct field by field. The four movement codes and their pin patterns follow
// the L293 truth table of the robot (Forward, Reverse, Left, Right); the 2-bit
// encoding of motion_cmd_e is this design's own choice.
package robot_pkg;

  // Movement command for the two driven wheels.
  typedef enum logic [1:0] {
    MOVE_FORWARD = 2'd0,
    MOVE_REVERSE = 2'd1,
    MOVE_LEFT    = 2'd2,
    MOVE_RIGHT   = 2'd3
  } motion_cmd_e;

  // L293D control pins, most significant first: ENA ENB 1A 2A 3A 4A.
  typedef struct packed {
    logic ena;
    logic enb;
    logic in1;
    logic in2;
    logic in3;
    logic in4;
  } l293_t;

  // Pin patterns of the L293 truth table.
  localparam l293_t L293_FORWARD = 6'b111010;
  localparam l293_t L293_REVERSE = 6'b110101;
  localparam l293_t L293_LEFT    = 6'b010010;
  localparam l293_t L293_RIGHT   = 6'b101000;

  // Number of clock cycles needed to cover at least ns nanoseconds.
  function automatic int unsigned ns_to_cycles(int unsigned ns, int unsigned clk_period_ns);
    return (ns + clk_period_ns - 1) / clk_period_ns;
  endfunction

endpackage
