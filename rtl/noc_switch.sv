// noc_switch: one switch of the uni-directional 2D torus network.
//
// Every core has a switch. Links run one way: X links eastwards (x + 1 mod
// DIM_X), Y links southwards (y + 1 mod DIM_Y). Routing is dimension
// ordered: a message first travels along its row until its x matches, then
// down its column until its y matches, then leaves at the local port. The
// switch has no buffers: each output is a single register, and when two
// messages want the same output in the same cycle one of them is dropped.
// That is the paper's design (after Hoplite); the compiler schedules SENDs so
// that drops never happen in a correct program. Which message wins is this
// design's own choice: traffic already in the network beats new traffic, and
// the column (Y) input beats the row (X) input, so
//   Y output:     y_in > x_in turning > inj turning
//   X output:     x_in > inj
//   local output: y_in > x_in > inj
// A dropped message raises `dropped` for one cycle (for observation only).
//
// Timing: one cycle per hop; every output is registered.
module noc_switch
  import manticore_pkg::*;
#(
  parameter int unsigned X = 0,
  parameter int unsigned Y = 0
) (
  input  logic     clk,
  input  logic     rst,
  input  noc_msg_t x_in,
  input  noc_msg_t y_in,
  input  noc_msg_t inj,
  output noc_msg_t x_out,
  output noc_msg_t y_out,
  output noc_msg_t deliver,
  output logic     dropped
);

  typedef enum logic [1:0] {D_NONE, D_X, D_Y, D_LOCAL} dir_e;

  function automatic dir_e route(noc_msg_t m);
    if (!m.valid)                 return D_NONE;
    if (m.x != COORD_W'(X))       return D_X;
    if (m.y != COORD_W'(Y))       return D_Y;
    return D_LOCAL;
  endfunction

  dir_e     rx, ry, ri;
  noc_msg_t nx, ny, nl;
  logic     lost;

  assign rx = route(x_in);
  assign ry = (y_in.valid && y_in.y != COORD_W'(Y)) ? D_Y :
              (y_in.valid ? D_LOCAL : D_NONE);
  assign ri = route(inj);

  always_comb begin
    nx   = '0;
    ny   = '0;
    nl   = '0;
    lost = 1'b0;
    // Column traffic first.
    if (ry == D_Y)     ny = y_in;
    if (ry == D_LOCAL) nl = y_in;
    // Row traffic.
    unique case (rx)
      D_X: nx = x_in;
      D_Y:     if (!ny.valid) ny = x_in; else lost = 1'b1;
      D_LOCAL: if (!nl.valid) nl = x_in; else lost = 1'b1;
      default: ;
    endcase
    // New traffic from the core last.
    unique case (ri)
      D_X:     if (!nx.valid) nx = inj; else lost = 1'b1;
      D_Y:     if (!ny.valid) ny = inj; else lost = 1'b1;
      D_LOCAL: if (!nl.valid) nl = inj; else lost = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x_out   <= '0;
      y_out   <= '0;
      deliver <= '0;
      dropped <= 1'b0;
    end else begin
      x_out   <= nx;
      y_out   <= ny;
      deliver <= nl;
      dropped <= lost;
    end
  end

endmodule
