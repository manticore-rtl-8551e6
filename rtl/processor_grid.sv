// processor_grid: the compute clock domain, DIM_X x DIM_Y cores on a
// uni-directional torus.
//
// Core (x, y) has index y * DIM_X + x and is attached to switch (x, y). The
// switch's X output feeds switch (x + 1 mod DIM_X, y), its Y output switch
// (x, y + 1 mod DIM_Y). One core is privileged (it alone may access global
// memory and raise exceptions); as drawn in the paper it sits at the end of
// the first row, (DIM_X - 1, 0). The bootloader injects its messages through
// that same switch's local input, which the privileged core does not use
// while the grid boots (this sharing is this design's own choice).
//
// Everything in here runs on the gated compute clock, so stopping that clock
// freezes cores and network together (the global stall). soft_reset brings
// every core to its boot state and empties the network; it leaves register
// files, scratchpads and instruction memories untouched.
module processor_grid
  import manticore_pkg::*;
#(
  parameter int unsigned DIM_X = 15,
  parameter int unsigned DIM_Y = 15,
  localparam int unsigned NCORES = DIM_X * DIM_Y,
  localparam int unsigned PRIV_X = DIM_X - 1,
  localparam int unsigned PRIV_Y = 0
) (
  input  logic              clk,
  input  logic              soft_reset,
  input  noc_msg_t          boot_inj,
  output gmem_req_t         gmem_req,
  input  word_t             gmem_rdata,
  output exception_t        exc,
  output logic [NCORES-1:0] booted,
  output logic [NCORES-1:0] vcycle_start,
  output logic              noc_drop
);

  noc_msg_t xo [DIM_Y][DIM_X];
  noc_msg_t yo [DIM_Y][DIM_X];
  logic [NCORES-1:0] drop;

  for (genvar y = 0; y < DIM_Y; y++) begin : g_row
    for (genvar x = 0; x < DIM_X; x++) begin : g_col
      localparam bit PRIV = (x == PRIV_X) && (y == PRIV_Y);
      localparam int unsigned WX = (x + DIM_X - 1) % DIM_X;
      localparam int unsigned NY = (y + DIM_Y - 1) % DIM_Y;

      noc_msg_t   to_core, from_core, inj;
      gmem_req_t  req;
      exception_t ex;

      core #(.PRIVILEGED(PRIV)) u_core (
        .clk, .soft_reset,
        .noc_in(to_core), .noc_out(from_core),
        .gmem_req(req), .gmem_rdata, .exc(ex),
        .booted(booted[y*DIM_X + x]), .vcycle_start(vcycle_start[y*DIM_X + x])
      );

      if (PRIV) begin : g_priv
        assign inj      = boot_inj.valid ? boot_inj : from_core;
        assign gmem_req = req;
        assign exc      = ex;
      end else begin : g_std
        assign inj = from_core;
      end

      noc_switch #(.X(x), .Y(y)) u_sw (
        .clk, .rst(soft_reset),
        .x_in(xo[y][WX]), .y_in(yo[NY][x]), .inj,
        .x_out(xo[y][x]), .y_out(yo[y][x]), .deliver(to_core),
        .dropped(drop[y*DIM_X + x])
      );
    end
  end

  assign noc_drop = |drop;

endmodule
