// mesh_net: a MESH_X x MESH_Y mesh of mesh_router instances.
//
// Node n sits at column n % MESH_X and row n / MESH_X. Each node has one
// injection port (inj_*) and one ejection port (ej_*), both valid/ready.
// Links at the mesh edge are tied off: nothing enters from outside and XY
// routing never sends anything off the edge. Latency from injection to
// ejection is 2 cycles per router passed (hops + 1 routers).
// The tile uses three of these meshes as separate networks for requests,
// for LLC-to-L1 responses and forwards, and for answers to forwards, so that
// a message class that is always consumed can never be blocked behind one
// that is waiting; this separation is this design's choice.
module mesh_net
  import tardis_pkg::*;
#(
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic inj_valid [MESH_X*MESH_Y],
  input  msg_t inj_msg   [MESH_X*MESH_Y],
  output logic inj_ready [MESH_X*MESH_Y],
  output logic ej_valid  [MESH_X*MESH_Y],
  output msg_t ej_msg    [MESH_X*MESH_Y],
  input  logic ej_ready  [MESH_X*MESH_Y]
);
  localparam int unsigned N = MESH_X * MESH_Y;
  logic iv [N][5];
  msg_t im [N][5];
  logic ir [N][5];
  logic ov [N][5];
  msg_t om [N][5];
  logic orr[N][5];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_row
    for (genvar x = 0; x < MESH_X; x++) begin : g_col
      localparam int unsigned n = y * MESH_X + x;
      // local port
      assign iv[n][0]   = inj_valid[n];
      assign im[n][0]   = inj_msg[n];
      assign inj_ready[n] = ir[n][0];
      assign ej_valid[n]  = ov[n][0];
      assign ej_msg[n]    = om[n][0];
      assign orr[n][0]  = ej_ready[n];
      // east neighbour: our port 1 <-> its port 2
      if (x + 1 < MESH_X) begin : g_e
        assign iv[n][1] = ov[n+1][2];
        assign im[n][1] = om[n+1][2];
        assign orr[n][1] = ir[n+1][2];
      end else begin : g_e_edge
        assign iv[n][1] = 1'b0; assign im[n][1] = '0; assign orr[n][1] = 1'b1;
      end
      if (x > 0) begin : g_w
        assign iv[n][2] = ov[n-1][1];
        assign im[n][2] = om[n-1][1];
        assign orr[n][2] = ir[n-1][1];
      end else begin : g_w_edge
        assign iv[n][2] = 1'b0; assign im[n][2] = '0; assign orr[n][2] = 1'b1;
      end
      if (y + 1 < MESH_Y) begin : g_n
        assign iv[n][3] = ov[n+MESH_X][4];
        assign im[n][3] = om[n+MESH_X][4];
        assign orr[n][3] = ir[n+MESH_X][4];
      end else begin : g_n_edge
        assign iv[n][3] = 1'b0; assign im[n][3] = '0; assign orr[n][3] = 1'b1;
      end
      if (y > 0) begin : g_s
        assign iv[n][4] = ov[n-MESH_X][3];
        assign im[n][4] = om[n-MESH_X][3];
        assign orr[n][4] = ir[n-MESH_X][3];
      end else begin : g_s_edge
        assign iv[n][4] = 1'b0; assign im[n][4] = '0; assign orr[n][4] = 1'b1;
      end
      mesh_router #(.MESH_X(MESH_X), .X(x), .Y(y)) u_rt (
        .clk, .rst_n,
        .in_valid(iv[n]), .in_msg(im[n]), .in_ready(ir[n]),
        .out_valid(ov[n]), .out_msg(om[n]), .out_ready(orr[n])
      );
    end
  end
endmodule
