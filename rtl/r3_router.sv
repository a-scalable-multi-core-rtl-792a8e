// r3_router: mesh router between chips (level R3), one per chip.
//
// Relative XY routing. A packet carries |dx|, |dy| (two bits each) and the
// sign bits sx (0 west, 1 east) and sy (0 south, 1 north). Every input has a
// buffer followed by a controlled split:
//   from R2        : dx != 0 -> west/east by sx, dx-1;
//                    else      -> south/north by sy, dy-1
//                    (dx = dy = 0 never comes from R2; it is returned to R2)
//   from north/south: dy == 0 -> R2; else continue to the opposite side, dy-1
//   from east/west : dx != 0 -> continue to the opposite side, dx-1;
//                    else dy == 0 -> R2; else south/north by sy, dy-1
// Each of the five outputs has a round-robin merge over the inputs that can
// reach it. The packet's tag and core mask pass unchanged; the R2 router of
// the destination chip delivers by core mask.
//
// All channels are valid/ready (transfer on a rising edge when both are
// high); they stand for the four-phase QDI channels of the chip.
module r3_router
  import dynaps_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // port order everywhere: 0 R2, 1 north, 2 south, 3 east, 4 west
  input  logic [4:0] in_valid,
  output logic [4:0] in_ready,
  input  route_pkt_t in_data [5],
  output logic [4:0] out_valid,
  input  logic [4:0] out_ready,
  output route_pkt_t out_data [5]
);
  typedef enum logic [2:0] {P_R2 = 3'd0, P_N = 3'd1, P_S = 3'd2, P_E = 3'd3, P_W = 3'd4} port_e;

  logic [4:0] b_valid, b_ready;
  route_pkt_t b_data [5];
  route_pkt_t fw_data [5];  // packet after decrement
  port_e      dst [5];
  logic [4:0] sp_valid [5]; // [input][output]
  logic [4:0] sp_ready [5];
  logic [4:0] mg_valid [5]; // [output][input]
  logic [4:0] mg_ready [5];

  function automatic port_e y_dir(route_pkt_t p);
    return p.sy ? P_N : P_S;
  endfunction

  for (genvar i = 0; i < 5; i++) begin : g_in
    qdi_buffer #(.T(route_pkt_t)) u_buf (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(b_valid[i]), .out_ready(b_ready[i]), .out_data(b_data[i]));

    always_comb begin
      route_pkt_t p;
      p = b_data[i];
      fw_data[i] = p;
      dst[i] = P_R2;
      unique case (port_e'(i))
        P_R2: begin
          if (p.dx != 2'd0) begin
            dst[i] = p.sx ? P_E : P_W;
            fw_data[i].dx = p.dx - 2'd1;
          end else if (p.dy != 2'd0) begin
            dst[i] = y_dir(p);
            fw_data[i].dy = p.dy - 2'd1;
          end
        end
        P_N, P_S: begin
          if (p.dy != 2'd0) begin
            dst[i] = (port_e'(i) == P_N) ? P_S : P_N;
            fw_data[i].dy = p.dy - 2'd1;
          end
        end
        default: begin  // P_E, P_W
          if (p.dx != 2'd0) begin
            dst[i] = (port_e'(i) == P_E) ? P_W : P_E;
            fw_data[i].dx = p.dx - 2'd1;
          end else if (p.dy != 2'd0) begin
            dst[i] = y_dir(p);
            fw_data[i].dy = p.dy - 2'd1;
          end
        end
      endcase
    end

    route_pkt_t unused_data;
    qdi_ctrl_split #(.N(5), .T(route_pkt_t)) u_csp (
      .clk, .rst_n,
      .in_valid(b_valid[i]), .in_ready(b_ready[i]), .in_data(fw_data[i]), .sel(dst[i]),
      .out_valid(sp_valid[i]), .out_ready(sp_ready[i]), .out_data(unused_data));
  end

  // transpose the split outputs onto the output merges
  always_comb begin
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++) begin
        mg_valid[o][i] = sp_valid[i][o];
        sp_ready[i][o] = mg_ready[o][i];
      end
  end

  for (genvar o = 0; o < 5; o++) begin : g_out
    qdi_merge #(.N(5), .T(route_pkt_t)) u_mg (
      .clk, .rst_n,
      .in_valid(mg_valid[o]), .in_ready(mg_ready[o]), .in_data(fw_data),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_data(out_data[o]));
  end

  // An input never sends back where it came from (except R2 for a zero offset).
  for (genvar i = 1; i < 5; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n) !sp_valid[i][i]);
  end
endmodule
