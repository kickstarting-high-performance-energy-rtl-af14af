// emesh_router: one routing node of an eMesh network.
//
// Five ports: north, east, south, west and the local hub (the node's network
// interface). Every input owns a two-entry buffer: the single FIFO stage of the
// router plus the shadow register that lets the push-back (wait) signal be a
// register output, so a packet sent in the same cycle that wait rises is still
// caught and no packet is ever lost. Each output has a round-robin arbiter over
// the five inputs. A packet spends one register stage per router, so the hop
// latency is one cycle when nothing is blocked.
//
// Routing is static and address based. Unicast: if the destination column
// differs from this node's column the packet goes east or west, otherwise if the
// row differs it goes north or south, otherwise it leaves through the local port
// (X then Y). Multicast packets spread radially from their source: a packet from
// the local port goes out on all four sides, one travelling east or west keeps
// going that way and also turns north and south, one travelling north or south
// only keeps going; every node whose multicast register equals the destination's
// row and column also takes a copy. An input with several targets serves each
// as its arbiter grants it and is released when all are served.
//
// Interface: per port in_valid/in_pkt/in_wait (wait goes back upstream) and
// out_valid/out_pkt/out_wait (wait comes from downstream). A transfer happens
// in a cycle with valid high and wait low. Rows grow southward and columns
// eastward; the routing order, the X/Y rule and the five-direction round-robin
// arbiter follow the architecture, the buffer depth of two, the port order and
// the multicast tree shape are choices of this design.
module emesh_router
  import epiphany_pkg::*;
#(
  parameter logic [ROW_W-1:0] ROW = '0,
  parameter logic [COL_W-1:0] COL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ROW_W+COL_W-1:0] mcast_id,   // this node's multicast register
  input  logic       [4:0] in_valid,
  input  emesh_pkt_t [4:0] in_pkt,
  output logic       [4:0] in_wait,
  output logic       [4:0] out_valid,
  output emesh_pkt_t [4:0] out_pkt,
  input  logic       [4:0] out_wait
);

  // Input buffers: entry 0 is the head.
  emesh_pkt_t [4:0][1:0] buf_q;
  logic       [4:0][1:0] bvld_q;
  logic       [4:0][4:0] served_q;   // outputs already served for the head packet

  // Requested outputs of each head packet.
  logic [4:0][4:0] target;
  always_comb begin
    for (int i = 0; i < 5; i++) begin
      emesh_pkt_t p;
      p = buf_q[i][0];
      target[i] = '0;
      if (bvld_q[i][0]) begin
        if (p.mcast) begin
          unique case (i)
            int'(DIR_L): target[i] = 5'b01111;
            int'(DIR_W): target[i] = 5'b00111;              // travelling east: E, N, S
            int'(DIR_E): target[i] = 5'b01101;              // travelling west: W, N, S
            int'(DIR_N): target[i] = 5'b00100;              // travelling south
            default: target[i] = 5'b00001;            // from south, travelling north
          endcase
          if (i != int'(DIR_L) && p.addr[31:20] == mcast_id) target[i][DIR_L] = 1'b1;
        end else if (addr_col(p.addr) > COL) target[i][DIR_E] = 1'b1;
        else if (addr_col(p.addr) < COL)     target[i][DIR_W] = 1'b1;
        else if (addr_row(p.addr) > ROW)     target[i][DIR_S] = 1'b1;
        else if (addr_row(p.addr) < ROW)     target[i][DIR_N] = 1'b1;
        else                                 target[i][DIR_L] = 1'b1;
        target[i] &= ~served_q[i];
      end
    end
  end

  // One round-robin arbiter per output.
  logic [4:0][4:0] req_o, gnt_o;   // [output][input]
  logic [4:0]      fire_o;
  always_comb begin
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        req_o[o][i] = target[i][o];
  end

  for (genvar o = 0; o < 5; o++) begin : g_out
    rr_arbiter #(.N(5)) u_arb (
      .clk, .rst_n,
      .req    (req_o[o]),
      .advance(fire_o[o]),
      .gnt    (gnt_o[o])
    );
    always_comb begin
      out_valid[o] = |req_o[o];
      out_pkt[o]   = '0;
      for (int i = 0; i < 5; i++)
        if (gnt_o[o][i]) out_pkt[o] = buf_q[i][0];
      fire_o[o] = out_valid[o] && !out_wait[o];
    end
  end

  // Outputs that take the head of input i this cycle, and whether it is done.
  logic [4:0] pop;
  logic [4:0][4:0] sent;
  always_comb begin
    for (int i = 0; i < 5; i++) begin
      for (int o = 0; o < 5; o++) sent[i][o] = gnt_o[o][i] && fire_o[o];
      pop[i] = bvld_q[i][0] && ((target[i] & ~sent[i]) == '0);
    end
  end

  assign in_wait = {bvld_q[4][1], bvld_q[3][1], bvld_q[2][1], bvld_q[1][1], bvld_q[0][1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvld_q   <= '0;
      served_q <= '0;
      buf_q    <= '0;
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_valid[i] && !in_wait[i];
        served_q[i] <= pop[i] ? '0 : (served_q[i] | sent[i]);
        unique case ({push, pop[i]})
          2'b10: begin
            if (!bvld_q[i][0]) begin buf_q[i][0] <= in_pkt[i]; bvld_q[i][0] <= 1'b1; end
            else               begin buf_q[i][1] <= in_pkt[i]; bvld_q[i][1] <= 1'b1; end
          end
          2'b01: begin
            buf_q[i][0]  <= buf_q[i][1];
            bvld_q[i][0] <= bvld_q[i][1];
            bvld_q[i][1] <= 1'b0;
          end
          2'b11: begin
            if (bvld_q[i][1]) begin buf_q[i][0] <= buf_q[i][1]; buf_q[i][1] <= in_pkt[i]; end
            else              buf_q[i][0] <= in_pkt[i];
          end
          default: ;
        endcase
      end
    end
  end

`ifndef SYNTHESIS
  // A held packet must not change while the router pushes back.
  for (genvar o = 0; o < 5; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && out_wait[o] |=> out_valid[o]);
  end
`endif

endmodule
