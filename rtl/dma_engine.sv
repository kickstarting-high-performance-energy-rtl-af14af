// dma_engine: the local DMA engine of an eNode.
//
// Two channels. Software gives a channel a local source address (src), a
// global destination address (dst) and a count of 64-bit doublewords; writing
// the count starts the channel. The engine reads the doublewords from local
// memory through its own memory port and hands them, one per cycle when
// nothing pushes back, to the network interface as doubleword writes to
// dst, dst+8, ... Reads are issued ahead into a two-entry buffer, so the
// memory read latency is hidden and the stream runs at 64 bits per cycle.
// Channel 0 is served before channel 1 when both are waiting; a channel runs
// to completion and then pulses its done line, which raises the DMA0/DMA1
// interrupt. The two channels, the completion interrupts and the 64-bit-per-
// cycle transfer follow the architecture; the register set, the one-channel-
// at-a-time order and the doubleword-only transfers are this design's.
module dma_engine #(
  parameter int unsigned MEM_AW = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [1:0]        cfg_src_we, cfg_dst_we, cfg_cnt_we,
  input  logic [31:0]       cfg_wd,
  output logic [1:0][15:0]  remaining,
  output logic              busy,
  output logic [1:0]        done,
  // local memory read port
  output logic              mem_req,
  output logic [MEM_AW-1:0] mem_addr,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [63:0]       mem_rdata,
  // to the network interface
  output logic              out_valid,
  output logic [31:0]       out_addr,
  output logic [63:0]       out_data,
  input  logic              out_ready
);
  logic [1:0][31:0] src_q, dst_q;
  logic [1:0][15:0] cnt_q;
  logic             act_q, ch_q;
  logic [15:0]      rd_left_q, wr_left_q;
  logic [31:0]      rd_addr_q, wr_addr_q;
  logic [1:0]       inflight_q;
  logic [1:0][63:0] fifo_q;
  logic [1:0]       fcnt_q;

  logic pop, issue;
  assign out_valid = act_q && fcnt_q != 2'd0;
  assign out_data  = fifo_q[0];
  assign out_addr  = wr_addr_q;
  assign pop       = out_valid && out_ready;
  assign mem_req   = act_q && rd_left_q != '0 &&
                     (32'(inflight_q) + 32'(fcnt_q) - 32'(pop)) < 32'd2;
  assign mem_addr  = rd_addr_q[MEM_AW-1:0];
  assign issue     = mem_req && mem_gnt;
  assign busy      = act_q;
  always_comb
    for (int c = 0; c < 2; c++)
      remaining[c] = (act_q && ch_q == 1'(c)) ? wr_left_q : cnt_q[c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q <= '0; dst_q <= '0; cnt_q <= '0;
      act_q <= 1'b0; ch_q <= 1'b0;
      rd_left_q <= '0; wr_left_q <= '0; rd_addr_q <= '0; wr_addr_q <= '0;
      inflight_q <= '0; fifo_q <= '0; fcnt_q <= '0; done <= '0;
    end else begin
      done <= '0;
      for (int c = 0; c < 2; c++) begin
        if (cfg_src_we[c]) src_q[c] <= cfg_wd;
        if (cfg_dst_we[c]) dst_q[c] <= cfg_wd;
        if (cfg_cnt_we[c]) cnt_q[c] <= cfg_wd[15:0];
      end
      if (!act_q) begin
        if (cnt_q[0] != '0 || cnt_q[1] != '0) begin
          logic c;
          c = (cnt_q[0] != '0) ? 1'b0 : 1'b1;
          act_q     <= 1'b1;
          ch_q      <= c;
          rd_left_q <= cnt_q[c];
          wr_left_q <= cnt_q[c];
          rd_addr_q <= src_q[c];
          wr_addr_q <= dst_q[c];
          cnt_q[c]  <= '0;
        end
      end else begin
        // reads
        if (issue) begin
          rd_left_q <= rd_left_q - 16'd1;
          rd_addr_q <= rd_addr_q + 32'd8;
        end
        inflight_q <= inflight_q + 2'(issue) - 2'(mem_rvalid);
        // buffer
        unique case ({mem_rvalid, pop})
          2'b10: begin fifo_q[fcnt_q[0]] <= mem_rdata; fcnt_q <= fcnt_q + 2'd1; end
          2'b01: begin fifo_q[0] <= fifo_q[1]; fcnt_q <= fcnt_q - 2'd1; end
          2'b11: begin
            if (fcnt_q == 2'd2) begin fifo_q[0] <= fifo_q[1]; fifo_q[1] <= mem_rdata; end
            else fifo_q[0] <= mem_rdata;
          end
          default: ;
        endcase
        // writes
        if (pop) begin
          wr_addr_q <= wr_addr_q + 32'd8;
          wr_left_q <= wr_left_q - 16'd1;
          if (wr_left_q == 16'd1) begin
            act_q      <= 1'b0;
            done[ch_q] <= 1'b1;
          end
        end
      end
    end
  end
endmodule
