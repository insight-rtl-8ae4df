// frame_buffer: on-chip image store that feeds the network as bit-serial
// sequences.
//
// The host writes the C x H x W image, one n-bit pixel per write (channel
// wr_ch, raster index wr_addr = yW + x). A pulse on start makes the buffer
// stream the image: from the next period on, period t carries pixel t of
// every channel, s_z(t) = I(z, y, x) with t = yW + x, LSB first in phi0 on
// s_bits[z], with s_valid high and (s_x, s_y) naming the pixel. One pixel per
// 2n-cycle period per channel, so a frame takes H*W periods. After the last
// pixel the outputs carry zeros with s_valid low. Each channel is a separate
// memory bank read once per period, the way a block RAM would be used. The
// raster serialization is the paper's; the write port and start handshake are
// this design's choice.
module frame_buffer
  import insight_pkg::*;
#(
  parameter int unsigned C = 1,
  parameter int unsigned H = 28,
  parameter int unsigned W = 28,
  parameter int unsigned N = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  bs_timing_t                tm,
  input  logic                      wr_en,
  input  logic [idx_w(C)-1:0]       wr_ch,
  input  logic [idx_w(H*W)-1:0]     wr_addr,
  input  logic [N-1:0]              wr_data,
  input  logic                      start,
  output logic [C-1:0]              s_bits,
  output logic                      s_valid,
  output logic [idx_w(W)-1:0]       s_x,
  output logic [idx_w(H)-1:0]       s_y,
  output logic                      busy
);

  localparam int unsigned HW = H * W;
  localparam int unsigned AW = idx_w(HW);
  localparam int unsigned XW = idx_w(W);
  localparam int unsigned YW = idx_w(H);

  logic [N-1:0]  mem [C][HW];
  logic [N-1:0]  sh  [C];
  logic [AW-1:0] ptr;
  logic [XW-1:0] px;
  logic [YW-1:0] py;
  logic          pending, run;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ch][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending <= 1'b0;
      run     <= 1'b0;
      ptr     <= '0;
      px      <= '0;
      py      <= '0;
      s_valid <= 1'b0;
      s_x     <= '0;
      s_y     <= '0;
      for (int z = 0; z < C; z++) sh[z] <= '0;
    end else begin
      if (start) pending <= 1'b1;
      if (tm.last) begin
        if (pending || run) begin
          for (int z = 0; z < C; z++) sh[z] <= mem[z][ptr];
          s_valid <= 1'b1;
          s_x     <= px;
          s_y     <= py;
          // a request is used up when its frame's first pixel is loaded
          if (ptr == '0 && !start) pending <= 1'b0;
          if (ptr == AW'(HW - 1)) begin
            run <= 1'b0;
            ptr <= '0;
            px  <= '0;
            py  <= '0;
          end else begin
            run <= 1'b1;
            ptr <= ptr + 1'b1;
            if (px == XW'(W - 1)) begin
              px <= '0;
              py <= py + 1'b1;
            end else begin
              px <= px + 1'b1;
            end
          end
        end else begin
          s_valid <= 1'b0;
          for (int z = 0; z < C; z++) sh[z] <= '0;
        end
      end else if (tm.phi0) begin
        for (int z = 0; z < C; z++) sh[z] <= sh[z] >> 1;
      end
    end
  end

  always_comb begin
    for (int z = 0; z < C; z++) s_bits[z] = sh[z][0] & tm.phi0;
  end

  assign busy = pending | run | s_valid;

endmodule
