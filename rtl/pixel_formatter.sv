// pixel_formatter: the panel's pixel formatter (PF), reading the DRFB.
//
// Scans the displayed DRFB buffer in raster order and hands each pixel to the
// LCD interface at the panel's pixel-update rate, independent of how fast the
// frame arrived over the link. The rate is a fractional credit: RATE_NUM per
// cycle, one pixel per RATE_DEN (defaults 113/259 = 11.3 Gbps pixel update of
// a 4K 60 Hz panel against the 25.92 Gbps link clock of one pixel per cycle).
// So one refresh lasts H_RES*V_RES*RATE_DEN/RATE_NUM cycles.
//
// At the end of every refresh it asks the DRFB to swap (swap_req); the DRFB
// swaps only when a new frame is complete, otherwise the same frame is shown
// again (self refresh). vsync pulses at the first pixel of each refresh and
// marks the start of the host's frame window.
//
// Output timing: the DRFB read has one cycle of latency, so lcd_valid and the
// start-of-line / start-of-frame marks come one cycle after the read. Sync
// porches and blanking are not modelled (the paper does not describe them).
module pixel_formatter
  import burstlink_pkg::*;
#(
  parameter int unsigned H_RES    = 3840,
  parameter int unsigned V_RES    = 2160,
  parameter int unsigned RATE_NUM = 113,
  parameter int unsigned RATE_DEN = 259,
  parameter int unsigned ADDR_W   = $clog2(H_RES * V_RES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  // DRFB read port
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  pixel_t            rd_data,
  output logic              swap_req,
  input  logic              swapped,
  // LCD interface
  output logic              lcd_valid,
  output logic              lcd_sol,
  output logic              lcd_sof,
  output pixel_t            lcd_pix,
  // status
  output logic              vsync,
  output logic [31:0]       refresh_count,
  output logic [31:0]       self_refresh_count  // refreshes that repeated the previous frame
);

  localparam int unsigned ACC_W = $clog2(RATE_NUM + RATE_DEN + 1) + 1;

  logic [ACC_W-1:0]  acc;
  logic              tick;
  coord_t            x, y;
  logic [ADDR_W-1:0] addr;
  logic              sol_q, sof_q;
  logic              new_frame_seen;   // a swap happened during this refresh

  assign tick     = enable && (acc >= ACC_W'(RATE_DEN));
  assign rd_en    = tick;
  assign rd_addr  = addr;
  assign swap_req = tick && (x == coord_t'(H_RES-1)) && (y == coord_t'(V_RES-1));
  assign vsync    = tick && (addr == '0);
  assign lcd_pix  = rd_data;
  assign lcd_sol  = lcd_valid && sol_q;
  assign lcd_sof  = lcd_valid && sof_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc                <= '0;
      x                  <= '0;
      y                  <= '0;
      addr               <= '0;
      lcd_valid          <= 1'b0;
      sol_q              <= 1'b0;
      sof_q              <= 1'b0;
      refresh_count      <= '0;
      self_refresh_count <= '0;
      new_frame_seen     <= 1'b0;
    end else begin
      lcd_valid <= tick;
      if (enable) acc <= tick ? acc - ACC_W'(RATE_DEN) + ACC_W'(RATE_NUM) : acc + ACC_W'(RATE_NUM);
      if (swapped) new_frame_seen <= 1'b1;
      if (tick) begin
        sol_q <= (x == '0);
        sof_q <= (addr == '0);
        if (x == coord_t'(H_RES-1)) begin
          x <= '0;
          if (y == coord_t'(V_RES-1)) begin
            y    <= '0;
            addr <= '0;
          end else begin
            y    <= y + 1'b1;
            addr <= addr + 1'b1;
          end
        end else begin
          x    <= x + 1'b1;
          addr <= addr + 1'b1;
        end
        // a refresh starts: was the frame it shows new?
        if (addr == '0) begin
          refresh_count <= refresh_count + 1;
          if (!(new_frame_seen || swapped) && refresh_count != 0)
            self_refresh_count <= self_refresh_count + 1;
          new_frame_seen <= 1'b0;
        end
      end
    end
  end

endmodule
