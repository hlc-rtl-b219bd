// hlc_line_buffer: input line buffer (ORI Buf) turning raster video into
// 16x4 coding units. Four picture lines are stored, as many as one CU row
// needs; the 16x4 CU shape is what keeps this at four lines instead of
// eight. Pixels arrive PPC per clock in raster order with a valid/ready
// handshake. Once four lines are in, the buffer is drained CU by CU, each
// CU in 16 clocks of PPC pixels in raster order inside the CU, with
// first/last markers and the CU position. Input is held off (in_ready low)
// while draining: how the paper overlaps filling and draining with only four
// lines is not described, so this block trades half the input rate for it.
// Memory: CU_H banks of WIDTH/PPC words of PPC pixels, one read per clock;
// read data is registered (one clock latency to out_*).
module hlc_line_buffer
  import hlc_pkg::*;
#(
  parameter int unsigned WIDTH  = 3840,
  parameter int unsigned HEIGHT = 2160
) (
  input  logic            clk,
  input  logic            rst_n,
  input  pix_t [PPC-1:0]  in_pix,
  input  logic            in_valid,
  output logic            in_ready,
  output pix_t [PPC-1:0]  out_pix,
  output logic            out_valid,
  output logic            out_first,
  output logic            out_last,
  output logic [7:0]      out_cu_x,
  output logic [9:0]      out_cu_y
);
  localparam int unsigned NW   = WIDTH / PPC;
  localparam int unsigned NCU  = WIDTH / CU_W;
  localparam int unsigned NCUY = HEIGHT / CU_H;
  localparam int unsigned GPR  = CU_W / PPC;      // groups per CU row (4)

  pix_t [PPC-1:0] mem [CU_H][NW];

  typedef enum logic {FILL, DRAIN} state_e;
  state_e      state;
  logic [$clog2(NW)-1:0] wcol;
  logic [1:0]  wrow;
  logic [3:0]  t;          // group inside the CU being read
  logic [7:0]  cux;
  logic [9:0]  cuy;

  assign in_ready = (state == FILL);

  always_ff @(posedge clk) begin
    if (state == FILL && in_valid) mem[wrow][wcol] <= in_pix;
    if (state == DRAIN) out_pix <= mem[t[3:2]][32'(cux) * GPR + 32'(t[1:0])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= FILL; wcol <= '0; wrow <= '0; t <= '0; cux <= '0; cuy <= '0;
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; out_cu_x <= '0; out_cu_y <= '0;
    end else begin
      out_valid <= (state == DRAIN);
      out_first <= (state == DRAIN) && (t == 4'd0);
      out_last  <= (state == DRAIN) && (t == 4'd15);
      out_cu_x  <= cux;
      out_cu_y  <= cuy;
      if (state == FILL) begin
        if (in_valid) begin
          if (32'(wcol) == NW - 1) begin
            wcol <= '0;
            wrow <= wrow + 2'd1;
            if (wrow == 2'(CU_H - 1)) begin
              state <= DRAIN; t <= '0; cux <= '0;
            end
          end else begin
            wcol <= wcol + 1'b1;
          end
        end
      end else begin
        t <= t + 4'd1;
        if (t == 4'd15) begin
          if (32'(cux) == NCU - 1) begin
            state <= FILL;
            cux   <= '0;
            cuy   <= (32'(cuy) == NCUY - 1) ? '0 : cuy + 10'd1;
          end else begin
            cux <= cux + 8'd1;
          end
        end
      end
    end
  end
endmodule
