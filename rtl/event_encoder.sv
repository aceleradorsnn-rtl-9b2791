// event_encoder: turns the asynchronous DVS event stream into one-hot
// spatio-temporal voxel grids, one per fixed time window.
//
// A window lasts T_BINS * BIN_US microseconds and is cut into T_BINS time
// bins. Every event sets bit [bin][p][y][x] of the window's grid (several
// events on one pixel in one bin give a single 1). Windows follow each other
// without gap, the first one starting at the first event's timestamp;
// events must arrive in time order. The bin of an event is found by
// stepping a running bin boundary, one bin per clock (ev_ready is low while
// it steps), so no divider is needed. An event past the last bin closes the
// window: the grid is handed to the SNN and a window with no later events is
// only closed by such an event.
// Two grids are kept (ping-pong): one fills while the SNN reads the other.
// A grid is cleared, one (bin, polarity, row) word per clock, after reset
// and after the SNN releases it (win_release); if the next grid is still
// busy, ev_ready stays low (back-pressure, no event is lost).
// Read port: rd_en with (rd_t, rd_p, rd_y) returns the W-bit row of the
// oldest full grid on rd_data one clock later. win_on / win_off count the
// ON and OFF events of that window and win_id numbers windows from 0.
// The fixed windows, temporal bins and the one-hot (time, polarity, y, x)
// tensor are the paper's; the window length, the number of bins, the sensor
// size and the ping-pong organisation are this design's.
module event_encoder #(
  parameter int SENSOR_W = 304,
  parameter int SENSOR_H = 240,
  parameter int T_BINS   = 5,
  parameter int BIN_US   = 10000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  npu_pkg::dvs_event_t   ev,
  input  logic                  ev_valid,
  output logic                  ev_ready,
  // hand-over of the oldest full grid
  output logic                  win_valid,
  input  logic                  win_release,
  output logic [15:0]           win_id,
  output logic [31:0]           win_on,
  output logic [31:0]           win_off,
  // row read port
  input  logic                  rd_en,
  input  logic [$clog2(T_BINS)-1:0] rd_t,
  input  logic                  rd_p,
  input  logic [$clog2(SENSOR_H)-1:0] rd_y,
  output logic [SENSOR_W-1:0]   rd_data
);
  localparam int TB = $clog2(T_BINS);
  localparam int YB = $clog2(SENSOR_H);
  localparam int NWORD = T_BINS * 2 * SENSOR_H;

  logic [SENSOR_W-1:0] vox [2][NWORD];

  logic        wb;           // bank being filled
  logic [1:0]  full;         // bank holds a finished window
  logic [1:0]  clr_need;     // bank must be cleared
  logic        clr_busy;
  logic        clr_bank;
  logic [$clog2(NWORD)-1:0] clr_addr;
  logic        started;
  logic [TB-1:0] bin;
  logic [31:0] bin_end;
  logic [31:0] on_cnt, off_cnt;
  logic [31:0] on_q [2], off_q [2];
  logic [15:0] id_q [2];
  logic [15:0] next_id;
  logic        rb;           // oldest full bank
  logic        can_fill;
  logic        late;         // event lies past the current bin
  logic        accept;

  function automatic int waddr(input int t, input int p, input int y);
    return (t * 2 + p) * SENSOR_H + y;
  endfunction

  assign can_fill = !full[wb] && !clr_need[wb] && !(clr_busy && clr_bank == wb);
  assign late     = started && (ev.t >= bin_end);
  assign ev_ready = can_fill && !late;
  assign accept   = ev_valid && ev_ready;
  assign rb       = full[wb] ? wb : ~wb;
  assign win_valid = full[rb];
  assign win_id   = id_q[rb];
  assign win_on   = on_q[rb];
  assign win_off  = off_q[rb];

  always_ff @(posedge clk) begin
    if (accept)
      vox[wb][waddr(int'(started ? bin : '0), int'(ev.p), int'(ev.y))][ev.x] <= 1'b1;
    if (clr_busy)
      vox[clr_bank][clr_addr] <= '0;
    if (rd_en)
      rd_data <= vox[rb][waddr(int'(rd_t), int'(rd_p), int'(rd_y))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0; full <= '0; clr_need <= 2'b11; clr_busy <= 1'b0; clr_bank <= 1'b0;
      clr_addr <= '0; started <= 1'b0; bin <= '0; bin_end <= '0;
      on_cnt <= '0; off_cnt <= '0; next_id <= '0;
      on_q[0] <= '0; on_q[1] <= '0; off_q[0] <= '0; off_q[1] <= '0; id_q[0] <= '0; id_q[1] <= '0;
    end else begin
      // ---- clearing engine ----
      if (clr_busy) begin
        if (clr_addr == ($clog2(NWORD))'(NWORD - 1)) begin
          clr_busy <= 1'b0;
          clr_need[clr_bank] <= 1'b0;
        end else clr_addr <= clr_addr + 1'b1;
      end else if (clr_need[0] || clr_need[1]) begin
        clr_busy <= 1'b1; clr_addr <= '0; clr_bank <= clr_need[0] ? 1'b0 : 1'b1;
      end
      if (win_release && full[rb]) begin
        full[rb] <= 1'b0;
        clr_need[rb] <= 1'b1;
      end
      // ---- binning ----
      if (accept) begin
        if (!started) begin
          started <= 1'b1; bin <= '0; bin_end <= ev.t + 32'(BIN_US);
        end
        if (ev.p) on_cnt <= on_cnt + 32'd1; else off_cnt <= off_cnt + 32'd1;
      end else if (ev_valid && late && can_fill) begin
        // step to the next bin; past the last bin the window is complete
        bin_end <= bin_end + 32'(BIN_US);
        if (bin == TB'(T_BINS - 1)) begin
          bin <= '0;
          full[wb] <= 1'b1;
          on_q[wb] <= on_cnt; off_q[wb] <= off_cnt; id_q[wb] <= next_id;
          next_id <= next_id + 16'd1;
          on_cnt <= '0; off_cnt <= '0;
          wb <= ~wb;
        end else begin
          bin <= bin + 1'b1;
        end
      end
    end
  end

  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    (ev_valid && started) |-> (ev.t >= bin_end - 32'(BIN_US)));
endmodule
