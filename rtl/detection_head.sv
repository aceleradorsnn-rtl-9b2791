// detection_head: turns the last spiking layer's output into object
// detections on a coarse grid.
//
// The feature map (C channels of IN_H x IN_W, T_BINS bins) is divided into
// cells of CELL x CELL positions. The head reads every row of the spike
// buffer once (one row per clock, 1-clock read latency), adds the number of
// spikes of each CELL-wide segment to that cell's counter (all cells of a
// row in parallel), and then scans the cells, one per clock: a cell whose
// count over all channels and bins reaches obj_th is occupied. The result
// is whether any cell is occupied, how many are, and the bounding box of
// the occupied cells, in cell units. start runs one window; done pulses when
// det is valid (held until the next start). Clocks per window:
//   T_BINS * C * IN_H + GRID_W * GRID_H + 3.
// The paper's detector is a trained Spiking-YOLO backbone whose head it
// does not describe; this spike-count objectness grid is this design's
// stand-in that gives the cognitive controller object presence and
// position.
module detection_head #(
  parameter int C      = 16,
  parameter int IN_W   = 76,
  parameter int IN_H   = 60,
  parameter int T_BINS = 5,
  parameter int CELL   = 4,
  localparam int GRID_W = (IN_W + CELL - 1) / CELL,
  localparam int GRID_H = (IN_H + CELL - 1) / CELL,
  localparam int CB  = (C > 1) ? $clog2(C) : 1,
  localparam int TB  = (T_BINS > 1) ? $clog2(T_BINS) : 1,
  localparam int YB  = $clog2(IN_H)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic [15:0]          obj_th,
  output logic                 rd_en,
  output logic [TB-1:0]        rd_t,
  output logic [CB-1:0]        rd_c,
  output logic [YB-1:0]        rd_y,
  input  logic [IN_W-1:0]      rd_data,
  output npu_pkg::detection_t  det
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_LAST, S_SCAN} state_e;
  state_e state;
  logic [15:0] cnt [GRID_H][GRID_W];
  logic        cap_v;
  logic [YB-1:0] cap_y;
  logic [15:0] gx, gy;

  logic [15:0] seg_n [GRID_W];   // spikes per cell segment of the row just read

  assign busy  = (state != S_IDLE);

  always_comb
    for (int j = 0; j < GRID_W; j++) begin
      seg_n[j] = '0;
      for (int b = 0; b < CELL; b++)
        if (j * CELL + b < IN_W) seg_n[j] = seg_n[j] + 16'(rd_data[j*CELL+b]);
    end
  assign rd_en = (state == S_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cap_v <= 1'b0; cap_y <= '0;
      rd_t <= '0; rd_c <= '0; rd_y <= '0; gx <= '0; gy <= '0; det <= '0;
      for (int i = 0; i < GRID_H; i++) for (int j = 0; j < GRID_W; j++) cnt[i][j] <= '0;
    end else begin
      done  <= 1'b0;
      cap_v <= rd_en;
      cap_y <= rd_y;
      // accumulate the row read in the previous clock
      if (cap_v)
        for (int j = 0; j < GRID_W; j++)
          cnt[int'(cap_y) / CELL][j] <= cnt[int'(cap_y) / CELL][j] + seg_n[j];
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_READ; rd_t <= '0; rd_c <= '0; rd_y <= '0;
          for (int i = 0; i < GRID_H; i++) for (int j = 0; j < GRID_W; j++) cnt[i][j] <= '0;
        end
        S_READ: begin
          if (rd_y == YB'(IN_H - 1)) begin
            rd_y <= '0;
            if (rd_c == CB'(C - 1)) begin
              rd_c <= '0;
              if (rd_t == TB'(T_BINS - 1)) state <= S_LAST;
              else rd_t <= rd_t + 1'b1;
            end else rd_c <= rd_c + 1'b1;
          end else rd_y <= rd_y + 1'b1;
        end
        S_LAST: begin   // last row is being accumulated
          state <= S_SCAN; gx <= '0; gy <= '0;
          det <= '{found: 1'b0, n_cells: 8'd0, x0: 8'hFF, y0: 8'hFF, x1: 8'd0, y1: 8'd0};
        end
        S_SCAN: begin
          if (cnt[gy][gx] >= obj_th) begin
            det.found   <= 1'b1;
            det.n_cells <= det.n_cells + 8'd1;
            if (8'(gx) < det.x0) det.x0 <= 8'(gx);
            if (8'(gy) < det.y0) det.y0 <= 8'(gy);
            if (8'(gx) > det.x1) det.x1 <= 8'(gx);
            if (8'(gy) > det.y1) det.y1 <= 8'(gy);
          end
          if (gx == 16'(GRID_W - 1)) begin
            gx <= '0;
            if (gy == 16'(GRID_H - 1)) begin state <= S_IDLE; done <= 1'b1; end
            else gy <= gy + 16'd1;
          end else gx <= gx + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
