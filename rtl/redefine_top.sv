// redefine_top: the REDEFINE array used for the Kalman filter -- ROWS x COLS
// tiles (4 x 4 by default, the configuration that computes on every tile
// with a memory PE beside each compute PE) joined by a packet-switched mesh.
//
// Tile (r, c) has coordinates x = c, y = r; each router links to its four
// neighbours, and the links leaving the array at the north, south and west
// edges are idle. The east links of the last column are the ports to the
// simulation environment (host): host_in_* carries packets into row r,
// host_out_* the packets that leave row r eastwards, i.e. all packets
// addressed to x = COLS. The host loads instruction memories and data
// (CFG_WR), starts the tiles (START), reads results (CFG_RD/GET_RSP) and
// receives one DONE packet per started tile.
// The array, tiles and host attachment at the last column follow the
// paper's REDEFINE figures; mesh wiring and packet protocol are this
// design's. ev/ev_arb_conflict expose each tile's event pulses.
module redefine_top
  import kf_pkg::*;
#(
  parameter int unsigned ROWS        = 4,
  parameter int unsigned COLS        = 4,
  parameter int unsigned MEM_WORDS_P = MEM_WORDS,
  parameter int unsigned IMEM_DEPTH  = 1024,
  parameter int unsigned FIFO_DEPTH  = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   host_in_valid  [ROWS],
  output logic   host_in_ready  [ROWS],
  input  flit_t  host_in_flit   [ROWS],
  output logic   host_out_valid [ROWS],
  input  logic   host_out_ready [ROWS],
  output flit_t  host_out_flit  [ROWS],
  output pe_ev_t ev             [ROWS][COLS],
  output logic   ev_arb_conflict [ROWS][COLS]
);
  // link arrays, indexed by tile and direction (0 N, 1 E, 2 S, 3 W)
  logic  in_v  [ROWS][COLS][4], in_r  [ROWS][COLS][4];
  logic  out_v [ROWS][COLS][4], out_r [ROWS][COLS][4];
  flit_t in_f  [ROWS][COLS][4], out_f [ROWS][COLS][4];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        // north (0) <- south output of the tile above
        if (r > 0) begin
          in_v[r][c][0] = out_v[r-1][c][2]; in_f[r][c][0] = out_f[r-1][c][2];
          out_r[r][c][0] = in_r[r-1][c][2];
        end else begin
          in_v[r][c][0] = 1'b0; in_f[r][c][0] = '0; out_r[r][c][0] = 1'b1;
        end
        // south (2) <- north output of the tile below
        if (r < ROWS - 1) begin
          in_v[r][c][2] = out_v[r+1][c][0]; in_f[r][c][2] = out_f[r+1][c][0];
          out_r[r][c][2] = in_r[r+1][c][0];
        end else begin
          in_v[r][c][2] = 1'b0; in_f[r][c][2] = '0; out_r[r][c][2] = 1'b1;
        end
        // west (3) <- east output of the tile to the left
        if (c > 0) begin
          in_v[r][c][3] = out_v[r][c-1][1]; in_f[r][c][3] = out_f[r][c-1][1];
          out_r[r][c][3] = in_r[r][c-1][1];
        end else begin
          in_v[r][c][3] = 1'b0; in_f[r][c][3] = '0; out_r[r][c][3] = 1'b1;
        end
        // east (1) <- west output of the tile to the right, or the host
        if (c < COLS - 1) begin
          in_v[r][c][1] = out_v[r][c+1][3]; in_f[r][c][1] = out_f[r][c+1][3];
          out_r[r][c][1] = in_r[r][c+1][3];
        end else begin
          in_v[r][c][1] = host_in_valid[r]; in_f[r][c][1] = host_in_flit[r];
          out_r[r][c][1] = host_out_ready[r];
        end
      end
      host_in_ready[r]  = in_r[r][COLS-1][1];
      host_out_valid[r] = out_v[r][COLS-1][1];
      host_out_flit[r]  = out_f[r][COLS-1][1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      tile #(.MEM_WORDS_P(MEM_WORDS_P), .IMEM_DEPTH(IMEM_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_tile (
        .clk, .rst_n, .my_x(COORD_W'(c)), .my_y(COORD_W'(r)),
        .dir_in_valid(in_v[r][c]), .dir_in_ready(in_r[r][c]), .dir_in_flit(in_f[r][c]),
        .dir_out_valid(out_v[r][c]), .dir_out_ready(out_r[r][c]), .dir_out_flit(out_f[r][c]),
        .ev(ev[r][c]), .ev_arb_conflict(ev_arb_conflict[r][c]));
    end
  end
endmodule
