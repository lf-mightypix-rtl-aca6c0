// lf_mightypix: top level of the LF-MightyPix readout chain.
//
// The chip has three parts. The pixel matrix (COLS x ROWS = 28 x 23 pixels of
// 100 um x 100 um) holds in every pixel an analog front-end (behavioural model
// here) and a 5-bit configuration RAM (4-bit TDAC, comparator enable). Below
// the matrix sit the hit buffers: one cell per pixel, which records the
// leading- and trailing-edge timestamps of the pixel's comparator pulse, and
// one end-of-column circuit per column (column drain). The periphery holds
// the dual-edge timestamp counter, whose value goes to every cell, the
// readout state machine, which empties the end-of-column circuits round robin
// and forms 32-bit packets {col, row, le, te}, and the serializer, which
// sends them 8b/10b encoded on one serial line.
//
// Clocks: `clk_ts` is the timestamp clock (80 MHz; the leading edge is
// resolved to 6.25 ns); the hit buffers, end-of-column circuits, state machine
// and configuration run on it. `clk_ser` is the bit clock of the serial line
// (1.28 GHz for 1.28 Gbit/s). `rst_n` is asynchronous, active low; release it
// while `clk_ts` is low so that the first counted edge is a rising one.
//
// Interfaces that the chip description does not define are brought out as
// plain ports: sensor charge per pixel (`sensor_stb`, `sensor_q`, standing for
// the sensor diode), the injection pulse with its amplitude and per-pixel
// enable, the global threshold `th_e`, and a word-addressed configuration
// write (`cfg_we`, `cfg_col`, `cfg_row`, `cfg_data`). The structure follows
// the chip description; the configuration port, the per-pixel injection
// enable and the threshold mismatch pattern given to the front-end models
// (OFFSET_E, a fixed pseudo-random spread of +-200 e-) are this design's own.
module lf_mightypix
  import lfmp_pkg::*;
#(
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic             clk_ts,
  input  logic             clk_ser,
  input  logic             rst_n,
  // pixel configuration
  input  logic             cfg_we,
  input  logic [COL_W-1:0] cfg_col,
  input  logic [ROW_W-1:0] cfg_row,
  input  pix_cfg_t         cfg_data,
  // analog stimuli and bias (numbers of electrons)
  input  logic [CHG_W-1:0] th_e,
  input  logic             sensor_stb [COLS][ROWS],
  input  logic [CHG_W-1:0] sensor_q   [COLS][ROWS],
  input  logic             injection,
  input  logic [CHG_W-1:0] inj_q,
  input  logic             en_inj     [COLS][ROWS],
  // serial data output
  output logic             ser_out
);

  // threshold mismatch given to the behavioural front-end of pixel (c, r)
  function automatic int mismatch_e(int c, int r);
    return (((c * 11 + r * 7) % 17) - 8) * 25;
  endfunction

  logic [TS_W-1:0]  ts_de, ts_se;

  logic [ROWS-1:0]  cell_full [COLS];
  logic [ROWS-1:0]  cell_rd   [COLS];
  logic [TS_W-1:0]  cell_le   [COLS][ROWS];
  logic [TS_W-1:0]  cell_te   [COLS][ROWS];

  logic [COLS-1:0]  eoc_valid;
  logic [COLS-1:0]  eoc_pop;
  logic [ROW_W-1:0] eoc_row [COLS];
  logic [TS_W-1:0]  eoc_le  [COLS];
  logic [TS_W-1:0]  eoc_te  [COLS];

  hit_pkt_t         pkt;
  logic             pkt_valid, pkt_ready;

  // ---------------- periphery: timestamp counter ----------------
  ts_counter u_ts (
    .clk   (clk_ts),
    .rst_n (rst_n),
    .ts_de (ts_de),
    .ts_se (ts_se)
  );

  // ---------------- pixel matrix and hit buffers ----------------
  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      pix_cfg_t cfg;
      logic     comp;

      pixel_config_ram u_cfg (
        .clk   (clk_ts),
        .rst_n (rst_n),
        .we    (cfg_we && cfg_col == COL_W'(c) && cfg_row == ROW_W'(r)),
        .wdata (cfg_data),
        .cfg   (cfg)
      );

      pixel_frontend #(
        .OFFSET_E (mismatch_e(c, r))
      ) u_fe (
        .sensor_stb (sensor_stb[c][r]),
        .sensor_q   (sensor_q[c][r]),
        .injection  (injection),
        .en_inj     (en_inj[c][r]),
        .inj_q      (inj_q),
        .th_e       (th_e),
        .tdac       (cfg.tdac),
        .en_comp    (cfg.en_comp),
        .out        (comp)
      );

      hit_buffer_cell u_cell (
        .clk   (clk_ts),
        .rst_n (rst_n),
        .comp  (comp),
        .ts_de (ts_de),
        .ts_se (ts_se),
        .rd    (cell_rd[c][r]),
        .full  (cell_full[c][r]),
        .le    (cell_le[c][r]),
        .te    (cell_te[c][r])
      );
    end

    end_of_column #(
      .ROWS (ROWS)
    ) u_eoc (
      .clk       (clk_ts),
      .rst_n     (rst_n),
      .cell_full (cell_full[c]),
      .cell_le   (cell_le[c]),
      .cell_te   (cell_te[c]),
      .cell_rd   (cell_rd[c]),
      .valid     (eoc_valid[c]),
      .row       (eoc_row[c]),
      .le        (eoc_le[c]),
      .te        (eoc_te[c]),
      .pop       (eoc_pop[c])
    );
  end

  // ---------------- periphery: readout and serial output ----------------
  readout_fsm #(
    .COLS (COLS)
  ) u_fsm (
    .clk       (clk_ts),
    .rst_n     (rst_n),
    .eoc_valid (eoc_valid),
    .eoc_row   (eoc_row),
    .eoc_le    (eoc_le),
    .eoc_te    (eoc_te),
    .eoc_pop   (eoc_pop),
    .pkt_valid (pkt_valid),
    .pkt       (pkt),
    .pkt_ready (pkt_ready)
  );

  serializer u_ser (
    .clk_ro   (clk_ts),
    .clk_ser  (clk_ser),
    .rst_n    (rst_n),
    .wr_valid (pkt_valid),
    .wr_data  (pkt),
    .wr_ready (pkt_ready),
    .ser_out  (ser_out)
  );

endmodule
