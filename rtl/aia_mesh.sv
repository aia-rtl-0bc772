// aia_mesh: the accelerator mesh of the chip, in the mesh clock domain.
//
// ROWS x COLS tiles (4 x 4), each an accelerator core with its instruction
// memory and 40KB of local memory. Every core can read the shared half of
// the register files of its four direct neighbours: a request on the core's
// W, N, S or E side is wired to the neighbour in that direction, which sees
// it on its opposite side, arbitrates among up to four requests and returns
// a grant and the data. Cores on the edge of the mesh have no neighbour on
// that side: such a read is granted at once and returns 0.
// The cores of row 0 (tiles 0..COLS-1) share the 128KB global buffer with
// the host path through the buffer's crossbar; the other rows have no path
// to it. The event unit implements the global barrier and gates the clock
// of waiting cores. The mesh interconnect turns host transactions from the
// cross-clock FIFO into accesses to the tiles, the global buffer and the
// control registers, and returns one response word per transaction.
// Tile index = row * COLS + column, row 0 at the top, column 0 at the west.
// The mesh size, neighbour access, per-core memory, the top-row access to
// the global buffer and the barrier follow the paper; the edge behaviour
// and the host path are this design's.
module aia_mesh
  import aia_pkg::*;
#(
  parameter int unsigned ROWS          = 4,
  parameter int unsigned COLS          = 4,
  parameter int unsigned IMEM_WORDS    = 2048,
  parameter int unsigned DMEM_WORDS    = 8192,
  parameter int unsigned GB_BANKS      = 16,
  parameter int unsigned GB_BANK_BYTES = 8192
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  host_req_t        req_i,
  output logic             rsp_valid_o,
  input  logic             rsp_ready_i,
  output logic [31:0]      rsp_o,
  output logic [ROWS*COLS-1:0] halted_o
);

  localparam int unsigned NT = ROWS * COLS;
  localparam int unsigned NGB = COLS;   // top-row cores on the global buffer

  // per-tile wiring
  logic [3:0]  nb_req   [NT];
  logic [4:0]  nb_adr   [NT];
  logic [3:0]  nb_gnt   [NT];
  logic [31:0] nb_data  [NT][4];
  logic [3:0]  in_req   [NT];
  logic [4:0]  in_adr   [NT][4];
  logic [3:0]  in_gnt   [NT];
  logic [31:0] in_data  [NT];

  mem_req_t tile_hreq [NT];
  mem_rsp_t tile_hrsp [NT];
  mem_req_t tile_gbreq [NT];
  mem_rsp_t tile_gbrsp [NT];
  mem_req_t gb_req [NGB+1];
  mem_rsp_t gb_rsp [NGB+1];

  logic [NT-1:0] fetch_en, clk_en, barrier_req;
  logic          barrier_release;
  logic [31:0]   barrier_count;

  // neighbour of tile (r,c) in direction d; -1 off the mesh
  function automatic int nbr(int r, int c, int d);
    unique case (d)
      int'(DIR_W): return (c > 0)             ? r * COLS + c - 1 : -1;
      int'(DIR_N): return (r > 0)             ? (r - 1) * COLS + c : -1;
      int'(DIR_S): return (r < int'(ROWS) - 1) ? (r + 1) * COLS + c : -1;
      default: return (c < int'(COLS) - 1) ? r * COLS + c + 1 : -1;
    endcase
  endfunction

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int I = r * COLS + c;

      // d and 3-d are opposite sides: W<->E, N<->S
      for (genvar d = 0; d < 4; d++) begin : g_dir
        localparam int T = nbr(r, c, d);
        if (T >= 0) begin : g_link
          assign nb_gnt[I][d]  = in_gnt[T][3-d];
          assign nb_data[I][d] = in_data[T];
          assign in_req[I][d]  = nb_req[T][3-d];
          assign in_adr[I][d]  = nb_adr[T];
        end else begin : g_edge
          assign nb_gnt[I][d]  = 1'b1;
          assign nb_data[I][d] = '0;
          assign in_req[I][d]  = 1'b0;
          assign in_adr[I][d]  = '0;
        end
      end

      ac_tile #(
        .CORE_ID   (I),
        .HAS_GB    (r == 0),
        .IMEM_WORDS(IMEM_WORDS),
        .DMEM_WORDS(DMEM_WORDS)
      ) u_tile (
        .clk_i,
        .rst_ni,
        .fetch_en_i       (fetch_en[I]),
        .clk_en_i         (clk_en[I]),
        .halted_o         (halted_o[I]),
        .host_req_i       (tile_hreq[I]),
        .host_rsp_o       (tile_hrsp[I]),
        .gb_req_o         (tile_gbreq[I]),
        .gb_rsp_i         (tile_gbrsp[I]),
        .nb_req_o         (nb_req[I]),
        .nb_adr_o         (nb_adr[I]),
        .nb_gnt_i         (nb_gnt[I]),
        .nb_data_i        (nb_data[I]),
        .nb_in_req_i      (in_req[I]),
        .nb_in_adr_i      (in_adr[I]),
        .nb_in_gnt_o      (in_gnt[I]),
        .nb_in_data_o     (in_data[I]),
        .barrier_req_o    (barrier_req[I]),
        .barrier_release_i(barrier_release)
      );

      if (r == 0) begin : g_gb
        assign gb_req[c]     = tile_gbreq[I];
        assign tile_gbrsp[I] = gb_rsp[c];
      end else begin : g_nogb
        assign tile_gbrsp[I] = '0;
      end
    end
  end

  global_buffer #(
    .N_MASTERS (NGB + 1),
    .N_BANKS   (GB_BANKS),
    .BANK_BYTES(GB_BANK_BYTES)
  ) u_gb (
    .clk_i, .rst_ni,
    .m_req_i(gb_req),
    .m_rsp_o(gb_rsp)
  );

  event_unit #(.NUM_CORES(NT)) u_eu (
    .clk_i, .rst_ni,
    .barrier_req_i  (barrier_req),
    .core_active_i  (fetch_en & ~halted_o),
    .release_o      (barrier_release),
    .clk_en_o       (clk_en),
    .barrier_count_o(barrier_count)
  );

  mesh_interconnect #(.NUM_CORES(NT)) u_mic (
    .clk_i, .rst_ni,
    .req_valid_i, .req_ready_o, .req_i,
    .rsp_valid_o, .rsp_ready_i, .rsp_o,
    .tile_req_o     (tile_hreq),
    .tile_rsp_i     (tile_hrsp),
    .gb_req_o       (gb_req[NGB]),
    .gb_rsp_i       (gb_rsp[NGB]),
    .fetch_en_o     (fetch_en),
    .halted_i       (halted_o),
    .barrier_count_i(barrier_count)
  );

endmodule
