// mesh_interconnect: mesh-side end of the host path. It takes host
// transactions out of the SoC-to-mesh FIFO, carries each to its target and
// puts one response word into the mesh-to-SoC FIFO.
//
// Targets by address bits [31:28]:
//   1 - a tile: core = addr[19:16], addr[15] picks scratchpad (1) or
//       instruction memory (0); the tile port is always granted.
//   2 - the global buffer, through the host master port of its crossbar;
//       the request is held until granted (it may lose to the cores).
//   3 - control registers at addr[7:0]: FETCH_EN (rw, one bit per core),
//       HALTED (ro) and BARRIERS (ro, completed barriers).
// Anything else is read as 0 and writes to it are dropped.
// One transaction is in flight at a time: IDLE pops a request, ISSUE drives
// it until granted, WAIT waits for the read data, RESP offers the response
// word (read data, 0 for writes) until the FIFO takes it. Writes are also
// answered, so the host can count completions.
// The paper shows the SoC reaching the mesh through a cross-clock FIFO but
// does not describe this path; the address map, register set and the
// single-outstanding protocol are this design's.
module mesh_interconnect
  import aia_pkg::*;
#(
  parameter int unsigned NUM_CORES = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // host requests from the cross-clock FIFO
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  host_req_t          req_i,
  // responses into the cross-clock FIFO
  output logic               rsp_valid_o,
  input  logic               rsp_ready_i,
  output logic [31:0]        rsp_o,
  // tile host ports
  output mem_req_t           tile_req_o [NUM_CORES],
  input  mem_rsp_t           tile_rsp_i [NUM_CORES],
  // global-buffer host master
  output mem_req_t           gb_req_o,
  input  mem_rsp_t           gb_rsp_i,
  // control
  output logic [NUM_CORES-1:0] fetch_en_o,
  input  logic [NUM_CORES-1:0] halted_i,
  input  logic [31:0]        barrier_count_i
);

  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;

  typedef enum logic [1:0] { S_IDLE, S_ISSUE, S_WAIT, S_RESP } state_e;
  state_e state_q;

  host_req_t req_q;
  logic [31:0] rsp_q;
  logic [CW-1:0] core_sel;
  logic is_tile, is_gb, is_ctrl;
  logic tgt_gnt, tgt_rvalid;
  logic [31:0] tgt_rdata, ctrl_rdata;

  assign core_sel = req_q.addr[16 +: CW];
  assign is_tile  = (req_q.addr[31:28] == REGION_TILE) && (int'(req_q.addr[19:16]) < int'(NUM_CORES));
  assign is_gb    = (req_q.addr[31:28] == REGION_GB);
  assign is_ctrl  = (req_q.addr[31:28] == REGION_CTRL);

  always_comb begin
    unique case (req_q.addr[7:0])
      CTRL_FETCH_EN: ctrl_rdata = 32'(fetch_en_o);
      CTRL_HALTED:   ctrl_rdata = 32'(halted_i);
      CTRL_BARRIERS: ctrl_rdata = barrier_count_i;
      default:       ctrl_rdata = '0;
    endcase
  end

  always_comb begin
    for (int i = 0; i < int'(NUM_CORES); i++) begin
      tile_req_o[i].req   = (state_q == S_ISSUE) && is_tile && (core_sel == CW'(i));
      tile_req_o[i].we    = req_q.we;
      tile_req_o[i].be    = req_q.be;
      tile_req_o[i].addr  = req_q.addr;
      tile_req_o[i].wdata = req_q.wdata;
    end
    gb_req_o.req   = (state_q == S_ISSUE) && is_gb;
    gb_req_o.we    = req_q.we;
    gb_req_o.be    = req_q.be;
    gb_req_o.addr  = req_q.addr;
    gb_req_o.wdata = req_q.wdata;

    tgt_gnt    = 1'b0;
    tgt_rvalid = 1'b0;
    tgt_rdata  = '0;
    if (is_tile) begin
      tgt_gnt    = tile_rsp_i[core_sel].gnt;
      tgt_rvalid = tile_rsp_i[core_sel].rvalid;
      tgt_rdata  = tile_rsp_i[core_sel].rdata;
    end else if (is_gb) begin
      tgt_gnt    = gb_rsp_i.gnt;
      tgt_rvalid = gb_rsp_i.rvalid;
      tgt_rdata  = gb_rsp_i.rdata;
    end
  end

  assign req_ready_o = (state_q == S_IDLE);
  assign rsp_valid_o = (state_q == S_RESP);
  assign rsp_o       = rsp_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      req_q      <= '0;
      rsp_q      <= '0;
      fetch_en_o <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          req_q   <= req_i;
          state_q <= S_ISSUE;
        end
        S_ISSUE: begin
          if (is_tile || is_gb) begin
            if (tgt_gnt) state_q <= S_WAIT;
          end else begin
            if (is_ctrl && req_q.we && req_q.addr[7:0] == CTRL_FETCH_EN)
              fetch_en_o <= req_q.wdata[NUM_CORES-1:0];
            rsp_q   <= (is_ctrl && !req_q.we) ? ctrl_rdata : 32'd0;
            state_q <= S_RESP;
          end
        end
        S_WAIT: if (tgt_rvalid) begin
          rsp_q   <= req_q.we ? 32'd0 : tgt_rdata;
          state_q <= S_RESP;
        end
        S_RESP: if (rsp_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_rsp_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rsp_valid_o && !rsp_ready_i |=> rsp_valid_o && $stable(rsp_o));

endmodule
