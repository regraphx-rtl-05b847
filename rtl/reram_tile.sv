// reram_tile: one ReRAM processing tile (a V-PE tile or an E-PE tile).
//
// A tile holds IMAS in-situ multiply-accumulate units (ima), an eDRAM staging
// buffer (edram_buffer) and the logic that joins them to one local port of a
// NoC router. The same module serves both tile types; only the parameters
// differ (V-PE: 128x128 crossbars with 8-bit ADCs, E-PE: 8x8 crossbars with
// 6-bit ADCs, both 12 IMAs of 8 crossbars, as in the paper's parameter table).
//
// How it works:
//  * Crossbars are programmed, and each IMA's output route is set, through the
//    configuration port (the mapping is decided offline).
//  * Flits from the NoC are always taken. CMD_WRITE / CMD_ACC write or add
//    their value into eDRAM word ima*ROWS + (index - in_base); CMD_START adds
//    one token to that IMA's start count. A flit for an IMA with in_en low, or
//    with an index outside in_base .. in_base+ROWS-1, is dropped.
//  * When an idle IMA has collected starts_needed tokens, the loader moves its
//    ROWS words from the eDRAM into the IMA's input register (one per clock,
//    clearing each word), then starts the IMA. Only one IMA loads at a time.
//  * Results of all IMAs share the outgoing port through a round-robin
//    arbiter. Each result column c becomes one flit to the configured
//    destination box, index idx_base + c, value (result >> shift) saturated to
//    DATA_W bits. With send_start set, a CMD_START flit follows the last one,
//    so the receiver can begin as soon as all its senders are done.
// Timing: an IMA begins ROWS + 1 clocks after its last token arrives if it is
// idle; results then flow at up to one flit per clock while the router
// accepts them (out_ready low stalls the IMA).
// The paper fixes the tile contents (12 IMAs, eDRAM, peripheral circuits) but
// not this protocol: commands, tokens, scaling and buffer layout are this
// design's own.
module reram_tile
  import regraphx_pkg::*;
#(
  parameter int unsigned ROWS     = V_XBAR_SIZE,
  parameter int unsigned COLS     = V_XBAR_SIZE,
  parameter int unsigned ADC_BITS = V_ADC_BITS,
  parameter int unsigned IMAS     = IMAS_PER_TILE
) (
  input  logic     clk,
  input  logic     rst_n,
  // configuration
  input  logic     cfg_valid,
  input  cfg_cmd_t cfg_cmd,
  input  logic [CFG_W-1:0] cfg_data,
  // from the router
  input  logic     in_valid,
  output logic     in_ready,
  input  flit_t    in_flit,
  // to the router
  output logic     out_valid,
  input  logic     out_ready,
  output flit_t    out_flit,
  // activity (for observation)
  output logic [IMAS-1:0] ima_busy
);

  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned DEPTH = IMAS * ROWS;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned GW    = (IMAS > 1) ? $clog2(IMAS) : 1;

  // ---------------------------------------------------------------- config
  ima_cfg_t out_cfg [IMAS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < IMAS; i++) out_cfg[i] <= '0;
    end else if (cfg_valid && cfg_cmd.kind == CFG_OUT && cfg_cmd.ima < IMAW'(IMAS)) begin
      out_cfg[cfg_cmd.ima] <= cfg_data[$bits(ima_cfg_t)-1:0];
    end
  end

  // ---------------------------------------------------------------- input side
  assign in_ready = 1'b1;

  // an arriving flit is kept only if its IMA exists, accepts input and the
  // index falls inside that IMA's window; everything else is dropped, which
  // lets one multicast serve receivers that each want a different slice
  logic          in_accept, in_data_fire, in_start_fire;
  logic [IDXW:0] in_off;
  logic [AW-1:0] wr_addr;
  ima_cfg_t      in_cfg;
  assign in_cfg        = out_cfg[in_flit.ima[GW-1:0]];
  assign in_off        = {1'b0, in_flit.index} - {1'b0, in_cfg.in_base};
  assign in_accept     = in_valid && in_flit.ima < IMAW'(IMAS) && in_cfg.in_en;
  assign in_data_fire  = in_accept && (in_flit.cmd == CMD_WRITE || in_flit.cmd == CMD_ACC)
                         && !in_off[IDXW] && in_off < (IDXW+1)'(ROWS);
  assign in_start_fire = in_accept && in_flit.cmd == CMD_START;
  assign wr_addr       = AW'(in_flit.ima) * AW'(ROWS) + AW'(in_off[RW-1:0]);

  // loader state
  logic          loading;
  logic [GW-1:0] load_ima;
  logic [RW-1:0] load_idx;
  logic [AW-1:0] rd_addr;
  logic [DATA_W-1:0] rd_data;
  assign rd_addr = AW'(load_ima) * AW'(ROWS) + AW'(load_idx);

  edram_buffer #(.DEPTH(DEPTH), .W(DATA_W)) u_edram (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (in_data_fire),
    .wr_acc  (in_flit.cmd == CMD_ACC),
    .wr_addr (wr_addr),
    .wr_data (in_flit.data),
    .rd_addr (rd_addr),
    .rd_clear(loading),
    .rd_data (rd_data)
  );

  // start tokens
  logic [4:0] tokens [IMAS];
  logic [IMAS-1:0] ready_to_load;
  logic [4:0] need [IMAS];
  logic [IMAS-1:0] ima_start;

  always_comb begin
    for (int i = 0; i < IMAS; i++) begin
      need[i]          = (out_cfg[i].starts_needed == '0) ? 5'd1 : {1'b0, out_cfg[i].starts_needed};
      ready_to_load[i] = (tokens[i] >= need[i]) && !ima_busy[i] && !ima_start[i];
    end
  end

  logic          pick_valid;
  logic [GW-1:0] pick;
  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int i = IMAS - 1; i >= 0; i--)
      if (ready_to_load[i]) begin
        pick_valid = 1'b1;
        pick       = GW'(i);
      end
  end

  logic            load_done;
  assign load_done = loading && (load_idx == RW'(ROWS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading   <= 1'b0;
      load_ima  <= '0;
      load_idx  <= '0;
      ima_start <= '0;
      for (int i = 0; i < IMAS; i++) tokens[i] <= '0;
    end else begin
      ima_start <= '0;
      for (int i = 0; i < IMAS; i++) begin
        automatic logic [4:0] t = tokens[i];
        if (!loading && pick_valid && pick == GW'(i)) t = t - need[i];
        if (in_start_fire && in_flit.ima == IMAW'(i) && t != 5'd31) t = t + 5'd1;
        tokens[i] <= t;
      end
      if (!loading) begin
        if (pick_valid) begin
          loading  <= 1'b1;
          load_ima <= pick;
          load_idx <= '0;
        end
      end else begin
        load_idx <= load_idx + 1'b1;
        if (load_done) begin
          loading              <= 1'b0;
          ima_start[load_ima]  <= 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- IMAs
  logic [IMAS-1:0]  res_valid, res_ready, res_last;
  logic [CW-1:0]    res_col  [IMAS];
  logic [ACC_W-1:0] res_data [IMAS];

  for (genvar i = 0; i < IMAS; i++) begin : g_ima
    ima #(
      .ROWS(ROWS), .COLS(COLS), .XBARS(XBARS_PER_IMA), .CELL_BITS(CELL_BITS),
      .ADC_BITS(ADC_BITS), .IN_BITS(DATA_W), .ACC_W(ACC_W)
    ) u_ima (
      .clk       (clk),
      .rst_n     (rst_n),
      .wr_en     (cfg_valid && cfg_cmd.kind == CFG_XBAR_ROW && cfg_cmd.ima == IMAW'(i)),
      .wr_xbar   (cfg_cmd.xbar),
      .wr_row    (cfg_cmd.row[RW-1:0]),
      .wr_data   (cfg_data[COLS*CELL_BITS-1:0]),
      .in_wr_en  (loading && load_ima == GW'(i)),
      .in_wr_idx (load_idx),
      .in_wr_data(rd_data),
      .start     (ima_start[i]),
      .busy      (ima_busy[i]),
      .out_valid (res_valid[i]),
      .out_ready (res_ready[i]),
      .out_col   (res_col[i]),
      .out_data  (res_data[i]),
      .out_last  (res_last[i])
    );
  end

  // ---------------------------------------------------------------- output side
  logic [IMAS-1:0] gnt;
  logic            load_out;     // output register takes a new flit this cycle
  logic            start_pend;
  logic [GW-1:0]   start_src;

  assign load_out = !out_valid || out_ready;

  rr_arbiter #(.N(IMAS)) u_arb (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (res_valid & {IMAS{!start_pend}}),
    .advance(load_out),
    .gnt    (gnt)
  );

  logic [GW-1:0] g;
  always_comb begin
    g = '0;
    for (int i = 0; i < IMAS; i++) if (gnt[i]) g = GW'(i);
  end

  assign res_ready = (load_out && !start_pend) ? gnt : '0;

  function automatic logic [DATA_W-1:0] scale(input logic [ACC_W-1:0] v, input logic [5:0] sh);
    logic [ACC_W-1:0] s;
    s = v >> sh;
    return (s > ACC_W'({DATA_W{1'b1}})) ? '1 : s[DATA_W-1:0];
  endfunction

  function automatic flit_t route_hdr(input ima_cfg_t c);
    flit_t f;
    f           = '0;
    f.x_lo      = c.x_lo;  f.x_hi = c.x_hi;
    f.y_lo      = c.y_lo;  f.y_hi = c.y_hi;
    f.z_lo      = c.z_lo;  f.z_hi = c.z_hi;
    f.port_mask = c.port_mask;
    f.ima       = c.dst_ima;
    return f;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_flit   <= '0;
      start_pend <= 1'b0;
      start_src  <= '0;
    end else if (load_out) begin
      if (start_pend) begin
        out_valid      <= 1'b1;
        out_flit       <= route_hdr(out_cfg[start_src]);
        out_flit.cmd   <= CMD_START;
        start_pend     <= 1'b0;
      end else if (gnt != '0) begin
        out_valid      <= out_cfg[g].enable;
        out_flit       <= route_hdr(out_cfg[g]);
        out_flit.cmd   <= out_cfg[g].use_acc ? CMD_ACC : CMD_WRITE;
        out_flit.index <= out_cfg[g].idx_base + IDXW'(res_col[g]);
        out_flit.data  <= scale(res_data[g], out_cfg[g].shift);
        if (res_last[g] && out_cfg[g].enable && out_cfg[g].send_start) begin
          start_pend <= 1'b1;
          start_src  <= g;
        end
      end else begin
        out_valid <= 1'b0;
      end
    end
  end

  // a flit offered to the router stays unchanged until it is taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_flit));

endmodule
