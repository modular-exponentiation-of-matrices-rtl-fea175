// matmul_ctrl: scheduler and memory manager of the improved multiplication.
//
// It runs function improved_matrix_mult: A and B are seen as KAPPA x KAPPA
// grids of 20x20 tiles. Z row-stores and two column-stores (Fig. 6) feed the
// M20x20 multiplier. Work is split into NPHASE = KAPPA^2/(Z-1) phases; phase
// p uses column tile j = p mod KAPPA and performs Z-1 iterations of D
// activations each, one per active row-store, producing the C tiles
// (i, j) with i = floor(p/PPS) + q mod KAPPA, q = 0..Z-2, PPS = KAPPA/(Z-1).
// While phase p computes, the other column-store is loaded with column tile
// p+1 and RPP = 20/PPS rows of the next row tile are loaded into the one
// idle row-store; every PPS phases that store becomes active and the store
// holding the lowest row tile retires and starts loading. The computed area
// thus moves diagonally through C (Fig. 7) and wraps round mod KAPPA.
//
// Three engines run side by side:
//   * compute: steps (phase, iteration, cycle); a phase may start only when
//     all loads issued for it have returned (else it stalls), an iteration
//     may end only when the write-back buffer can take its tile;
//   * issuer: issues the read commands of "job set" js, the loads needed by
//     phase js (job set 0 is the prologue: Z-1 row tiles and column tile 0).
//     Job set js >= 1 may start once phase js-1 has begun;
//   * response router: read data come back in order; a tag FIFO records
//     where each word goes (column/row store, store index, row group). Each
//     word holds VPW vectors, for rows VPW*g .. VPW*g+VPW-1 of the store.
//   * writer: copies a finished tile, writes it as CWORDS memory words.
//
// Memory layout (this design's choice; the paper gives none): a tile of 20
// rows of A (or 20 columns of B, i.e. rows of B^T) is WPT = 20*D/VPW words;
// word g*D + v holds vector v (elements 28v..28v+27) of rows VPW*g ..
// VPW*g+VPW-1, row VPW*g+r in bits [r*2N +: 2N]. Tile t of A is at
// a_base + t*WPT, of B at b_base + t*WPT. C tile (i,j) is at
// c_base + (i*KAPPA + j)*CWORDS, element (r,c) at bit 2*(20r+c).
//
// Memory port: a command channel (valid/ready, read or write + word
// address) and a write-data channel (valid/ready, data, byte mask, 1 =
// masked), as in the two FIFOs of the DDR2 user interface; read data return
// in order with rd_valid, and are always accepted. A write is offered on
// both channels at once and moves only when both are ready.
module matmul_ctrl
  import matmul_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned Z     = Z_DEF,
  parameter int unsigned KAPPA = kappa_of(N_DEF, D_DEF),
  parameter int unsigned VPW   = VPW_DEF,
  parameter int unsigned TAGQ  = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // run control
  input  logic                         start,
  input  logic [ADDR_W-1:0]            a_base,
  input  logic [ADDR_W-1:0]            b_base,
  input  logic [ADDR_W-1:0]            c_base,
  output logic                         busy,
  output logic                         done,
  // memory
  output logic                         cmd_valid,
  input  logic                         cmd_ready,
  output mem_cmd_t                     cmd,
  output logic                         wdf_valid,
  input  logic                         wdf_ready,
  output logic [MEM_W-1:0]             wdf_data,
  output logic [MEM_W/8-1:0]           wdf_mask,
  input  logic                         rd_valid,
  input  logic [MEM_W-1:0]             rd_data,
  // container loading
  output logic                         ld_valid,
  output logic                         ld_col,
  output logic [$clog2(Z)-1:0]         ld_store,
  output logic [$clog2(TILE/VPW)-1:0]  ld_group,
  output logic [VPW-1:0][N-1:0][1:0]   ld_vecs,
  // computation
  output logic                         act,
  output logic [$clog2(Z)-1:0]         act_row_store,
  output logic                         act_col_store,
  output logic                         mult_first,
  input  logic [TILE-1:0][TILE-1:0][1:0] tile_c,
  // event counters
  output logic [31:0]                  n_act,
  output logic [31:0]                  n_stall_load,
  output logic [31:0]                  n_stall_wb,
  output logic [31:0]                  n_row_swaps,
  output logic [31:0]                  n_wraps,
  output logic [31:0]                  n_rd_words,
  output logic [31:0]                  n_wr_words
);

  // ---------------------------------------------------------------- sizes
  localparam int unsigned GPT    = TILE / VPW;             // row groups per tile
  localparam int unsigned WPT    = GPT * D;                // words per tile
  localparam int unsigned PPS    = KAPPA / (Z - 1);        // phases per row-store swap
  localparam int unsigned RPP    = TILE / PPS;             // rows loaded per phase
  localparam int unsigned GPR    = RPP / VPW;              // row groups per phase
  localparam int unsigned NPHASE = KAPPA * PPS;            // = KAPPA^2/(Z-1)
  localparam int unsigned CWORDS = (TILE * TILE * 2 + MEM_W - 1) / MEM_W;
  localparam int unsigned ZW     = $clog2(Z);
  localparam int unsigned GW     = $clog2(GPT);
  localparam int unsigned TGW    = $clog2(TAGQ);

  initial begin
    if ((KAPPA % (Z - 1)) != 0) $error("matmul_ctrl: Z-1 must divide KAPPA");
    if ((TILE % PPS) != 0 || (RPP % VPW) != 0 || (TILE % VPW) != 0)
      $error("matmul_ctrl: rows per phase must be a multiple of VPW");
    if (VPW * 2 * N > MEM_W) $error("matmul_ctrl: VPW vectors do not fit a word");
    if (D < CWORDS) $error("matmul_ctrl: D must be at least CWORDS");
  end

  run_state_t state;

  // ------------------------------------------------------------- compute
  logic [15:0]   cp;          // phase
  logic [15:0]   cq;          // iteration within phase
  logic [15:0]   cc;          // activation within iteration
  logic [15:0]   pps_cnt;     // cp mod PPS
  logic [15:0]   base_tile;   // row tile of iteration 0, mod KAPPA
  logic [ZW-1:0] base_store;  // its row-store
  logic [15:0]   cur_tile;    // row tile of iteration cq
  logic [ZW-1:0] cur_store;
  logic [15:0]   col_j;       // column tile, cp mod KAPPA
  logic          col_store;
  logic [15:0]   phases_begun;
  logic [15:0]   loaded_js;   // job sets whose data have fully arrived
  logic          tile_pending;
  logic [15:0]   pend_i, pend_j;

  // writer
  logic                           wb_busy;
  logic [CWORDS*MEM_W-1:0]        wb_flat;
  logic [ADDR_W-1:0]              wb_addr;
  logic [$clog2(CWORDS+1)-1:0]    wb_w;

  logic running, data_ok, cap, go, last_act, last_iter, last_phase;

  always_comb begin
    running    = (state == RUN_BUSY);
    data_ok    = (cc != 0) || (cq != 0) || (loaded_js > cp);
    cap        = tile_pending && !wb_busy;
    go         = running && data_ok && (!tile_pending || cap);
    last_act   = (cc == 16'(D - 1));
    last_iter  = (cq == 16'(Z - 2));
    last_phase = (cp == 16'(NPHASE - 1));
  end

  assign act           = go;
  assign act_row_store = cur_store;
  assign act_col_store = col_store;
  assign mult_first    = (cc == 0);
  assign busy          = (state == RUN_BUSY) || (state == RUN_FLUSH);
  assign done          = (state == RUN_DONE);

  function automatic logic [ZW-1:0] inc_store(logic [ZW-1:0] s);
    return (s == ZW'(Z - 1)) ? '0 : s + 1'b1;
  endfunction

  function automatic logic [15:0] inc_tile(logic [15:0] t);
    return (t == 16'(KAPPA - 1)) ? '0 : t + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= RUN_IDLE;
      cp <= '0; cq <= '0; cc <= '0; pps_cnt <= '0;
      base_tile    <= '0; base_store <= '0;
      cur_tile     <= '0; cur_store  <= '0;
      col_j        <= '0; col_store  <= 1'b0;
      phases_begun <= '0;
      tile_pending <= 1'b0;
      pend_i <= '0; pend_j <= '0;
      n_act <= '0; n_stall_load <= '0; n_stall_wb <= '0;
      n_row_swaps <= '0; n_wraps <= '0;
    end else begin
      case (state)
        RUN_IDLE, RUN_DONE: if (start) begin
          state        <= RUN_BUSY;
          cp <= '0; cq <= '0; cc <= '0; pps_cnt <= '0;
          base_tile    <= '0; base_store <= '0;
          cur_tile     <= '0; cur_store  <= '0;
          col_j        <= '0; col_store  <= 1'b0;
          phases_begun <= '0;
          tile_pending <= 1'b0;
          n_act <= '0; n_stall_load <= '0; n_stall_wb <= '0;
          n_row_swaps <= '0; n_wraps <= '0;
        end
        RUN_FLUSH: begin
          if (cap) tile_pending <= 1'b0;
          if (!tile_pending && !wb_busy) state <= RUN_DONE;
        end
        default: ;
      endcase

      if (running && !data_ok)                              n_stall_load <= n_stall_load + 1;
      if (running && tile_pending && wb_busy)               n_stall_wb   <= n_stall_wb + 1;

      if (running && cap && !go) tile_pending <= 1'b0;

      if (go) begin
        n_act <= n_act + 1;
        if (cc == 0 && cq == 0) phases_begun <= phases_begun + 1'b1;
        if (!last_act) begin
          cc <= cc + 1'b1;
          tile_pending <= 1'b0;
        end else begin
          cc           <= '0;
          tile_pending <= 1'b1;
          pend_i       <= cur_tile;
          pend_j       <= col_j;
          if (!last_iter) begin
            cq        <= cq + 1'b1;
            cur_tile  <= inc_tile(cur_tile);
            cur_store <= inc_store(cur_store);
            if (cur_tile == 16'(KAPPA - 1)) n_wraps <= n_wraps + 1;
          end else begin
            cq <= '0;
            if (last_phase) begin
              state <= RUN_FLUSH;
            end else begin
              cp        <= cp + 1'b1;
              col_j     <= inc_tile(col_j);
              col_store <= ~col_store;
              if (pps_cnt == 16'(PPS - 1)) begin
                pps_cnt     <= '0;
                base_tile   <= inc_tile(base_tile);
                base_store  <= inc_store(base_store);
                cur_tile    <= inc_tile(base_tile);
                cur_store   <= inc_store(base_store);
                n_row_swaps <= n_row_swaps + 1;
              end else begin
                pps_cnt   <= pps_cnt + 1'b1;
                cur_tile  <= base_tile;
                cur_store <= base_store;
              end
            end
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- issuer
  typedef enum logic [1:0] {ISS_WAIT, ISS_COL, ISS_ROW, ISS_END} iss_t;

  typedef struct packed {
    logic          col;
    logic [ZW-1:0] store;
    logic [GW-1:0] group;
    logic          last;
  } tag_t;

  iss_t          iss;
  logic [15:0]   js;
  logic [15:0]   iss_col_tile;
  logic          iss_col_store;
  logic [15:0]   iss_L;          // row-tile load index (sequential, not reduced)
  logic [15:0]   iss_g, iss_g_end, iss_v;
  logic [15:0]   js_m1;          // js - 1
  logic          iss_need_rows;
  logic          tq_full;
  logic          rd_req, fire_r, fire_w;
  logic          seg_end, iss_last;
  tag_t          iss_tag;
  logic [ADDR_W-1:0] iss_addr;

  assign js_m1 = js - 1'b1;

  always_comb begin
    seg_end  = (iss_v == 16'(D - 1)) && (iss_g == iss_g_end);
    if (iss == ISS_COL)
      iss_last = seg_end && ((js == 0) || !iss_need_rows);
    else
      iss_last = seg_end && (js != 0);
    iss_tag.col   = (iss == ISS_COL);
    iss_tag.store = (iss == ISS_COL) ? ZW'(iss_col_store) : ZW'(iss_L % Z);
    iss_tag.group = GW'(iss_g);
    iss_tag.last  = iss_last;
    if (iss == ISS_COL)
      iss_addr = b_base + ADDR_W'(iss_col_tile) * ADDR_W'(WPT) + ADDR_W'(iss_g) * ADDR_W'(D) + ADDR_W'(iss_v);
    else
      iss_addr = a_base + ADDR_W'(iss_L % KAPPA) * ADDR_W'(WPT) + ADDR_W'(iss_g) * ADDR_W'(D) + ADDR_W'(iss_v);
    rd_req = running && (iss == ISS_COL || iss == ISS_ROW) && !tq_full && !wb_busy;
    fire_r = rd_req && cmd_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss <= ISS_END;
      js  <= '0;
      iss_col_tile <= '0; iss_col_store <= 1'b0; iss_L <= '0;
      iss_g <= '0; iss_g_end <= '0; iss_v <= '0; iss_need_rows <= 1'b0;
    end else if ((state == RUN_IDLE || state == RUN_DONE) && start) begin
      // job set 0, the prologue: row tiles 0..Z-2, then column tile 0
      iss <= ISS_ROW;
      js  <= '0;
      iss_L <= '0; iss_g <= '0; iss_g_end <= 16'(GPT - 1); iss_v <= '0;
      iss_col_tile <= '0; iss_col_store <= 1'b0; iss_need_rows <= 1'b1;
    end else begin
      case (iss)
        ISS_WAIT: begin
          if (js >= 16'(NPHASE)) begin
            iss <= ISS_END;
          end else if (phases_begun >= js) begin
            iss           <= ISS_COL;
            iss_col_tile  <= 16'(js % KAPPA);
            iss_col_store <= js[0];
            iss_L         <= 16'(js_m1 / PPS + Z - 1);
            iss_g         <= '0;
            iss_g_end     <= 16'(GPT - 1);
            iss_v         <= '0;
            iss_need_rows <= (PPS * ((js_m1 / PPS + Z - 1) - (Z - 2))) < NPHASE;
          end
        end
        ISS_COL, ISS_ROW: if (fire_r) begin
          if (!seg_end) begin
            if (iss_v == 16'(D - 1)) begin
              iss_v <= '0;
              iss_g <= iss_g + 1'b1;
            end else begin
              iss_v <= iss_v + 1'b1;
            end
          end else begin
            iss_v <= '0;
            if (iss == ISS_ROW && js == 0 && iss_L != 16'(Z - 2)) begin
              iss_L <= iss_L + 1'b1;                  // next prologue row tile
              iss_g <= '0;
            end else if (iss == ISS_ROW && js == 0) begin
              iss   <= ISS_COL;                       // prologue column tile
              iss_g <= '0;
            end else if (iss == ISS_COL && js != 0 && iss_need_rows) begin
              iss       <= ISS_ROW;                   // rows of this phase
              iss_g     <= 16'((js_m1 % PPS) * GPR);
              iss_g_end <= 16'((js_m1 % PPS) * GPR + GPR - 1);
            end else begin
              iss <= ISS_WAIT;
              js  <= js + 1'b1;
            end
          end
        end
        default: ;
      endcase
    end
  end

  // -------------------------------------------------------- tag FIFO, router
  tag_t             tq [TAGQ];
  logic [TGW:0]     tq_wp, tq_rp;
  tag_t             tq_head;

  always_comb begin
    tq_full = (tq_wp - tq_rp) == (TGW+1)'(TAGQ);
    tq_head = tq[tq_rp[TGW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq_wp <= '0;
      tq_rp <= '0;
      loaded_js <= '0;
      n_rd_words <= '0;
    end else begin
      if ((state == RUN_IDLE || state == RUN_DONE) && start) begin
        loaded_js  <= '0;
        n_rd_words <= '0;
      end
      if (fire_r) begin
        tq[tq_wp[TGW-1:0]] <= iss_tag;
        tq_wp <= tq_wp + 1'b1;
      end
      if (rd_valid) begin
        tq_rp <= tq_rp + 1'b1;
        n_rd_words <= n_rd_words + 1;
        if (tq_head.last) loaded_js <= loaded_js + 1'b1;
      end
    end
  end

  always_comb begin
    ld_valid = rd_valid;
    ld_col   = tq_head.col;
    ld_store = tq_head.store;
    ld_group = tq_head.group;
    for (int r = 0; r < int'(VPW); r++) ld_vecs[r] = rd_data[r*2*N +: 2*N];
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid |-> (tq_wp != tq_rp))
    else $error("matmul_ctrl: read data without an outstanding read");

  // ---------------------------------------------------------------- writer
  always_comb begin
    fire_w    = wb_busy && cmd_ready && wdf_ready;
    cmd_valid = (wb_busy && wdf_ready) || rd_req;
    cmd.write = wb_busy;
    cmd.addr  = wb_busy ? wb_addr + ADDR_W'(wb_w) : iss_addr;
    wdf_valid = wb_busy && cmd_ready;
    wdf_data  = wb_flat[wb_w*MEM_W +: MEM_W];
    wdf_mask  = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_busy    <= 1'b0;
      wb_flat    <= '0;
      wb_addr    <= '0;
      wb_w       <= '0;
      n_wr_words <= '0;
    end else begin
      if ((state == RUN_IDLE || state == RUN_DONE) && start) n_wr_words <= '0;
      if (cap) begin
        wb_busy <= 1'b1;
        wb_flat <= (CWORDS*MEM_W)'(tile_c);
        wb_addr <= c_base + (ADDR_W'(pend_i) * ADDR_W'(KAPPA) + ADDR_W'(pend_j)) * ADDR_W'(CWORDS);
        wb_w    <= '0;
      end else if (fire_w) begin
        n_wr_words <= n_wr_words + 1;
        if (wb_w == ($clog2(CWORDS+1))'(CWORDS - 1)) wb_busy <= 1'b0;
        else wb_w <= wb_w + 1'b1;
      end
    end
  end

endmodule
