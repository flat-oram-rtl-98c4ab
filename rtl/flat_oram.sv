// flat_oram: Flat ORAM write-only oblivious RAM controller (top level).
//
// The controller sits between the last-level cache and an untrusted DRAM.
// Reads are not hidden: a read looks up the block's position and fetches
// that one line.  Writes are hidden: a dirty block evicted from the cache
// is parked in the stash, and in the background the controller draws a
// uniformly random physical location for it.  If the Occupancy Map (OccMap,
// one bit per physical block) says the location is vacant, the block is
// written there; otherwise the live block already there is read,
// re-encrypted and written back unchanged, and a new location is drawn.
// Every write therefore lands on a uniformly random location.
//
// Metadata is organised as a unified recursive structure (levels 0..3):
// level 0 holds the data blocks and, after them, the OccMap blocks; each
// higher level holds PosMap blocks of POSMAP_X write counters for the level
// below; the counters of level 3 live in the on-chip map.  A block's
// position is PRF(id || counter) (compressed PosMap), and the counter is
// incremented on every eviction attempt.  PosMap and OccMap blocks are
// cached in the PLB; dirty PLB victims go to the stash and are relocated
// like data blocks.  A zero counter means "never written": such a block reads
// as all zeros and owns no DRAM location, so start-up (Algorithm 1) is the
// eviction of the N zero data blocks fed in by oram_init.
//
// Each DRAM line carries the counter-mode encrypted block and its PMMAC tag
// MAC(id || counter || data), checked on every read (rd_resp_auth_ok).
// When the stash reaches STASH_SIZE-BE_RESERVE blocks, reads are held off
// (background eviction) until it drains to BE_LOW.  With periodic_en set, one
// access starts PERIOD cycles after the previous one ended; every access
// writes DRAM (a read adds a dummy rewrite of a random location, an idle
// slot is a dummy rewrite, an eviction slot is one attempt).
//
// Interfaces: rd_req_* is a valid/ready read request for a data block id;
// the answer appears as a one-cycle rd_resp_valid pulse.  wb_* takes cache
// write-backs (wb_dirty = 0 ones are acknowledged and dropped).  dram_req_*
// is valid/ready with one outstanding request; a read's line returns on a
// dram_resp_valid pulse.  Addresses on the DRAM port are block addresses.
//
// Follows the paper: Algorithm 2 eviction loop with OccMap collision check,
// stash of dirty blocks only, OccMap blocks as ordinary relocated blocks,
// recursive PosMap through a PLB, counter increment on failed attempts,
// PMMAC, background eviction, periodic mode.  This design's own choices:
// direct-mapped PLB, 32 x 32-bit counters per PosMap block, the old location
// is vacated at the start of the first eviction attempt (the stash holds the
// only live copy by then) and is derived from the current counter, lazy
// initialisation through zero counters, the placeholder PRF, and the
// background-eviction thresholds.
//
// Reset is asynchronous and active low.  The assertions at the end are
// disabled while rst_n is low, which a lint tool reports as rst_n being used
// both synchronously and asynchronously; it drives no logic.
module flat_oram
  import flat_oram_pkg::*;
#(
  parameter longint unsigned N_DATA      = 64'd33554432, // 4 GB / 128 B
  parameter int unsigned     PHYS_AW     = 26,           // 8 GB / 128 B
  parameter int unsigned     PLB_ENTRIES = 256,          // 32 KB
  parameter int unsigned     STASH_SIZE  = 100,
  parameter int unsigned     PERIOD      = 100,
  parameter int unsigned     BE_RESERVE  = 16,
  parameter int unsigned     BE_LOW      = 64,
  localparam int unsigned    SIW         = $clog2(STASH_SIZE)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] key,
  input  logic        periodic_en,
  input  logic        init_start,
  output logic        init_busy,
  // read requests from the LLC
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  id_t         rd_req_addr,
  output logic        rd_resp_valid,
  output blk_t        rd_resp_data,
  output pa_t         rd_resp_pos,
  output logic        rd_resp_auth_ok,
  // write-backs from the LLC
  input  logic        wb_valid,
  output logic        wb_ready,
  input  id_t         wb_addr,
  input  blk_t        wb_data,
  input  logic        wb_dirty,
  // DRAM
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output logic        dram_req_we,
  output pa_t         dram_req_addr,
  output line_t       dram_req_wdata,
  input  logic        dram_resp_valid,
  input  line_t       dram_resp_rdata,
  // status
  output logic [SIW:0] stash_count,
  output logic        bg_active,
  output logic        integrity_error,
  output logic        stash_overflow,
  output stats_t      stats
);
  // ---------------------------------------------------------------------
  // Geometry of the unified id space
  localparam longint unsigned LB1 = level_base(N_DATA, PHYS_AW, 1);
  localparam longint unsigned LB2 = level_base(N_DATA, PHYS_AW, 2);
  localparam longint unsigned LB3 = level_base(N_DATA, PHYS_AW, 3);
  localparam longint unsigned LC3 = level_count(N_DATA, PHYS_AW, 3);
  localparam int unsigned     TOP = NUM_LEVELS - 1;
  localparam int unsigned     ONCHIP = int'(LC3);
  localparam int unsigned     OAW = (ONCHIP > 1) ? $clog2(ONCHIP) : 1;
  localparam int unsigned     XS  = $clog2(POSMAP_X);
  localparam int unsigned     OS  = $clog2(OCC_PER_BLK);
  localparam id_t             NONE_POS = '1;

  function automatic int unsigned lvl_of(input id_t id);
    if (64'(id) < LB1) return 0;
    if (64'(id) < LB2) return 1;
    if (64'(id) < LB3) return 2;
    return 3;
  endfunction

  function automatic id_t base_of(input int unsigned l);
    case (l)
      0:       return '0;
      1:       return id_t'(LB1);
      2:       return id_t'(LB2);
      default: return id_t'(LB3);
    endcase
  endfunction

  function automatic id_t parent(input id_t id);
    int unsigned l;
    l = lvl_of(id);
    return base_of(l + 1) + ((id - base_of(l)) >> XS);
  endfunction

  function automatic logic [XS-1:0] slot_of(input id_t id);
    return XS'(id - base_of(lvl_of(id)));
  endfunction

  function automatic id_t anc(input id_t id, input int unsigned l);
    id_t x;
    x = id;
    for (int k = 0; k < int'(TOP); k++)
      if (lvl_of(x) < l) x = parent(x);
    return x;
  endfunction

  function automatic id_t occ_id(input pa_t s);
    return id_t'(N_DATA) + (s >> OS);
  endfunction

  function automatic ctr_t ctr_in(input blk_t b, input logic [XS-1:0] sl);
    return b[sl*CTR_W +: CTR_W];
  endfunction

  function automatic blk_t ctr_put(input blk_t b, input logic [XS-1:0] sl,
                                   input ctr_t c);
    blk_t r;
    r = b;
    r[sl*CTR_W +: CTR_W] = c;
    return r;
  endfunction

  // ---------------------------------------------------------------------
  typedef enum logic [5:0] {
    S_IDLE, S_RD_STASH, S_RD_CTR, S_RD_DATA, S_RESP,
    S_EV_START, S_CLR_CTR, S_CLR_BIT, S_INC_ENS, S_INC, S_TEST, S_EV_NEXT,
    S_DUMMY, S_RW_WR, S_DONE,
    S_EN_UP, S_EN_DOWN, S_EN_VIC, S_EN_SRC, S_EN_FILL,
    S_DRAM, S_DRAM_RESP
  } state_t;

  state_t state, ret_en, ret_rw, ret_dr;

  id_t            cur_id;     // block being read or evicted
  logic [SIW-1:0] ev_idx;     // its stash slot
  ctr_t           c_reg;      // its counter
  pa_t            s_reg;      // its position
  id_t            en_id;      // ENSURE target
  int unsigned    en_l, en_base;
  ctr_t           en_c;
  line_t          line_reg;
  iv_t            iv_ctr;
  logic [63:0]    dummy_ctr;
  logic           wrote;      // this access wrote DRAM

  // ---------------------------------------------------------------------
  // Sub-blocks
  id_t   plb_lk_id, stash_lk_id;
  logic  plb_hit;
  blk_t  plb_data;
  logic  vic_valid, vic_dirty, vic_oldv;
  id_t   vic_id;
  logic  fill_valid, fill_dirty, fill_oldv;
  id_t   fill_id;
  blk_t  fill_data;
  logic  plbw_valid;
  id_t   plbw_id;
  blk_t  plbw_data;

  plb #(.ENTRIES(PLB_ENTRIES)) u_plb (
    .clk, .rst_n,
    .lk_id(plb_lk_id), .lk_hit(plb_hit), .lk_data(plb_data),
    .vic_valid, .vic_dirty, .vic_old_valid(vic_oldv), .vic_id,
    .fill_valid, .fill_id, .fill_data, .fill_dirty, .fill_old_valid(fill_oldv),
    .wr_valid(plbw_valid), .wr_id(plbw_id), .wr_data(plbw_data)
  );

  logic           st_ins_valid, st_ins_oldv, st_ins_ok;
  id_t            st_ins_id;
  blk_t           st_ins_data;
  logic           st_lk_hit;
  logic [SIW-1:0] st_lk_idx, st_rd_idx, st_rm_idx, st_hd_idx;
  logic           st_rd_valid, st_rd_oldv, st_rm_valid, st_clr_valid, st_hd_valid;
  id_t            st_rd_id;
  blk_t           st_rd_data;

  stash #(.SIZE(STASH_SIZE)) u_stash (
    .clk, .rst_n,
    .ins_valid(st_ins_valid), .ins_id(st_ins_id), .ins_data(st_ins_data),
    .ins_old_valid(st_ins_oldv), .ins_ok(st_ins_ok),
    .lk_id(stash_lk_id), .lk_hit(st_lk_hit), .lk_idx(st_lk_idx),
    .rd_idx(st_rd_idx), .rd_valid(st_rd_valid), .rd_id(st_rd_id),
    .rd_data(st_rd_data), .rd_old_valid(st_rd_oldv),
    .rm_valid(st_rm_valid), .rm_idx(st_rm_idx),
    .clr_valid(st_clr_valid), .clr_idx(ev_idx),
    .hd_valid(st_hd_valid), .hd_idx(st_hd_idx), .count(stash_count)
  );

  logic [OAW-1:0] om_raddr, om_waddr;
  ctr_t           om_rdata, om_wdata;
  logic           om_we;

  onchip_posmap #(.ENTRIES(ONCHIP)) u_onchip (
    .clk, .rst_n, .raddr(om_raddr), .rdata(om_rdata),
    .we(om_we), .waddr(om_waddr), .wdata(om_wdata)
  );

  logic bg_wb_room, bg_enter;
  bg_evict #(.SIZE(STASH_SIZE), .RESERVE(BE_RESERVE), .LOW(BE_LOW)) u_bg (
    .clk, .rst_n, .count(stash_count), .active(bg_active),
    .wb_room(bg_wb_room), .enter(bg_enter)
  );

  logic slot, acc_start, acc_done;
  periodic_timer #(.PERIOD(PERIOD)) u_timer (
    .clk, .rst_n, .enable(periodic_en), .start(acc_start), .done(acc_done),
    .slot
  );

  logic init_wb_valid, init_wb_ready;
  id_t  init_wb_id;
  blk_t init_wb_data;
  oram_init #(.N_DATA(N_DATA)) u_init (
    .clk, .rst_n, .start(init_start), .busy(init_busy),
    .wb_valid(init_wb_valid), .wb_id(init_wb_id), .wb_data(init_wb_data),
    .wb_ready(init_wb_ready)
  );

  // position generator: block position of (pg_id, pg_ctr)
  id_t  pg_id;
  ctr_t pg_ctr;
  pa_t  pg_pos;
  pos_gen #(.PHYS_AW(PHYS_AW)) u_pos (.key, .id(pg_id), .ctr(pg_ctr), .pos(pg_pos));

  // decryption of line_reg, encryption under the next nonce
  logic [BLOCK_BITS+MAC_W-1:0] dec_out, enc_in, enc_out;
  dram_line_t                  lr;
  assign lr = dram_line_t'(line_reg);
  crypt_engine u_dec (.key, .iv(lr.iv), .din({lr.mac, lr.data}), .dout(dec_out));
  crypt_engine u_enc (.key, .iv(iv_ctr), .din(enc_in), .dout(enc_out));

  id_t  mac_id;
  ctr_t mac_ctr;
  blk_t mac_data;
  mac_t mac_out, dec_mac;
  logic mac_ok;
  assign dec_mac = dec_out[BLOCK_BITS +: MAC_W];
  pmmac u_mac (.key, .id(mac_id), .ctr(mac_ctr), .data(mac_data),
               .mac_in(dec_mac), .mac_out, .ok(mac_ok));

  // OccMap bit of s_reg in the PLB block being looked up
  logic occ_set, occ_bit;
  blk_t occ_blk;
  occmap_bit u_occ (.blk_in(plb_data), .pos(s_reg), .set(occ_set),
                    .occupied(occ_bit), .blk_out(occ_blk));

  // ---------------------------------------------------------------------
  // Combinational control
  id_t  en_b;         // block handled at the current ENSURE level
  logic en_top;
  logic ev_alive;     // the block under eviction is still in its stash slot
  logic cur_top;      // cur_id is a top-level PosMap block
  ctr_t cur_ctr;      // counter of cur_id (its parent must be in the PLB)
  logic wb_take;

  always_comb begin
    en_b     = anc(en_id, en_l);
    en_top   = (en_l == TOP);
    cur_top  = (lvl_of(cur_id) == TOP);
    ev_alive = st_rd_valid && st_rd_id == cur_id;

    plb_lk_id   = parent(cur_id);
    stash_lk_id = cur_id;
    st_rd_idx   = ev_idx;
    om_raddr    = (state == S_EN_DOWN) ? OAW'(en_b - id_t'(LB3))
                                       : OAW'(cur_id - id_t'(LB3));
    cur_ctr     = cur_top ? om_rdata : ctr_in(plb_data, slot_of(cur_id));
    pg_id       = cur_id;
    pg_ctr      = c_reg;
    occ_set     = 1'b0;
    enc_in      = dec_out;
    mac_id      = cur_id;
    mac_ctr     = c_reg;
    mac_data    = dec_out[BLOCK_BITS-1:0];

    case (state)
      S_RD_STASH: st_rd_idx = st_lk_idx;
      S_RD_CTR:   begin pg_ctr = cur_ctr; end
      S_CLR_CTR:  begin pg_ctr = cur_ctr; end
      S_CLR_BIT:  begin plb_lk_id = occ_id(s_reg); occ_set = 1'b0; end
      S_INC:      begin pg_ctr = cur_ctr + 1'b1; end
      S_TEST: begin
        plb_lk_id = occ_id(s_reg);
        occ_set   = 1'b1;
        mac_data  = st_rd_data;
        enc_in    = {mac_out, st_rd_data};
      end
      S_EN_UP:   begin plb_lk_id = en_b; stash_lk_id = en_b; end
      S_EN_DOWN: begin plb_lk_id = parent(en_b); stash_lk_id = en_b; end
      S_EN_VIC:  begin plb_lk_id = en_b; end
      S_EN_SRC: begin
        stash_lk_id = en_b;
        st_rd_idx   = st_lk_idx;
        pg_id       = en_b;
        pg_ctr      = en_c;
      end
      S_EN_FILL: begin mac_id = en_b; mac_ctr = en_c; end
      default: ;
    endcase
  end

  // write-back port: blocked while the stash slots are being moved around
  always_comb begin
    wb_take = 1'b0;
    init_wb_ready = 1'b0;
    wb_ready = 1'b0;
    if (!(state inside {S_EN_VIC, S_EN_SRC, S_TEST})) begin
      if (init_busy) init_wb_ready = bg_wb_room;
      else begin
        wb_ready = !wb_dirty || bg_wb_room;
        wb_take  = wb_valid && wb_dirty && bg_wb_room;
      end
    end
  end

  always_comb begin
    st_ins_valid = 1'b0;
    st_ins_id    = wb_addr;
    st_ins_data  = wb_data;
    st_ins_oldv  = 1'b1;
    if (state == S_EN_VIC) begin
      st_ins_valid = vic_valid && vic_dirty;
      st_ins_id    = vic_id;
      st_ins_data  = plb_data;
      st_ins_oldv  = vic_oldv;
    end else if (init_busy) begin
      st_ins_valid = init_wb_valid && init_wb_ready;
      st_ins_id    = init_wb_id;
      st_ins_data  = init_wb_data;
    end else begin
      st_ins_valid = wb_take;
    end
  end

  assign rd_req_ready = (state == S_IDLE) && slot && !bg_active && !init_busy;

  // ---------------------------------------------------------------------
  // Main sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      ret_en          <= S_IDLE;
      ret_rw          <= S_IDLE;
      ret_dr          <= S_IDLE;
      cur_id          <= '0;
      ev_idx          <= '0;
      c_reg           <= '0;
      s_reg           <= '0;
      en_id           <= '0;
      en_l            <= 0;
      en_base         <= 0;
      en_c            <= '0;
      line_reg        <= '0;
      iv_ctr          <= '0;
      dummy_ctr       <= '0;
      wrote           <= 1'b0;
      rd_resp_valid   <= 1'b0;
      rd_resp_data    <= '0;
      rd_resp_pos     <= '0;
      rd_resp_auth_ok <= 1'b0;
      dram_req_valid  <= 1'b0;
      dram_req_we     <= 1'b0;
      dram_req_addr   <= '0;
      dram_req_wdata  <= '0;
      integrity_error <= 1'b0;
      stash_overflow  <= 1'b0;
      stats           <= '0;
    end else begin
      rd_resp_valid <= 1'b0;
      if (bg_enter) stats.bg_phases <= stats.bg_phases + 1;
      if (wb_valid && wb_ready && !wb_dirty)
        stats.clean_drops <= stats.clean_drops + 1;
      if (st_ins_valid && !st_ins_ok) stash_overflow <= 1'b1;

      unique case (state)
        // ---------------------------------------------------------------
        S_IDLE: begin
          wrote      <= 1'b0;
          if (rd_req_ready && rd_req_valid) begin
            cur_id     <= rd_req_addr;
            state      <= S_RD_STASH;
          end else if (slot && st_hd_valid) begin
            ev_idx <= st_hd_idx;
            state  <= S_EV_START;
          end else if (slot && periodic_en) begin
            state <= S_DUMMY;
          end
        end

        // ---------------------------------------------------------------
        // ORAMRead
        S_RD_STASH: begin
          stats.reads <= stats.reads + 1;
          if (st_lk_hit) begin
            stats.stash_read_hits <= stats.stash_read_hits + 1;
            rd_resp_data    <= st_rd_data;
            rd_resp_pos     <= NONE_POS;
            rd_resp_auth_ok <= 1'b1;
            state           <= S_RESP;
          end else begin
            en_id   <= parent(cur_id);
            en_l    <= lvl_of(parent(cur_id));
            en_base <= lvl_of(parent(cur_id));
            ret_en  <= S_RD_CTR;
            state   <= S_EN_UP;
          end
        end
        S_RD_CTR: begin
          c_reg <= cur_ctr;
          if (cur_ctr == '0) begin
            rd_resp_data    <= '0;
            rd_resp_pos     <= NONE_POS;
            rd_resp_auth_ok <= 1'b1;
            state           <= S_RESP;
          end else begin
            s_reg          <= pg_pos;
            dram_req_valid <= 1'b1;
            dram_req_we    <= 1'b0;
            dram_req_addr  <= pg_pos;
            ret_dr         <= S_RD_DATA;
            state          <= S_DRAM;
          end
        end
        S_RD_DATA: begin
          rd_resp_data    <= dec_out[BLOCK_BITS-1:0];
          rd_resp_pos     <= s_reg;
          rd_resp_auth_ok <= mac_ok;
          if (!mac_ok) begin
            integrity_error       <= 1'b1;
            stats.integrity_fails <= stats.integrity_fails + 1;
          end
          state <= S_RESP;
        end
        S_RESP: begin
          rd_resp_valid <= 1'b1;
          // periodic mode: every read is paired with a dummy rewrite
          state <= periodic_en ? S_DUMMY : S_DONE;
        end

        // ---------------------------------------------------------------
        // EvictStash: vacate the old location once, then attempt
        S_EV_START: begin
          cur_id <= st_rd_id;
          if (st_rd_oldv) begin
            if (lvl_of(st_rd_id) == TOP) state <= S_CLR_CTR;
            else begin
              en_id   <= parent(st_rd_id);
              en_l    <= lvl_of(parent(st_rd_id));
              en_base <= lvl_of(parent(st_rd_id));
              ret_en  <= S_CLR_CTR;
              state   <= S_EN_UP;
            end
          end else state <= S_INC_ENS;
        end
        S_CLR_CTR: begin
          // a block that was never written owns no location
          if (cur_ctr == '0) state <= S_INC_ENS;
          else begin
          s_reg   <= pg_pos;
          en_id   <= occ_id(pg_pos);
          en_l    <= 0;
          en_base <= 0;
          ret_en  <= S_CLR_BIT;
          state   <= S_EN_UP;
          end
        end
        S_CLR_BIT: begin
          // the aborted case: the block was pulled into the PLB meanwhile
          state <= ev_alive ? S_INC_ENS : S_DONE;
        end
        S_INC_ENS: begin
          if (!ev_alive) state <= S_DONE;
          else if (cur_top) state <= S_INC;
          else begin
            en_id   <= parent(cur_id);
            en_l    <= lvl_of(parent(cur_id));
            en_base <= lvl_of(parent(cur_id));
            ret_en  <= S_INC;
            state   <= S_EN_UP;
          end
        end
        S_INC: begin
          if (!ev_alive) state <= S_DONE;
          else begin
            c_reg   <= cur_ctr + 1'b1;
            s_reg   <= pg_pos;
            en_id   <= occ_id(pg_pos);
            en_l    <= 0;
            en_base <= 0;
            ret_en  <= S_TEST;
            state   <= S_EN_UP;
          end
        end
        S_TEST: begin
          if (!ev_alive) state <= S_DONE;
          else if (!occ_bit) begin
            // vacant: mark, write the block, leave the stash
            stats.evictions <= stats.evictions + 1;
            dram_req_valid  <= 1'b1;
            dram_req_we     <= 1'b1;
            dram_req_addr   <= s_reg;
            dram_req_wdata  <= {iv_ctr, enc_out};
            iv_ctr          <= iv_ctr + 1;
            wrote           <= 1'b1;
            ret_dr          <= S_DONE;
            state           <= S_DRAM;
          end else begin
            // collision: re-encrypt the resident block in place
            stats.collisions <= stats.collisions + 1;
            dram_req_valid   <= 1'b1;
            dram_req_we      <= 1'b0;
            dram_req_addr    <= s_reg;
            ret_dr           <= S_RW_WR;
            ret_rw           <= S_EV_NEXT;
            state            <= S_DRAM;
          end
        end
        S_EV_NEXT: begin
          // Algorithm 2 retries until a vacant slot is found; in periodic
          // mode one attempt is one access.
          state <= periodic_en ? S_DONE : S_INC_ENS;
        end

        // ---------------------------------------------------------------
        // read / re-encrypt / write of one location (collision, dummy)
        S_DUMMY: begin
          stats.dummy_rewrites <= stats.dummy_rewrites + 1;
          dummy_ctr      <= dummy_ctr + 1;
          dram_req_valid <= 1'b1;
          dram_req_we    <= 1'b0;
          dram_req_addr  <= block_pos(key ^ TWEAK_DUMMY, id_t'(dummy_ctr[31:0]),
                                      ctr_t'(dummy_ctr[63:32]), PHYS_AW);
          ret_dr         <= S_RW_WR;
          ret_rw         <= S_DONE;
          state          <= S_DRAM;
        end
        S_RW_WR: begin
          dram_req_valid <= 1'b1;
          dram_req_we    <= 1'b1;
          dram_req_wdata <= {iv_ctr, enc_out};
          iv_ctr         <= iv_ctr + 1;
          wrote          <= 1'b1;
          ret_dr         <= ret_rw;
          state          <= S_DRAM;
        end

        S_DONE: begin
          // a periodic slot must always write DRAM
          if (periodic_en && !wrote) state <= S_DUMMY;
          else                       state <= S_IDLE;
        end

        // ---------------------------------------------------------------
        // ENSURE(en_id): bring a PosMap/OccMap block into the PLB, walking
        // up the hierarchy to the first cached ancestor and back down.
        S_EN_UP: begin
          if (plb_hit) stats.plb_hits <= stats.plb_hits + 1;
          if (plb_hit) begin
            if (en_l == en_base) state <= ret_en;
            else begin
              en_l  <= en_l - 1;
              state <= S_EN_DOWN;
            end
          end else if (st_lk_hit || en_top) begin
            state <= S_EN_DOWN;
          end else begin
            en_l <= en_l + 1;
          end
        end
        S_EN_DOWN: begin
          // read the counter before the fill can displace the parent
          en_c        <= en_top ? om_rdata : ctr_in(plb_data, slot_of(en_b));
          state       <= S_EN_VIC;
        end
        S_EN_VIC: begin
          if (vic_valid && vic_dirty)
            stats.plb_dirty_victims <= stats.plb_dirty_victims + 1;
          state <= S_EN_SRC;
        end
        S_EN_SRC: begin
          stats.plb_fills <= stats.plb_fills + 1;
          if (st_lk_hit) begin
            stats.stash_pulls <= stats.stash_pulls + 1;
            state <= (en_l == en_base) ? ret_en : S_EN_DOWN;
            en_l  <= (en_l == en_base) ? en_l : en_l - 1;
          end else if (en_c == '0) begin
            state <= (en_l == en_base) ? ret_en : S_EN_DOWN;
            en_l  <= (en_l == en_base) ? en_l : en_l - 1;
          end else begin
            dram_req_valid <= 1'b1;
            dram_req_we    <= 1'b0;
            dram_req_addr  <= pg_pos;
            ret_dr         <= S_EN_FILL;
            state          <= S_DRAM;
          end
        end
        S_EN_FILL: begin
          if (!mac_ok) begin
            integrity_error       <= 1'b1;
            stats.integrity_fails <= stats.integrity_fails + 1;
          end
          state <= (en_l == en_base) ? ret_en : S_EN_DOWN;
          en_l  <= (en_l == en_base) ? en_l : en_l - 1;
        end

        // ---------------------------------------------------------------
        S_DRAM: begin
          if (dram_req_ready) begin
            dram_req_valid <= 1'b0;
            if (dram_req_we) begin
              stats.dram_writes <= stats.dram_writes + 1;
              state <= ret_dr;
            end else begin
              stats.dram_reads <= stats.dram_reads + 1;
              state <= S_DRAM_RESP;
            end
          end
        end
        S_DRAM_RESP: begin
          if (dram_resp_valid) begin
            line_reg <= dram_resp_rdata;
            state    <= ret_dr;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // PLB / stash / on-chip map write strobes
  logic leave_idle;
  assign leave_idle = (rd_req_ready && rd_req_valid) || (slot && st_hd_valid) ||
                      (slot && periodic_en);

  always_comb begin
    fill_valid   = 1'b0;
    fill_id      = en_b;
    fill_data    = '0;
    fill_dirty   = 1'b0;
    fill_oldv    = 1'b0;
    plbw_valid   = 1'b0;
    plbw_id      = plb_lk_id;
    plbw_data    = occ_blk;
    st_rm_valid  = 1'b0;
    st_rm_idx    = ev_idx;
    st_clr_valid = 1'b0;
    om_we        = 1'b0;
    om_waddr     = OAW'(cur_id - id_t'(LB3));
    om_wdata     = cur_ctr + 1'b1;
    acc_start    = (state == S_IDLE) && leave_idle;
    acc_done     = (state == S_DONE) && !(periodic_en && !wrote);
    case (state)
      S_CLR_CTR: st_clr_valid = (cur_ctr == '0);
      S_CLR_BIT: if (ev_alive) begin
        plbw_valid   = 1'b1;           // vacate the old location
        st_clr_valid = 1'b1;
      end
      S_INC: if (ev_alive) begin
        if (cur_top) om_we = 1'b1;
        else begin
          plbw_valid = 1'b1;
          plbw_id    = parent(cur_id);
          plbw_data  = ctr_put(plb_data, slot_of(cur_id), cur_ctr + 1'b1);
        end
      end
      S_TEST: if (ev_alive && !occ_bit) begin
        plbw_valid  = 1'b1;            // mark the new location occupied
        st_rm_valid = 1'b1;
      end
      S_EN_SRC: begin
        if (st_lk_hit) begin
          fill_valid  = 1'b1;
          fill_data   = st_rd_data;
          fill_dirty  = 1'b1;
          fill_oldv   = st_rd_oldv;
          st_rm_valid = 1'b1;
          st_rm_idx   = st_lk_idx;
        end else if (en_c == '0) begin
          fill_valid = 1'b1;           // never written: all zeros
        end
      end
      S_EN_FILL: begin
        fill_valid = 1'b1;
        fill_data  = dec_out[BLOCK_BITS-1:0];
        fill_oldv  = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------------
  a_rd_data_only: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid && rd_req_ready |-> 64'(rd_req_addr) < N_DATA);
  a_wb_data_only: assert property (@(posedge clk) disable iff (!rst_n)
    wb_valid && wb_ready |-> 64'(wb_addr) < N_DATA);
  a_dram_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dram_req_valid && !dram_req_ready |=> dram_req_valid && $stable(dram_req_addr));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(st_ins_valid && !st_ins_ok));
endmodule
