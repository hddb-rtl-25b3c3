// lud_nsp: near-storage processor of a lookup-dictionary core (LUD NSP).
//
// A dictionary core stores the symbol (or value) HVs of a column's dictionary,
// one entry per bit line. Encoded-table cores send it unbound HVs of selected
// rows; for each one this NSP runs decode stage 2 (paper Fig. 3(b), steps 8
// to 13): a DBAM search of the HV against every dictionary entry, per-entry
// scores accumulated in the double-buffered memory exactly as in the table
// core, and the entry with the highest score is the decoded key (associative
// recall; ties go to the lower entry). Decoded (row, key) results are kept in
// the 20 KB select scratchpad. When every table core has reported, results are
// either returned row by row (pure filter) or folded by the two ALU units,
// two results per cycle, into COUNT/SUM/AVG/MIN/MAX and returned as one value.
// A full scratchpad is emptied the same way before decoding continues
// (overflow handling), so aggregates over any number of rows are exact.
//
// The incoming HV bits are re-packed into TLC query levels with the Gray code
// (3 bits per level) before they drive the word lines. The key of entry s is
// s itself: the host orders each dictionary so that the entry index is the key
// value. Paper-given: the DBAM decode, accumulator, scratchpad and ALU
// functions and sizes. This design's choices: the flit protocol, entry-index
// keys, the result-entry format and the window loop over dictionary entries.
//
// Network interface: valid/ready flits (hddb_pkg::flit_t). While an HV is
// being decoded no flits are accepted, which back-pressures the table cores.
// The unbound HV of one row arrives as one packet: HV_ROW (row id) followed
// by its HV_WORD flits, the last with `last` set; the switches keep a packet
// together, so words of different table cores never mix. A START while the
// configured n_etc is 0 is ignored, so the host can broadcast START to all
// cores. Plane interface: as etc_nsp, but only program, erase and search are
// used; a dictionary core never does page reads, so pl_pb_bl is tied to 0 and
// pl_pb_level is unused.
module lud_nsp
  import hddb_pkg::*;
#(
  parameter int unsigned NUM_BL       = 16384,
  parameter int unsigned DBUF_BYTES   = 2048,
  parameter int unsigned SP_BYTES     = 20480,
  parameter int unsigned ALU_UNITS    = 2,
  parameter int unsigned HV_WORDS_MAX = 128,
  parameter logic [NODE_W-1:0] MY_ID  = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  flit_t       in_flit,
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit,
  output logic                    pl_cmd_valid,
  input  logic                    pl_cmd_ready,
  output logic [1:0]              pl_cmd_op,
  output logic [PAGE_W-1:0]       pl_cmd_page,
  output logic [ROW_W-1:0]        pl_cmd_bl,
  output logic [CELL_BITS-1:0]    pl_cmd_level,
  output logic [GROUP_BITS-1:0]   pl_cmd_query,
  input  logic                    pl_done,
  output logic [$clog2(NUM_BL/IO_W)-1:0] pl_pb_word,
  input  logic [IO_W-1:0]         pl_pb_ubc,
  input  logic [IO_W-1:0]         pl_pb_lbc,
  output logic [ROW_W-1:0]        pl_pb_bl,
  input  logic [CELL_BITS-1:0]    pl_pb_level,
  output logic        busy,
  output logic [15:0] stat_decoded,       // HVs decoded in the current query
  output logic [15:0] stat_sp_flushes,    // scratchpad-full flushes
  output logic [15:0] stat_drain_stalls
);
  localparam int unsigned LANES    = IO_W;
  localparam int unsigned DEPTH    = DBUF_BYTES * 8 / 2 / (LANES * SCORE_W);
  localparam int unsigned DAW      = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned W        = DEPTH * LANES;
  localparam int unsigned HVW      = 42;                      // bits per HV flit
  localparam int unsigned ENT_W    = 64;                      // one result entry
  localparam int unsigned SP_W     = ENT_W * ALU_UNITS;       // one entry per ALU lane
  localparam int unsigned SP_DEPTH = SP_BYTES * 8 / SP_W;
  localparam int unsigned SPAW     = $clog2(SP_DEPTH);
  localparam int unsigned CAP      = SP_DEPTH * ALU_UNITS;    // result entries
  localparam int unsigned PBW      = $clog2(NUM_BL / IO_W);
  localparam int unsigned HWAW     = $clog2(HV_WORDS_MAX);
  localparam int unsigned UW       = (ALU_UNITS > 1) ? $clog2(ALU_UNITS) : 1;

  localparam logic [1:0] PL_ERASE = 2'd0, PL_PROG = 2'd1, PL_SEARCH = 2'd3;

  lcfg_t lcfg;
  logic [HV_WORDS_MAX*HVW-1:0] qhv;         // unbound HV under decode, word w at [42w+41:42w]
  logic [ROW_W-1:0]  cur_row;
  logic [NODE_W-1:0] cur_src;
  logic [NODE_W-1:0] etc_done;
  logic [31:0]       sel_total;
  logic [11:0]       hv_words;               // words per HV the dictionary needs

  assign hv_words = 12'((32'(lcfg.dict_groups) * DBAM_K + (HVW/CELL_BITS) - 1) / (HVW/CELL_BITS));

  typedef enum logic [4:0] {
    L_IDLE, L_PLOP, L_RUN, L_WIN, L_SEARCH, L_SWAIT, L_ACC, L_PASS_END,
    L_DRAIN_WAIT, L_STORE, L_FLUSH_RD, L_FLUSH_USE, L_RES_AGG, L_RES_DONE
  } st_e;
  st_e st;
  logic              final_q;                // flushing at the end of the query

  logic [ROW_W:0]    wbase;
  logic [11:0]       grp;
  logic [DAW-1:0]    chunk;
  logic [SPAW+UW:0]  n_res, fl_ent;          // stored / flushed result entries

  // ------------------------------------------------------------ query levels
  logic [GROUP_BITS-1:0] q_bits, q_levels;
  assign q_bits = qhv[32'(grp) * GROUP_BITS +: GROUP_BITS];
  tlc_gray_codec #(.CELLS(DBAM_K)) u_gray (
    .bits_in(q_bits), .levels_out(q_levels), .levels_in('0), .bits_out()
  );

  // ------------------------------------------------------------ scores
  logic                     swap, acc_bank, acc_we, acc_valid;
  logic [DAW-1:0]           acc_raddr, acc_waddr, dr_raddr;
  logic [LANES*SCORE_W-1:0] acc_rdata, acc_wdata, dr_rdata;

  dbuf_mem #(.BYTES(DBUF_BYTES), .LANES(LANES), .SW(SCORE_W)) u_dbuf (
    .clk, .rst_n, .swap, .acc_bank,
    .acc_raddr, .acc_rdata, .acc_we, .acc_waddr, .acc_wdata,
    .dr_raddr, .dr_rdata
  );

  dbam_accumulator #(.LANES(LANES), .SW(SCORE_W), .AW(DAW)) u_acc (
    .in_valid(acc_valid), .in_first(grp == 12'd0), .in_addr(chunk),
    .in_ubc(pl_pb_ubc), .in_lbc(pl_pb_lbc),
    .mem_raddr(acc_raddr), .mem_rdata(acc_rdata),
    .mem_we(acc_we), .mem_waddr(acc_waddr), .mem_wdata(acc_wdata)
  );

  // argmax over the drained bank, running over all windows of the dictionary
  logic               dr_busy, dr_start, dr_first;
  logic [DAW-1:0]     dr_idx;
  logic [ROW_W:0]     dr_base;
  logic [SCORE_W-1:0] best_score;
  logic [ROW_W-1:0]   best_key;
  logic               best_any;
  assign dr_raddr = dr_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dr_busy    <= 1'b0;
      dr_idx     <= '0;
      dr_base    <= '0;
      best_score <= '0;
      best_key   <= '0;
      best_any   <= 1'b0;
    end else if (dr_start) begin
      dr_busy <= 1'b1;
      dr_idx  <= '0;
      dr_base <= wbase;
      if (dr_first) best_any <= 1'b0;
    end else if (dr_busy) begin
      logic [SCORE_W-1:0] bs;
      logic [ROW_W-1:0]   bk;
      logic               ba;
      bs = best_score;
      bk = best_key;
      ba = best_any;
      for (int unsigned l = 0; l < LANES; l++) begin
        logic [31:0] e;
        e = 32'(dr_base) + 32'(dr_idx) * LANES + l;
        if (e < 32'(lcfg.dict_entries) &&
            (!ba || dr_rdata[l*SCORE_W +: SCORE_W] > bs)) begin
          bs = dr_rdata[l*SCORE_W +: SCORE_W];
          bk = ROW_W'(e);
          ba = 1'b1;
        end
      end
      best_score <= bs;
      best_key   <= bk;
      best_any   <= ba;
      dr_idx     <= dr_idx + 1'b1;
      if (32'(dr_idx) == DEPTH - 1) dr_busy <= 1'b0;
    end
  end

  // ------------------------------------------------------------ results: scratchpad + ALUs
  logic               sp_we, sp_re;
  logic [SPAW-1:0]    sp_waddr, sp_raddr;
  logic [SP_W-1:0]    sp_wdata, sp_wmask, sp_rdata;
  select_scratchpad #(.BYTES(SP_BYTES), .WORD_W(SP_W)) u_sp (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata), .wmask(sp_wmask),
    .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata)
  );

  logic                               alu_clear, alu_valid;
  logic [ALU_UNITS-1:0]               alu_mask;
  logic [ALU_UNITS-1:0][ROW_W-1:0]    alu_val;
  logic [39:0]                        alu_result;
  logic [23:0]                        alu_count;
  agg_alu #(.UNITS(ALU_UNITS), .VAL_W(ROW_W), .SUM_W(40), .CNT_W(24)) u_alu (
    .clk, .rst_n, .clear(alu_clear), .in_valid(alu_valid), .in_mask(alu_mask),
    .in_val(alu_val), .op(lcfg.agg_op), .result(alu_result), .count(alu_count)
  );

  // result entry: [63:59] source core, [58:43] row, [15:0] key
  always_comb begin
    sp_we    = (st == L_STORE);
    sp_waddr = SPAW'(n_res >> UW);
    sp_wdata = SP_W'({cur_src, cur_row, 27'd0, best_key}) << (32'(n_res % ALU_UNITS) * ENT_W);
    sp_wmask = SP_W'({ENT_W{1'b1}}) << (32'(n_res % ALU_UNITS) * ENT_W);
    sp_re    = (st == L_FLUSH_RD);
    sp_raddr = SPAW'(fl_ent >> UW);
    alu_valid = (st == L_FLUSH_USE) && (lcfg.agg_op != AGG_NONE);
    for (int unsigned u = 0; u < ALU_UNITS; u++) begin
      alu_mask[u] = (32'(fl_ent) + u) < 32'(n_res);
      alu_val[u]  = sp_rdata[u*ENT_W +: ROW_W];
    end
  end

  // ------------------------------------------------------------ plane / network
  always_comb begin
    pl_cmd_valid = 1'b0;
    pl_cmd_op    = PL_SEARCH;
    pl_cmd_page  = lcfg.dict_page + PAGE_W'(32'(grp) * DBAM_K);
    pl_cmd_bl    = '0;
    pl_cmd_level = '0;
    pl_cmd_query = q_levels;
    unique case (st)
      L_IDLE: if (in_valid && in_flit.kind == FK_PROG) begin
        pl_cmd_valid = 1'b1;
        pl_cmd_op    = PL_PROG;
        pl_cmd_page  = in_flit.data[62:48];
        pl_cmd_bl    = in_flit.data[47:32];
        pl_cmd_level = in_flit.data[2:0];
      end else if (in_valid && in_flit.kind == FK_ERASE) begin
        pl_cmd_valid = 1'b1;
        pl_cmd_op    = PL_ERASE;
        pl_cmd_page  = in_flit.data[PAGE_W-1:0];
      end
      L_SEARCH: pl_cmd_valid = 1'b1;
      default: ;
    endcase
  end

  assign in_ready   = ((st == L_IDLE) &&
                       (!(in_flit.kind inside {FK_PROG, FK_ERASE}) || pl_cmd_ready)) ||
                      (st == L_RUN);
  assign pl_pb_word = PBW'(32'(wbase) / IO_W + 32'(chunk));
  assign pl_pb_bl   = '0;
  assign acc_valid  = (st == L_ACC);
  assign busy       = (st != L_IDLE);
  assign dr_start   = (st == L_PASS_END) && !dr_busy;
  assign dr_first   = (wbase == '0);
  assign swap       = dr_start;
  assign alu_clear  = (st == L_IDLE) && in_valid && in_flit.kind == FK_START;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= L_IDLE;
      lcfg      <= '0;
      qhv       <= '0;
      cur_row   <= '0;
      cur_src   <= '0;
      etc_done  <= '0;
      sel_total <= '0;
      wbase     <= '0;
      grp       <= '0;
      chunk     <= '0;
      n_res     <= '0;
      fl_ent    <= '0;
      final_q   <= 1'b0;
      out_valid <= 1'b0;
      out_flit  <= '0;
      stat_decoded      <= '0;
      stat_sp_flushes   <= '0;
      stat_drain_stalls <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        L_IDLE: if (in_valid && in_ready) begin
          unique case (in_flit.kind)
            FK_LCFG: lcfg <= lcfg_t'(in_flit.data);
            FK_PROG, FK_ERASE: st <= L_PLOP;
            FK_START: begin
              etc_done     <= '0;
              sel_total    <= '0;
              n_res        <= '0;
              stat_decoded <= '0;
              final_q      <= 1'b0;
              // a core not taking part in this query (n_etc = 0) ignores the
              // start, so the host may broadcast it
              st           <= (lcfg.n_etc == '0) ? L_IDLE : L_RUN;
            end
            default: ;   // flits for table cores
          endcase
        end
        L_PLOP: if (pl_done) st <= L_IDLE;
        L_RUN: begin
          if (in_valid) begin
            unique case (in_flit.kind)
              FK_HV_ROW: begin
                cur_row <= in_flit.data[ROW_W-1:0];
                cur_src <= in_flit.src;
              end
              FK_HV_WORD: begin
                qhv[32'(in_flit.data[52+HWAW-1:52]) * HVW +: HVW] <= in_flit.data[HVW-1:0];
                if (in_flit.data[63:52] == hv_words - 1'b1) begin
                  wbase <= '0;
                  st    <= L_WIN;
                end
              end
              FK_ETC_DONE: begin
                etc_done  <= etc_done + 1'b1;
                sel_total <= sel_total + in_flit.data[31:0];
              end
              default: ;
            endcase
          end else if (etc_done == lcfg.n_etc && lcfg.n_etc != '0) begin
            final_q <= 1'b1;
            fl_ent  <= '0;
            st      <= L_FLUSH_RD;
          end
        end
        // ---------------------------------------------------- dictionary search
        L_WIN: begin
          grp <= '0;
          st  <= L_SEARCH;
        end
        L_SEARCH: if (pl_cmd_ready) st <= L_SWAIT;
        L_SWAIT: if (pl_done) begin
          chunk <= '0;
          st    <= L_ACC;
        end
        L_ACC: begin
          chunk <= chunk + 1'b1;
          if (32'(chunk) == DEPTH - 1) begin
            if (grp == lcfg.dict_groups - 1'b1) st <= L_PASS_END;
            else begin
              grp <= grp + 1'b1;
              st  <= L_SEARCH;
            end
          end
        end
        L_PASS_END: begin
          if (dr_busy) stat_drain_stalls <= stat_drain_stalls + 1'b1;
          else if (32'(wbase) + W >= 32'(lcfg.dict_entries)) st <= L_DRAIN_WAIT;
          else begin
            wbase <= wbase + (ROW_W+1)'(W);
            st    <= L_WIN;
          end
        end
        L_DRAIN_WAIT: if (!dr_busy) st <= L_STORE;
        L_STORE: begin
          n_res        <= n_res + 1'b1;
          stat_decoded <= stat_decoded + 1'b1;
          if (32'(n_res) == CAP - 1) begin
            stat_sp_flushes <= stat_sp_flushes + 1'b1;
            fl_ent <= '0;
            st     <= L_FLUSH_RD;
          end else st <= L_RUN;
        end
        // ---------------------------------------------------- flush results
        L_FLUSH_RD: begin
          if (fl_ent >= n_res) begin
            n_res <= '0;
            if (final_q) st <= (lcfg.agg_op == AGG_NONE) ? L_RES_DONE : L_RES_AGG;
            else st <= L_RUN;
          end else st <= L_FLUSH_USE;
        end
        L_FLUSH_USE: begin
          if (lcfg.agg_op != AGG_NONE) begin
            fl_ent <= fl_ent + (SPAW+UW+1)'(ALU_UNITS);
            st     <= L_FLUSH_RD;
          end else if (!out_valid || out_ready) begin
            logic [ENT_W-1:0] e;
            e = sp_rdata[32'(fl_ent % ALU_UNITS) * ENT_W +: ENT_W];
            out_valid <= 1'b1;
            out_flit  <= '{dst: HOST_ID, src: MY_ID, kind: FK_RES_ROW, last: 1'b1, data: e};
            fl_ent    <= fl_ent + 1'b1;
            st        <= L_FLUSH_RD;
          end
        end
        L_RES_AGG: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_flit  <= '{dst: HOST_ID, src: MY_ID, kind: FK_RES_AGG, last: 1'b1,
                         data: {lcfg.agg_op, 21'd0, alu_result}};
          st        <= L_RES_DONE;
        end
        L_RES_DONE: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_flit  <= '{dst: HOST_ID, src: MY_ID, kind: FK_RES_DONE, last: 1'b1,
                         data: {16'(stat_decoded), 16'(alu_count), sel_total}};
          st        <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_flit)));
endmodule
