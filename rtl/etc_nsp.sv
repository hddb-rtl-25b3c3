// etc_nsp: near-storage processor of an encoded-table core (ETC NSP).
//
// The encoded-table core stores one hypervector (HV) per table cell, column by
// column: the HV of row r lies on bit line r, its cells on successive word
// lines. This NSP runs a predicate over all rows of its plane and forwards the
// HVs of the selected rows, unbound, to a lookup-dictionary core for decoding
// (paper Fig. 3(b), steps 2 to 7).
//
//  * String predicate: one DBAM pass. For every group j of K = 8 cells the
//    plane is searched with the query levels of group j, and the accumulator
//    adds UBC_j + LBC_j to each row's score. A row matches when its score
//    reaches the configured threshold.
//  * Numeric predicate: the value is encoded as 4 levels of 100 bins. For each
//    level and each bin, one DBAM pass compares the level segment with the bin
//    HV; the bin with the highest score is the row's index at that level
//    (associative recall, ties go to the lower bin). The 7-bit bin comparator
//    (5 rows per cycle) then compares the 4 indices with the query indices.
//  * Selected rows' projected HVs are read with normal page reads, Gray-decoded
//    and gathered in the 20 KB select scratchpad; the 42-lane XOR array unbinds
//    them with the key HV and they are sent, word by word, to the dictionary
//    core. When the scratchpad (or the slot list) is full the batch is sent and
//    collection resumes (overflow handling).
//
// Rows are processed in windows of W rows, W = the rows one bank of the 2 KB
// double-buffered score memory holds (512). Scores of a finished pass are
// evaluated from one bank while the next pass accumulates in the other; if the
// evaluation has not finished when the next pass ends, the sequencer stalls.
// Paper-given: the DBAM score, the 4 x 100-bin recall and index comparison, the
// unit list and sizes (42 XORs, 20 KB scratchpad, 2 KB double buffer, 5-lane
// 7-bit comparator, 64-bit I/O). This design's choices: the window loop, the
// per-bin pass order, the flit protocol, the key buffer and query buffer, the
// slot limit MAX_SLOTS and all handshakes.
//
// Network interface: valid/ready flits in and out (hddb_pkg::flit_t). While a
// query runs no flits are accepted. Each selected row leaves as one packet:
// an HV_ROW flit with the row id, then proj_words HV_WORD flits (word index in
// data[63:52], 42 unbound bits in data[41:0]); only the final word has `last`
// set. ETC_DONE, carrying the number of selected rows, closes the query.
// Plane interface: see fenand_plane.
module etc_nsp
  import hddb_pkg::*;
#(
  parameter int unsigned NUM_BL       = 16384,
  parameter int unsigned DBUF_BYTES   = 2048,
  parameter int unsigned SP_BYTES     = 20480,
  parameter int unsigned XOR_LANES    = 42,
  parameter int unsigned BINCMP_LANES = 5,
  parameter int unsigned QBUF_DEPTH   = 8192,
  parameter int unsigned KEY_WORDS    = 128,
  parameter int unsigned MAX_SLOTS    = 64,
  parameter logic [NODE_W-1:0] MY_ID  = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  // network
  input  logic        in_valid,
  output logic        in_ready,
  input  flit_t       in_flit,
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit,
  // plane
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
  // status and event counters
  output logic        busy,
  output logic [15:0] stat_drain_stalls,   // cycles a pass waited for score evaluation
  output logic [15:0] stat_net_stalls,     // cycles an output flit waited for the network
  output logic [15:0] stat_sp_overflows,   // batches cut short by a full scratchpad
  output logic [15:0] stat_selected        // rows that passed the predicate (last query)
);
  localparam int unsigned LANES   = IO_W;
  localparam int unsigned DEPTH   = DBUF_BYTES * 8 / 2 / (LANES * SCORE_W);
  localparam int unsigned DAW     = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned W       = DEPTH * LANES;        // rows per window
  localparam int unsigned WRW     = $clog2(W) + 1;
  localparam int unsigned SP_DEPTH = SP_BYTES * 8 / XOR_LANES;
  localparam int unsigned SPAW    = $clog2(SP_DEPTH);
  localparam int unsigned CPW     = XOR_LANES / CELL_BITS; // cells per scratchpad word (14)
  localparam int unsigned QAW     = $clog2(QBUF_DEPTH);
  localparam int unsigned KAW     = $clog2(KEY_WORDS);
  localparam int unsigned SLW     = $clog2(MAX_SLOTS) + 1;
  localparam int unsigned PBW     = $clog2(NUM_BL / IO_W);

  localparam logic [1:0] PL_ERASE = 2'd0, PL_PROG = 2'd1, PL_READ = 2'd2, PL_SEARCH = 2'd3;

  // ------------------------------------------------------------ configuration
  cfg0_t cfg0;
  cfg1_t cfg1;
  logic [ROW_W:0] rows;
  logic [GROUP_BITS-1:0] qbuf [QBUF_DEPTH];
  logic [XOR_LANES-1:0]  keybuf [KEY_WORDS];

  // ------------------------------------------------------------ sequencer state
  typedef enum logic [4:0] {
    S_IDLE, S_PLOP, S_WIN, S_PASS, S_SEARCH, S_SWAIT, S_ACC, S_PASS_END,
    S_DRAIN_WAIT, S_CMP, S_COLLECT, S_G_READ, S_G_WAIT, S_G_WRITE,
    S_SEND_HDR, S_SEND_RD, S_SEND_X, S_SEND_OUT, S_WIN_NEXT, S_DONE
  } st_e;
  st_e st;

  logic [ROW_W:0]         wbase;
  logic [1:0]             lvl;
  logic [BIN_IDX_W-1:0]   bin;
  logic [11:0]            grp;
  logic [DAW-1:0]         chunk;
  logic [WRW-1:0]         ptr;        // row pointer inside the window
  logic [W-1:0]           selmask;
  logic [ROW_W-1:0]       slot_row [MAX_SLOTS];
  logic [SLW-1:0]         nslot, slot;
  logic [SPAW:0]          slot_end;   // scratchpad words used by the batch
  logic [15:0]            hv_cell;       // HV cell being gathered
  logic [11:0]            cw;         // its scratchpad word inside the HV
  logic [$clog2(CPW)-1:0] cc;         // its cell position inside that word
  logic [SPAW:0]          sp_addr;
  logic [11:0]            wsend;
  logic                   more_rows;  // collection stopped early by a full batch

  // ------------------------------------------------------------ double buffer + accumulator
  logic                   swap, acc_bank;
  logic [DAW-1:0]         acc_raddr, acc_waddr, dr_raddr;
  logic [LANES*SCORE_W-1:0] acc_rdata, acc_wdata, dr_rdata;
  logic                   acc_we, acc_valid;

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

  // ------------------------------------------------------------ score evaluation (drain side)
  // THRESH: string match.  ARGMAX: running best bin per row and level.
  logic                   dr_busy, dr_start, dr_argmax;
  logic [DAW-1:0]         dr_idx;
  logic [1:0]             dr_lvl;
  logic [BIN_IDX_W-1:0]   dr_bin;
  logic [LANES-1:0][SCORE_W-1:0] best [DEPTH];
  logic [LANES-1:0][NUM_LEVELS-1:0][BIN_IDX_W-1:0] idxbuf [DEPTH];
  logic [W-1:0]           thr_mask;

  assign dr_raddr = dr_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dr_busy <= 1'b0;
      dr_idx  <= '0;
      dr_lvl  <= '0;
      dr_bin  <= '0;
      dr_argmax <= 1'b0;
      thr_mask <= '0;
    end else if (dr_start) begin
      dr_busy   <= 1'b1;
      dr_idx    <= '0;
      dr_lvl    <= lvl;
      dr_bin    <= bin;
      dr_argmax <= cfg0.is_numeric;
    end else if (dr_busy) begin
      for (int unsigned l = 0; l < LANES; l++) begin
        logic [SCORE_W-1:0] s;
        s = dr_rdata[l*SCORE_W +: SCORE_W];
        if (dr_argmax) begin
          if (dr_bin == '0 || s > best[dr_idx][l]) begin
            best[dr_idx][l] <= s;
            idxbuf[dr_idx][l][dr_lvl] <= dr_bin;
          end
        end else begin
          thr_mask[32'(dr_idx)*LANES + l] <= (s >= cfg0.threshold);
        end
      end
      dr_idx <= dr_idx + 1'b1;
      if (32'(dr_idx) == DEPTH - 1) dr_busy <= 1'b0;
    end
  end

  // ------------------------------------------------------------ bin comparator
  logic [BINCMP_LANES-1:0][NUM_LEVELS-1:0][BIN_IDX_W-1:0] cmp_idx;
  logic [BINCMP_LANES-1:0] cmp_match;
  always_comb begin
    for (int unsigned l = 0; l < BINCMP_LANES; l++) begin
      logic [31:0] r;
      r = 32'(ptr) + l;
      cmp_idx[l] = (r < W) ? idxbuf[r / LANES][r % LANES] : '0;
    end
  end
  bin_comparator #(.LANES(BINCMP_LANES)) u_bincmp (
    .op(cfg0.cmp_op), .q_idx(cfg1.qidx), .row_idx(cmp_idx), .match(cmp_match)
  );

  // ------------------------------------------------------------ scratchpad + XOR array
  logic                 sp_we, sp_re;
  logic [SPAW-1:0]      sp_waddr, sp_raddr;
  logic [XOR_LANES-1:0] sp_wdata, sp_wmask, sp_rdata;
  logic                 x_in_valid, x_out_valid;
  logic [XOR_LANES-1:0] x_out_hv;
  logic [15:0]          x_out_tag;

  select_scratchpad #(.BYTES(SP_BYTES), .WORD_W(XOR_LANES)) u_sp (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata), .wmask(sp_wmask),
    .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata)
  );

  xor_unbind_array #(.LANES(XOR_LANES), .TAG_W(16)) u_xor (
    .clk, .rst_n, .in_valid(x_in_valid), .in_hv(sp_rdata),
    .in_key(keybuf[KAW'(wsend)]), .in_tag(16'(wsend)),
    .out_valid(x_out_valid), .out_hv(x_out_hv), .out_tag(x_out_tag)
  );

  logic [CELL_BITS-1:0] cell_bits;
  tlc_gray_codec #(.CELLS(1)) u_gray (
    .bits_in('0), .levels_out(), .levels_in(pl_pb_level), .bits_out(cell_bits)
  );

  // ------------------------------------------------------------ derived addresses
  logic [PAGE_W-1:0] pass_page;
  logic [QAW-1:0]    pass_qbase;
  always_comb begin
    if (cfg0.is_numeric) begin
      pass_page  = cfg0.col_page + PAGE_W'(32'(lvl) * 32'(cfg0.groups) * DBAM_K);
      pass_qbase = QAW'(32'(bin) * 32'(cfg0.groups));
    end else begin
      pass_page  = cfg0.col_page;
      pass_qbase = '0;
    end
  end

  // ------------------------------------------------------------ plane / network outputs
  always_comb begin
    pl_cmd_valid = 1'b0;
    pl_cmd_op    = PL_SEARCH;
    pl_cmd_page  = pass_page + PAGE_W'(32'(grp) * DBAM_K);
    pl_cmd_bl    = '0;
    pl_cmd_level = '0;
    pl_cmd_query = qbuf[pass_qbase + QAW'(grp)];
    unique case (st)
      S_IDLE: if (in_valid && in_flit.kind == FK_PROG) begin
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
      S_SEARCH: pl_cmd_valid = 1'b1;
      S_G_READ: begin
        pl_cmd_valid = 1'b1;
        pl_cmd_op    = PL_READ;
        pl_cmd_page  = cfg1.proj_page + PAGE_W'(hv_cell);
      end
      default: ;
    endcase
  end

  assign in_ready   = (st == S_IDLE) &&
                      (!(in_flit.kind inside {FK_PROG, FK_ERASE}) || pl_cmd_ready);
  assign pl_pb_word = PBW'(32'(wbase) / IO_W + 32'(chunk));
  assign pl_pb_bl   = ROW_W'(wbase) + slot_row[slot[SLW-2:0]];
  assign acc_valid  = (st == S_ACC);
  assign busy       = (st != S_IDLE);

  // ------------------------------------------------------------ main sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cfg0      <= '0;
      cfg1      <= '0;
      rows      <= '0;
      wbase     <= '0;
      lvl       <= '0;
      bin       <= '0;
      grp       <= '0;
      chunk     <= '0;
      ptr       <= '0;
      selmask   <= '0;
      nslot     <= '0;
      slot      <= '0;
      slot_end  <= '0;
      hv_cell      <= '0;
      cw        <= '0;
      cc        <= '0;
      sp_addr   <= '0;
      wsend     <= '0;
      more_rows <= 1'b0;
      out_valid <= 1'b0;
      out_flit  <= '0;
      stat_drain_stalls <= '0;
      stat_net_stalls   <= '0;
      stat_sp_overflows <= '0;
      stat_selected     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (out_valid && !out_ready) stat_net_stalls <= stat_net_stalls + 1'b1;
      unique case (st)
        S_IDLE: if (in_valid && in_ready) begin
          unique case (in_flit.kind)
            FK_CFG0:   cfg0 <= cfg0_t'(in_flit.data);
            FK_CFG1:   cfg1 <= cfg1_t'(in_flit.data);
            FK_QGROUP: qbuf[in_flit.data[24+QAW-1:24]] <= in_flit.data[GROUP_BITS-1:0];
            FK_KEY:    keybuf[in_flit.data[48+KAW-1:48]] <= in_flit.data[XOR_LANES-1:0];
            FK_PROG, FK_ERASE: st <= S_PLOP;
            FK_START: begin
              rows          <= in_flit.data[ROW_W:0];
              wbase         <= '0;
              stat_selected <= '0;
              st            <= S_WIN;
            end
            default: ;   // flits for dictionary cores
          endcase
        end
        S_PLOP: if (pl_done) st <= S_IDLE;
        // ---------------------------------------------------- predicate search
        S_WIN: begin
          lvl <= '0;
          bin <= '0;
          st  <= S_PASS;
        end
        S_PASS: begin
          grp <= '0;
          st  <= S_SEARCH;
        end
        S_SEARCH: if (pl_cmd_ready) st <= S_SWAIT;
        S_SWAIT: if (pl_done) begin
          chunk <= '0;
          st    <= S_ACC;
        end
        S_ACC: begin
          chunk <= chunk + 1'b1;
          if (32'(chunk) == DEPTH - 1) begin
            if (grp == cfg0.groups - 1'b1) st <= S_PASS_END;
            else begin
              grp <= grp + 1'b1;
              st  <= S_SEARCH;
            end
          end
        end
        S_PASS_END: begin
          if (dr_busy) stat_drain_stalls <= stat_drain_stalls + 1'b1;
          else begin
            // dr_start (combinational below) launches the evaluation of this pass
            if (!cfg0.is_numeric) st <= S_DRAIN_WAIT;
            else if (bin == cfg0.num_bins - 1'b1) begin
              bin <= '0;
              if (lvl == 2'(NUM_LEVELS - 1)) st <= S_DRAIN_WAIT;
              else begin
                lvl <= lvl + 1'b1;
                st  <= S_PASS;
              end
            end else begin
              bin <= bin + 1'b1;
              st  <= S_PASS;
            end
          end
        end
        S_DRAIN_WAIT: if (!dr_busy && !dr_start) begin
          ptr <= '0;
          if (cfg0.is_numeric) st <= S_CMP;
          else begin
            for (int unsigned r = 0; r < W; r++)
              selmask[r] <= thr_mask[r] && ((32'(wbase) + r) < 32'(rows));
            st <= S_COLLECT;
            ptr <= '0;
            nslot <= '0;
            slot_end <= '0;
          end
        end
        S_CMP: begin
          for (int unsigned l = 0; l < BINCMP_LANES; l++) begin
            logic [31:0] r;
            r = 32'(ptr) + l;
            if (r < W) selmask[r] <= cmp_match[l] && ((32'(wbase) + r) < 32'(rows));
          end
          if (32'(ptr) + BINCMP_LANES >= W) begin
            ptr      <= '0;
            nslot    <= '0;
            slot_end <= '0;
            st       <= S_COLLECT;
          end else ptr <= ptr + WRW'(BINCMP_LANES);
        end
        // ---------------------------------------------------- selection and decode
        S_COLLECT: begin
          if (32'(ptr) == W) begin
            more_rows <= 1'b0;
            if (nslot != 0) begin
              hv_cell <= '0; cw <= '0; cc <= '0;
              st   <= cfg1.decode ? S_G_READ : S_WIN_NEXT;
            end else st <= S_WIN_NEXT;
          end else if (selmask[ptr[WRW-2:0]]) begin
            if (32'(nslot) == MAX_SLOTS ||
                32'(slot_end) + 32'(cfg1.proj_words) > SP_DEPTH) begin
              // batch full: decode it, then come back for the rest
              stat_sp_overflows <= stat_sp_overflows + 1'b1;
              more_rows <= 1'b1;
              hv_cell <= '0; cw <= '0; cc <= '0;
              st   <= cfg1.decode ? S_G_READ : S_COLLECT;
              if (!cfg1.decode) begin
                nslot    <= '0;
                slot_end <= '0;
              end
            end else begin
              slot_row[nslot[SLW-2:0]] <= ROW_W'(ptr);
              nslot         <= nslot + 1'b1;
              slot_end      <= slot_end + (SPAW+1)'(cfg1.proj_words);
              stat_selected <= stat_selected + 1'b1;
              ptr           <= ptr + 1'b1;
            end
          end else ptr <= ptr + 1'b1;
        end
        S_G_READ: if (pl_cmd_ready) st <= S_G_WAIT;
        S_G_WAIT: if (pl_done) begin
          slot    <= '0;
          sp_addr <= (SPAW+1)'(cw);
          st      <= S_G_WRITE;
        end
        S_G_WRITE: begin
          // one selected row per cycle: cell `hv_cell` of its HV into the scratchpad
          slot    <= slot + 1'b1;
          sp_addr <= sp_addr + (SPAW+1)'(cfg1.proj_words);
          if (slot == nslot - 1'b1) begin
            hv_cell <= hv_cell + 1'b1;
            if (32'(cc) == CPW - 1) begin
              cc <= '0;
              cw <= cw + 1'b1;
            end else cc <= cc + 1'b1;
            if (32'(hv_cell) == 32'(cfg1.proj_words) * CPW - 1) begin
              slot  <= '0;
              wsend <= '0;
              st    <= S_SEND_HDR;
            end else st <= S_G_READ;
          end
        end
        S_SEND_HDR: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_flit  <= '{dst: cfg1.lud_dst, src: MY_ID, kind: FK_HV_ROW, last: 1'b0,
                         data: 64'(ROW_W'(wbase) + slot_row[slot[SLW-2:0]])};
          wsend   <= '0;
          sp_addr <= (SPAW+1)'(32'(slot) * 32'(cfg1.proj_words));
          st      <= S_SEND_RD;
        end
        S_SEND_RD: st <= S_SEND_X;        // scratchpad read issued this cycle
        S_SEND_X:  st <= S_SEND_OUT;      // XOR array registers the unbound word
        S_SEND_OUT: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_flit  <= '{dst: cfg1.lud_dst, src: MY_ID, kind: FK_HV_WORD,
                         last: (wsend == cfg1.proj_words - 1'b1),
                         data: 64'({x_out_tag[11:0], 10'd0, x_out_hv})};
          if (wsend == cfg1.proj_words - 1'b1) begin
            if (slot == nslot - 1'b1) begin
              nslot    <= '0;
              slot_end <= '0;
              st       <= more_rows ? S_COLLECT : S_WIN_NEXT;
            end else begin
              slot <= slot + 1'b1;
              st   <= S_SEND_HDR;
            end
          end else begin
            wsend   <= wsend + 1'b1;
            sp_addr <= sp_addr + 1'b1;
            st      <= S_SEND_RD;
          end
        end
        S_WIN_NEXT: begin
          if (32'(wbase) + W >= 32'(rows)) st <= S_DONE;
          else begin
            wbase <= wbase + (ROW_W+1)'(W);
            st    <= S_WIN;
          end
        end
        S_DONE: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_flit  <= '{dst: cfg1.lud_dst, src: MY_ID, kind: FK_ETC_DONE, last: 1'b1,
                         data: 64'(stat_selected)};
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    dr_start = (st == S_PASS_END) && !dr_busy;
    swap     = dr_start;
  end

  // scratchpad ports
  always_comb begin
    sp_we    = (st == S_G_WRITE);
    sp_waddr = SPAW'(sp_addr);
    sp_wdata = XOR_LANES'(cell_bits) << (32'(cc) * CELL_BITS);
    sp_wmask = XOR_LANES'(3'b111)   << (32'(cc) * CELL_BITS);
    sp_re    = (st == S_SEND_RD);
    sp_raddr = SPAW'(sp_addr);
    x_in_valid = (st == S_SEND_X);
  end

  // flits are presented stable until taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_flit)));
endmodule
