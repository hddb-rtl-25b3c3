// fenand_plane: behavioural model of one 3D FeNAND TLC plane with its page
// buffer, sense amplifiers and dual boundary approximate matching (DBAM).
// This is a behavioural model, not synthesizable circuitry: the real part is an
// analog ferroelectric NAND array with high-voltage word-line drivers.
//
// Organisation (as in the paper): NUM_BLOCKS blocks of NUM_WL word lines, each
// word line a page of NUM_BL TLC cells, bit lines shared by all blocks. A page
// is addressed as block * NUM_WL + wl. Every bit line holds the HV of one table
// row: successive cells of that HV lie on successive word lines.
//
// DBAM search (paper Eq. 2 and 3): K = 8 consecutive word lines of one block
// are driven with the K query levels q_i. Cells hold levels r_i.
//   upper bound check  UBC = AND_i [ r_i <= q_i + alpha_pos ]
//   lower bound check  LBC = 1 - AND_i [ r_i <  q_i - alpha_neg ]
// both evaluated on every bit line at once, alpha = 0.5 level. Levels are
// integers, so alpha is carried in half levels (ALPHA_*2 = 1 means 0.5). The
// search takes two sensing cycles (UBC then LBC), each SENSE_LAT clock cycles;
// the page buffer then holds one UBC bit and one LBC bit per bit line.
//
// Commands (cmd_valid/cmd_ready, one at a time; done pulses at the end):
//   PL_ERASE  block  -> every cell of the block to level 0 (one chunk of BL_PAR
//                       cells per cycle; erase timing is not modelled further)
//   PL_PROG   page, bl, level -> one cell; offline table loading, one cycle
//   PL_READ   page   -> normal page read, SENSE_LAT cycles, then pb_level
//                       returns the level of bit line pb_bl of that page
//   PL_SEARCH page, query[K] -> DBAM over pages page..page+K-1
// pb_ubc/pb_lbc return 64 bit lines of the last search at word pb_word.
//
// Model simplifications (this design's choices): the page buffer of a normal
// read is modelled by reading the array directly at the latched page; the
// search internally evaluates BL_PAR bit lines per clock, which is invisible
// outside because SENSE_LAT is much longer in practice (50-100 us page read
// = 50 000-100 000 cycles at 1 GHz). Noise is not injected here: the testbenches
// inject one-level shifts by programming shifted levels.
module fenand_plane
  import hddb_pkg::*;
#(
  parameter int unsigned NUM_BL     = 16384,
  parameter int unsigned NUM_WL     = 128,
  parameter int unsigned NUM_BLOCKS = 128,
  parameter int unsigned BL_PAR     = 64,
  parameter int unsigned SENSE_LAT  = 50000,
  parameter int unsigned ALPHA_POS2 = 1,
  parameter int unsigned ALPHA_NEG2 = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  logic [1:0]                   cmd_op,     // 0 erase, 1 prog, 2 read, 3 search
  input  logic [PAGE_W-1:0]            cmd_page,   // erase: block number
  input  logic [ROW_W-1:0]             cmd_bl,
  input  logic [CELL_BITS-1:0]         cmd_level,
  input  logic [GROUP_BITS-1:0]        cmd_query,  // K levels, cell i in [3i+2:3i]
  output logic                         done,
  input  logic [$clog2(NUM_BL/IO_W)-1:0] pb_word,
  output logic [IO_W-1:0]              pb_ubc,
  output logic [IO_W-1:0]              pb_lbc,
  input  logic [ROW_W-1:0]             pb_bl,
  output logic [CELL_BITS-1:0]         pb_level
);
  localparam int unsigned NCHUNK    = NUM_BL / BL_PAR;
  localparam int unsigned NUM_PAGES = NUM_WL * NUM_BLOCKS;
  localparam int unsigned CH_W      = $clog2(NCHUNK);
  localparam int unsigned AW        = $clog2(NUM_PAGES * NCHUNK);
  localparam int unsigned CW        = BL_PAR * CELL_BITS;

  localparam logic [1:0] PL_ERASE = 2'd0, PL_PROG = 2'd1, PL_READ = 2'd2, PL_SEARCH = 2'd3;

  // the cell array: one word per (page, chunk of BL_PAR bit lines)
  logic [CW-1:0] mem [NUM_PAGES * NCHUNK];

  // page buffer (holds the last search result; read only after a search)
  logic [NUM_BL-1:0] ubc_pb, lbc_pb;

  typedef enum logic [1:0] {S_IDLE, S_ERASE, S_READ, S_SEARCH} st_e;
  st_e st;
  logic [31:0]         cnt;
  logic [PAGE_W-1:0]   page_q, rd_page;
  logic [GROUP_BITS-1:0] q_q;
  logic [CH_W-1:0]     chunk;

  assign cmd_ready = (st == S_IDLE);

  function automatic logic [AW-1:0] addr_of(input logic [PAGE_W-1:0] page, input logic [CH_W-1:0] ch);
    return AW'(page) * AW'(NCHUNK) + AW'(ch);
  endfunction

  // DBAM on one chunk: K pages at chunk `chunk`
  logic [CW-1:0]     rd [DBAM_K];
  logic [BL_PAR-1:0] ubc_c, lbc_c;
  always_comb begin
    for (int unsigned i = 0; i < DBAM_K; i++)
      rd[i] = mem[addr_of(page_q + PAGE_W'(i), chunk)];
    for (int unsigned b = 0; b < BL_PAR; b++) begin
      logic all_le, all_lt;
      all_le = 1'b1;
      all_lt = 1'b1;
      for (int unsigned i = 0; i < DBAM_K; i++) begin
        logic [4:0] r2, q2;
        r2 = {1'b0, rd[i][b*CELL_BITS +: CELL_BITS], 1'b0};
        q2 = {1'b0, q_q[i*CELL_BITS +: CELL_BITS], 1'b0};
        if (!(r2 <= q2 + 5'(ALPHA_POS2))) all_le = 1'b0;
        if (!(r2 + 5'(ALPHA_NEG2) < q2))  all_lt = 1'b0;
      end
      ubc_c[b] = all_le;
      lbc_c[b] = ~all_lt;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cnt     <= '0;
      chunk   <= '0;
      done    <= 1'b0;
      page_q  <= '0;
      rd_page <= '0;
      q_q     <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          cnt   <= '0;
          chunk <= '0;
          q_q   <= cmd_query;
          unique case (cmd_op)
            PL_ERASE: begin
              page_q <= PAGE_W'(cmd_page * NUM_WL);
              st     <= S_ERASE;
            end
            PL_PROG: begin
              mem[addr_of(cmd_page, CH_W'(32'(cmd_bl) / BL_PAR))][(32'(cmd_bl) % BL_PAR)*CELL_BITS +: CELL_BITS] <= cmd_level;
              done <= 1'b1;
            end
            PL_READ: begin
              page_q <= cmd_page;
              st     <= S_READ;
            end
            default: begin
              page_q <= cmd_page;
              st     <= S_SEARCH;
            end
          endcase
        end
        S_ERASE: begin
          mem[addr_of(page_q, chunk)] <= '0;
          chunk <= chunk + 1'b1;
          if (chunk == CH_W'(NCHUNK - 1)) begin
            if (cnt == NUM_WL - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end
            cnt    <= cnt + 1;
            page_q <= page_q + 1'b1;
          end
        end
        S_READ: begin
          cnt <= cnt + 1;
          if (cnt == SENSE_LAT - 1) begin
            rd_page <= page_q;
            st      <= S_IDLE;
            done    <= 1'b1;
          end
        end
        S_SEARCH: begin
          cnt <= cnt + 1;
          if (cnt < NCHUNK) begin
            ubc_pb[chunk*BL_PAR +: BL_PAR] <= ubc_c;
            lbc_pb[chunk*BL_PAR +: BL_PAR] <= lbc_c;
            chunk <= chunk + 1'b1;
          end
          if (cnt >= NCHUNK - 1 && cnt >= 2*SENSE_LAT - 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign pb_ubc   = ubc_pb[pb_word*IO_W +: IO_W];
  assign pb_lbc   = lbc_pb[pb_word*IO_W +: IO_W];
  assign pb_level = mem[addr_of(rd_page, CH_W'(32'(pb_bl) / BL_PAR))][(32'(pb_bl) % BL_PAR)*CELL_BITS +: CELL_BITS];

  // a DBAM group must stay inside one block (one NAND string)
  a_search_in_block: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd_op == PL_SEARCH) |-> ((32'(cmd_page) % NUM_WL) + DBAM_K <= NUM_WL));
  a_bl_range: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd_op == PL_PROG) |-> (32'(cmd_bl) < NUM_BL));
endmodule
