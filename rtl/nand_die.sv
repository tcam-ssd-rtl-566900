// nand_die: behavioural model of one SLC NAND flash die with the TCAM-SSD
// search periphery. Not synthesizable logic in the sense of the real part: the
// cell strings, sense amplifiers and wordline voltage switches are analog; this
// model reproduces their logical effect and their latencies.
//
// Organisation: PLANES planes of NBLOCKS blocks, each block NWL wordlines by
// PAGE_BITS bitlines, and one page register of PAGE_BITS bits. A cell holding 1
// is erased (low threshold voltage): it conducts under both Vread and Vpass. A
// cell holding 0 is programmed: it conducts only under Vpass.
//
// Commands (one at a time, cmd_valid/cmd_ready handshake, accepted when idle):
//   OP_READ      page -> page register after T_READ cycles.
//   OP_PROG      the controller then streams PAGE_BITS/64 bursts on din; after
//                T_PROG cycles the page is programmed (cells can only go 1->0,
//                so the page becomes old AND new).
//   OP_PROG_INV  write inversion: programs the page with the inverse of the
//                page register, without any data transfer. After programming
//                wordline 2i with the bits of a data word, OP_PROG_INV on
//                wordline 2i+1 stores the complementary cells.
//   OP_ERASE     every page of the block back to all ones after T_ERASE.
//   OP_SRCH      one select bit per wordline drives it with Vread (1) or Vpass
//                (0), modelling the per-wordline 2:1 voltage muxes that replace
//                the block's voltage decoder. A bitline conducts, i.e. reports
//                a match, only when every cell along it conducts; the result
//                (the match vector) goes to the page register. The model walks
//                the wordlines one per cycle, which fits in T_SRCH.
// After READ and SRCH, dout_avail rises; the controller reads any burst of the
// page register through dout_sel/dout (combinational, dout_sel taken modulo
// the page length) and pulses release_i to
// free the die. busy is the die's ready/busy line.
//
// Follows the paper: the two-cell bit storage, Vread/Vpass search, the SRCH
// command, write inversion, the read/search/program latencies of the evaluated
// configuration. This model's own choices: the abstract burst bus instead of an
// 8-bit ONFI bus, the erase time, and that reset returns every block to the
// erased state (flash contents are not kept over a reset). NBLOCKS is 4 here
// rather than the paper's 2,048 per plane: 2,048 blocks of 3.2 MB each would
// need 13 GB of simulator memory per die.
module nand_die
  import tcam_pkg::*;
#(
  parameter int PBITS   = PAGE_BITS,
  parameter int NWL     = WORDLINES,
  parameter int NPLANES = PLANES,
  parameter int NBLOCKS = 4,
  parameter int T_READ  = T_READ_CYC,
  parameter int T_SRCH  = T_SRCH_CYC,
  parameter int T_PROG  = T_PROG_CYC,
  parameter int T_ERASE = T_ERASE_CYC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  die_cmd_t               cmd,
  input  logic                   din_valid,
  input  logic [BURST_BITS-1:0]  din,
  output logic                   dout_avail,
  input  logic [COL_W-1:0]       dout_sel,
  output logic [BURST_BITS-1:0]  dout,
  input  logic                   release_i,
  output logic                   busy
);
  localparam int ROWS   = NPLANES * NBLOCKS * NWL;
  localparam int ROW_W  = $clog2(ROWS);
  localparam int NBURST = PBITS / BURST_BITS;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SRCH, S_BUSY, S_HOLD} state_e;

  state_e              state;
  flash_op_e           op_q;
  logic [NWL-1:0]      sel_q;
  logic [ROW_W-1:0]    base_q;      // first row of the addressed block
  logic [ROW_W-1:0]    row_q;       // addressed row
  logic [31:0]         cnt;
  logic [PBITS-1:0]    page_reg;
  logic [PBITS-1:0]    cells [ROWS];
  logic [ROWS-1:0]     erased;      // row reads as all ones
  logic [PBITS-1:0]    rd_row;

  assign rd_row     = erased[row_q] ? '1 : cells[row_q];
  assign cmd_ready  = (state == S_IDLE);
  assign dout_avail = (state == S_HOLD);
  assign busy       = (state != S_IDLE) && (state != S_HOLD);
  assign dout       = page_reg[(int'(dout_sel) % NBURST)*BURST_BITS +: BURST_BITS];

  function automatic logic [ROW_W-1:0] blk_base(die_cmd_t c);
    return ROW_W'(((int'(c.plane) % NPLANES) * NBLOCKS + (int'(c.block) % NBLOCKS)) * NWL);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      op_q   <= OP_NOP;
      sel_q  <= '0;
      base_q <= '0;
      row_q  <= '0;
      cnt    <= '0;
      erased <= '1;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          op_q   <= cmd.op;
          sel_q  <= cmd.wl_sel;
          base_q <= blk_base(cmd);
          row_q  <= blk_base(cmd) + ROW_W'(cmd.wl);
          cnt    <= '0;
          case (cmd.op)
            OP_PROG:     state <= S_LOAD;
            OP_PROG_INV: state <= S_BUSY;
            OP_READ:     state <= S_BUSY;
            OP_ERASE:    state <= S_BUSY;
            OP_SRCH: begin
              row_q <= blk_base(cmd);
              state <= S_SRCH;
            end
            default:     state <= S_IDLE;
          endcase
        end
        S_LOAD: if (din_valid) begin
          cnt <= cnt + 1;
          if (cnt == NBURST - 1) begin
            cnt   <= '0;
            state <= S_BUSY;
          end
        end
        S_SRCH: begin
          // one wordline per cycle; the last step lands at cycle NWL
          cnt   <= cnt + 1;
          row_q <= row_q + 1'b1;
          if (cnt == NWL - 1) state <= S_BUSY;
        end
        S_BUSY: begin
          cnt <= cnt + 1;
          unique case (op_q)
            OP_READ:  if (cnt >= T_READ - 1)  state <= S_HOLD;
            OP_SRCH:  if (cnt >= T_SRCH - 1)  state <= S_HOLD;
            OP_ERASE: if (cnt >= T_ERASE - 1) begin
              for (int w = 0; w < NWL; w++) erased[int'(base_q) + w] <= 1'b1;
              state <= S_IDLE;
            end
            default:  if (cnt >= T_PROG - 1) begin
              erased[row_q] <= 1'b0;
              state <= S_IDLE;
            end
          endcase
        end
        S_HOLD: if (release_i) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Array and page register: no reset, the page register is written before it
  // is read and erased[] masks cells that were never programmed.
  always_ff @(posedge clk) begin
    case (state)
      S_IDLE: if (cmd_valid && cmd.op == OP_SRCH) page_reg <= '1;
      S_LOAD: if (din_valid) page_reg[cnt[COL_W-1:0]*BURST_BITS +: BURST_BITS] <= din;
      S_SRCH: if (sel_q[cnt[$clog2(NWL)-1:0]]) page_reg <= page_reg & rd_row;
      S_BUSY: begin
        if (op_q == OP_READ && cnt >= T_READ - 1) page_reg <= rd_row;
        if (op_q == OP_PROG && cnt >= T_PROG - 1) cells[row_q] <= rd_row & page_reg;
        if (op_q == OP_PROG_INV && cnt >= T_PROG - 1) cells[row_q] <= rd_row & ~page_reg;
      end
      default: ;
    endcase
  end

  // The SRCH walk must fit in the search latency.
  initial assert (T_SRCH > NWL) else $error("T_SRCH must exceed the wordline count");

endmodule
