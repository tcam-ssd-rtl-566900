// flash_chan_ctrl: controller of one flash channel, the dies on it sharing
// one data bus.
//
// Requests (chan_req_t) name a die and a chip command. The controller sends
// the command as soon as that die is idle; the die then works on its own, so
// several dies of the channel read, program or search at the same time (die
// interleaving). Only the bus is shared: it carries either the data of one
// program (PAGE_BURSTS bursts from wd_*) or the result of one read or search,
// never both at once. A die that has finished a READ or SRCH holds its page
// register until the controller has moved it: results are drained first,
// lowest die number first, before new commands are accepted.
//   READ   sends bursts col .. col+len-1 of the page (column-addressed data
//          out), idx = burst number, last on the final one.
//   SRCH   sends the whole match vector through early_term: all-zero bursts
//          are dropped and counted, the others leave with idx = the count;
//          the final burst always leaves, with last set.
//   xfer=0 drops the result without moving it (used to invalidate matches:
//          SRCH, then OP_PROG_INV on the valid wordline, keeps the match vector
//          in the die's page register).
// Beats leave on rsp_* (valid/ready) with the request's tag. idle is high when
// no die of the channel is busy or holding a result and no transfer runs.
//
// The paper names this block (Flash Chip Ctrl.) and places the early
// termination circuit in it; the request format, the drain-first policy and
// the bus abstraction are this design's.
module flash_chan_ctrl
  import tcam_pkg::*;
#(
  parameter int NDIES = DIES,
  parameter int NB    = PAGE_BURSTS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // requests
  input  logic                    req_valid,
  output logic                    req_ready,
  input  chan_req_t               req,
  // program data
  input  logic                    wd_valid,
  output logic                    wd_ready,
  input  logic [BURST_BITS-1:0]   wd_data,
  // returned beats
  output logic                    rsp_valid,
  input  logic                    rsp_ready,
  output chan_beat_t              rsp,
  // dies
  output logic [NDIES-1:0]        d_cmd_valid,
  input  logic [NDIES-1:0]        d_cmd_ready,
  output die_cmd_t                d_cmd,
  output logic [NDIES-1:0]        d_din_valid,
  output logic [BURST_BITS-1:0]   d_din,
  input  logic [NDIES-1:0]        d_dout_avail,
  output logic [COL_W-1:0]        d_dout_sel,
  input  logic [BURST_BITS-1:0]   d_dout [NDIES],
  output logic [NDIES-1:0]        d_release,
  // status
  output logic                    idle,
  output logic                    et_discard,
  output logic                    et_forward,
  output logic [$clog2(NDIES+1)-1:0] dies_busy
);
  localparam int DW = (NDIES > 1) ? $clog2(NDIES) : 1;

  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_XFER} cstate_e;
  cstate_e state;

  logic [NDIES-1:0]   pend;
  logic [NDIES-1:0]   p_srch, p_xfer;
  logic [TAG_W-1:0]   p_tag [NDIES];
  logic [COL_W-1:0]   p_col [NDIES];
  logic [COL_W:0]     p_len [NDIES];

  logic [DW-1:0]      cur;
  logic [COL_W-1:0]   ptr;
  logic [COL_W:0]     cnt;

  // die with a result waiting, lowest number first
  logic               have_res;
  logic [DW-1:0]      res_die;
  always_comb begin
    have_res = 1'b0;
    res_die  = '0;
    for (int d = NDIES - 1; d >= 0; d--)
      if (pend[d] && d_dout_avail[d]) begin
        have_res = 1'b1;
        res_die  = DW'(d);
      end
  end

  logic [DW-1:0] rdie;
  assign rdie = DW'(req.die);
  logic accept;
  assign accept = (state == C_IDLE) && !have_res && req_valid &&
                  d_cmd_ready[rdie] && !pend[rdie];
  assign req_ready = accept;
  assign d_cmd     = req.cmd;
  always_comb begin
    d_cmd_valid = '0;
    if (accept) d_cmd_valid[rdie] = 1'b1;
  end

  // program data path
  assign wd_ready = (state == C_LOAD);
  assign d_din    = wd_data;
  always_comb begin
    d_din_valid = '0;
    if (state == C_LOAD) d_din_valid[cur] = wd_valid;
  end

  // result path
  logic               xf_last;
  logic [BURST_BITS-1:0] xf_data;
  logic               et_in_valid, et_in_ready, et_out_valid, et_out_last;
  logic [BURST_BITS-1:0] et_out_data;
  logic [COL_W:0]     et_out_tag;
  logic               xf_adv;

  assign d_dout_sel = ptr;
  assign xf_data    = d_dout[cur];
  assign xf_last    = (cnt == p_len[cur] - 1'b1);
  assign et_in_valid = (state == C_XFER) && p_srch[cur];

  early_term #(.W(BURST_BITS), .CW(COL_W + 1)) u_et (
    .clk, .rst_n,
    .in_valid (et_in_valid), .in_ready (et_in_ready),
    .in_data  (xf_data),     .in_last  (xf_last),
    .out_valid(et_out_valid), .out_ready(rsp_ready),
    .out_data (et_out_data), .out_tag  (et_out_tag), .out_last(et_out_last),
    .discard  (et_discard),  .forward  (et_forward)
  );

  always_comb begin
    rsp = '0;
    rsp.tag = p_tag[cur];
    if (p_srch[cur]) begin
      rsp_valid = et_out_valid;
      rsp.data  = et_out_data;
      rsp.idx   = et_out_tag;
      rsp.last  = et_out_last;
      rsp.srch  = 1'b1;
      xf_adv    = et_in_ready;
    end else begin
      rsp_valid = (state == C_XFER);
      rsp.data  = xf_data;
      rsp.idx   = {1'b0, ptr};
      rsp.last  = xf_last;
      xf_adv    = rsp_ready;
    end
    if (state != C_XFER) begin
      rsp_valid = 1'b0;
      xf_adv    = 1'b0;
    end
  end

  always_comb begin
    d_release = '0;
    if (state == C_IDLE && have_res && !p_xfer[res_die]) d_release[res_die] = 1'b1;
    if (state == C_XFER && xf_adv && xf_last)           d_release[cur]     = 1'b1;
  end

  always_comb begin
    dies_busy = '0;
    for (int d = 0; d < NDIES; d++)
      if (!d_cmd_ready[d] && !d_dout_avail[d]) dies_busy = dies_busy + 1'b1;
  end
  assign idle = (state == C_IDLE) && (pend == '0) && (&d_cmd_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      pend   <= '0;
      p_srch <= '0;
      p_xfer <= '0;
      cur    <= '0;
      ptr    <= '0;
      cnt    <= '0;
      for (int d = 0; d < NDIES; d++) begin
        p_tag[d] <= '0;
        p_col[d] <= '0;
        p_len[d] <= '0;
      end
    end else begin
      case (state)
        C_IDLE: begin
          if (have_res) begin
            if (p_xfer[res_die]) begin
              cur   <= res_die;
              ptr   <= p_col[res_die];
              cnt   <= '0;
              state <= C_XFER;
            end else begin
              pend[res_die] <= 1'b0;
            end
          end else if (accept) begin
            if (req.cmd.op == OP_READ || req.cmd.op == OP_SRCH) begin
              pend[rdie]   <= 1'b1;
              p_srch[rdie] <= (req.cmd.op == OP_SRCH);
              p_xfer[rdie] <= req.xfer;
              p_tag[rdie]  <= req.tag;
              p_col[rdie]  <= (req.cmd.op == OP_SRCH) ? '0 : req.col;
              p_len[rdie]  <= (req.cmd.op == OP_SRCH) ? (COL_W+1)'(NB) : req.len;
            end
            if (req.cmd.op == OP_PROG) begin
              cur   <= rdie;
              cnt   <= '0;
              state <= C_LOAD;
            end
          end
        end
        C_LOAD: if (wd_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == (COL_W+1)'(NB - 1)) state <= C_IDLE;
        end
        C_XFER: if (xf_adv) begin
          ptr <= ptr + 1'b1;
          cnt <= cnt + 1'b1;
          if (xf_last) begin
            pend[cur] <= 1'b0;
            state     <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // A READ window must stay inside the page.
  always_ff @(posedge clk)
    if (rst_n && accept && req.cmd.op == OP_READ)
      assert (int'(req.col) + int'(req.len) <= NB && req.len != 0) else $error("READ window outside the page");

endmodule
