// cnc_ctrl: control module of one CNC unit (the "CNC CTRL" of a cache slice).
//
// A finite state machine driven by the 3-bit CNC signal of each request and
// by the miss / miss-response signals of the cache slice. It produces the
// active-low chip-select, write-enable and output-enable (csb, web, oeb) and
// the address for the slice's data array, the write controls and the input
// MUX select for the CNC array, the command-array controls, and the controls
// of the sense-amplifier row.
//
//   SW_CNC     one cycle: the 32-bit word on the data bus is written at the
//              CNC write pointer, which then advances by one word.
//   RD_D2CNC   cycle 1 reads the cache block from the data array, cycle 2
//              writes all 512 bits into the next free CNC row. On a miss the
//              FSM waits for the MSHR's miss response and reads again.
//   LD_CMD     same tag/miss path; the block (32 commands) is appended to the
//              command array. The first LD_CMD after an algorithm run starts a
//              new program at command 0.
//   ALG (five families) runs the loaded program, then reads CNC row
//              RESULT_ROW and writes it to the data array at the request's
//              address (again retried after a miss). The CNC write pointer
//              returns to LOAD_BASE.
//
// Command execution is a three-stage pipeline issuing one command per cycle:
// F reads the command array, E decodes and opens the wordline(s), S loads,
// shifts or extends the sense-amplifier flip-flops or writes a row back. A
// shift by N columns stays N cycles in S (the amplifiers move one column per
// cycle) and holds F and E meanwhile. A row written in S and read in E in the
// same cycle is forwarded by the array.
//
// Each finished request returns a response to the issuing core; a new request
// is taken only in IDLE with the response slot free.
//
// From the paper: the signal set of the control logic (nc[2:0], miss, state,
// mux, addr, oeb, csb, web), the incrementing write address starting at a
// fixed row, the two-cycle block transfer, the stall on misses, one command
// per cycle, and writing the result back to the data array. This design's
// own choices: the nc codes, one block per LD_CMD, the pipeline, where the
// result row is, and the data-array handshake (read result one cycle later).
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). The registers use it as an asynchronous
// reset; the only other use is the `disable iff (!rst_n)` of the assertions
// at the end, which is simulation-only and adds no logic. It also reports
// unused bits (UNUSEDSIGNAL): the registered request packet keeps fields the
// controller does not read (valid, the algorithm variant, the SW payload,
// which is written from the live request, and the destination slice), and
// the decoded-command and address helpers carry bits that a given use
// ignores.
module cnc_ctrl
  import cnc_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 512,
  parameter int unsigned CMD_ROWS   = 256,
  parameter int unsigned RESULT_ROW = 0,
  parameter int unsigned LOAD_BASE  = 0,
  parameter int unsigned AW         = $clog2(ROWS),
  parameter int unsigned WORDS      = COLS / 32,
  parameter int unsigned PER        = COLS / CMD_W,
  parameter int unsigned CAW        = $clog2(CMD_ROWS * PER),
  parameter int unsigned CMAW       = $clog2(CMD_ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // request from the interconnect
  input  cnc_req_t           req,
  output logic               req_ready,
  output cnc_resp_t          resp,
  input  logic               resp_ready,
  // data array of the cache slice
  output logic               dc_csb,
  output logic               dc_web,
  output logic               dc_oeb,
  output logic [PA_W-1:0]    dc_addr,
  input  logic               dc_miss,
  input  logic               dc_miss_rsp,
  // CNC array
  output logic               arr_rd_en,
  output logic               arr_act2,
  output logic [AW-1:0]      arr_ra,
  output logic [AW-1:0]      arr_rb,
  output logic               arr_we,
  output logic [AW-1:0]      arr_wa,
  output logic [WORDS-1:0]   arr_wmask,
  output logic [1:0]         mux,        // 0 data bus word, 1 cache block, 2 SA row
  // sense-amplifier row
  output logic               sa_load,
  output sa_op_e             sa_op,
  output logic               sa_shift,
  output logic               sa_right,
  output logic               sa_ext,
  output logic [7:0]         sa_col,
  output logic [2:0]         sa_w,
  // command array
  output logic               cmd_we,
  output logic [CMAW-1:0]    cmd_wrow,
  output logic               cmd_re,
  output logic [CAW-1:0]     cmd_raddr,
  input  logic [CMD_W-1:0]   cmd_rdata,
  // status
  output logic [3:0]         state,
  output logic               cmd_ovf,
  output logic               illegal_cmd
);

  localparam logic [1:0] MUX_WORD = 2'd0, MUX_BLOCK = 2'd1, MUX_SA = 2'd2;
  localparam int unsigned WPW = $clog2(WORDS);     // word-in-row bits
  localparam int unsigned CNT_W = CAW + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_DC_CHK, S_MISS_WAIT, S_DC_REQ, S_ALG_RUN,
    S_WB_RD, S_WB_WR, S_WB_CHK, S_WB_WAIT
  } st_e;

  st_e st;
  assign state = st;

  cnc_req_t req_q;
  cnc_resp_t resp_q;
  assign resp = resp_q;

  logic [AW+WPW-1:0] wptr;         // CNC write pointer, in 32-bit words
  logic [CNT_W-1:0]  cmd_cnt;      // commands loaded
  logic              fresh;        // next LD_CMD starts a new program
  logic              ovf_q;
  assign cmd_ovf = ovf_q;

  // ---------------------------------------------------------- pipeline
  logic [CNT_W-1:0]  pc;
  logic              e_v;          // command read last cycle, on cmd_rdata
  logic              s_v;
  cmd_dec_t          s_dec;
  logic [7:0]        s_cnt;        // remaining shift steps
  logic [AW-1:0]     src1_q;
  cmd_dec_t          e_dec;
  logic              stall;

  cnc_cmd_decoder u_dec (.cmd(cmd_rdata), .dec(e_dec));

  assign illegal_cmd = st == S_ALG_RUN && e_v && e_dec.illegal;

  wire running  = st == S_ALG_RUN;
  assign stall  = running && s_v && s_dec.kind == K_SHIFT && s_cnt > 8'd1;
  wire fetch    = running && !stall && pc < cmd_cnt;
  wire pipe_empty = !e_v && !s_v && pc >= cmd_cnt;

  // next row for a full-block load: round the pointer up to a row boundary
  logic [AW-1:0] blk_row;
  assign blk_row = (wptr[WPW-1:0] == '0) ? wptr[AW+WPW-1:WPW] : wptr[AW+WPW-1:WPW] + 1'b1;

  // command array already holds CMD_ROWS blocks of this program
  wire ld_full = !fresh && (cmd_cnt + CNT_W'(PER) > CNT_W'(CMD_ROWS * PER));

  wire accept = req_ready && req.valid;
  assign req_ready = st == S_IDLE && (!resp_q.valid || resp_ready);

  function automatic logic [PA_W-1:0] blk_addr(input logic [PA_W-1:0] a);
    return {a[PA_W-1:6], 6'd0};
  endfunction

  // ------------------------------------------------------- output logic
  always_comb begin
    dc_csb = 1'b1; dc_web = 1'b1; dc_oeb = 1'b1;
    dc_addr = blk_addr(req_q.addr);
    arr_rd_en = 1'b0; arr_act2 = 1'b0; arr_ra = '0; arr_rb = '0;
    arr_we = 1'b0; arr_wa = '0; arr_wmask = '0; mux = MUX_WORD;
    sa_load = 1'b0; sa_op = SA_AND; sa_shift = 1'b0; sa_right = 1'b0;
    sa_ext = 1'b0; sa_col = '0; sa_w = '0;
    cmd_we = 1'b0; cmd_wrow = '0; cmd_re = 1'b0; cmd_raddr = '0;

    unique case (st)
      S_IDLE: if (accept) begin
        if (req.nc == NC_SW_CNC) begin
          arr_we    = 1'b1;
          arr_wa    = wptr[AW+WPW-1:WPW];
          arr_wmask = WORDS'(1) << wptr[WPW-1:0];
          mux       = MUX_WORD;
        end else if (req.nc == NC_RD_D2CNC || req.nc == NC_LD_CMD) begin
          dc_csb  = 1'b0; dc_oeb = 1'b0;
          dc_addr = blk_addr(req.addr);
        end
      end
      S_DC_REQ: begin
        dc_csb = 1'b0; dc_oeb = 1'b0;
      end
      S_DC_CHK: if (!dc_miss) begin
        if (req_q.nc == NC_RD_D2CNC) begin
          arr_we    = 1'b1;
          arr_wa    = blk_row;
          arr_wmask = '1;
          mux       = MUX_BLOCK;
        end else if (!ld_full) begin
          cmd_we   = 1'b1;
          cmd_wrow = fresh ? '0 : cmd_cnt[CAW-1 -: CMAW];
        end
      end
      S_ALG_RUN: begin
        // F
        cmd_re    = fetch;
        cmd_raddr = pc[CAW-1:0];
        // E: open wordlines
        if (e_v && !stall) begin
          if (e_dec.kind == K_RD_ROW) begin
            arr_rd_en = 1'b1; arr_ra = e_dec.addr[AW-1:0];
          end else if (e_dec.kind == K_LOGIC_OP) begin
            arr_rd_en = 1'b1; arr_act2 = 1'b1;
            arr_ra = src1_q; arr_rb = e_dec.addr[AW-1:0];
          end
        end
        // S: sense amplifiers / write back
        if (s_v) begin
          unique case (s_dec.kind)
            K_RD_ROW, K_LOGIC_OP: begin sa_load = 1'b1; sa_op = s_dec.op; end
            K_WR_ROW: begin
              arr_we = 1'b1; arr_wa = s_dec.addr[AW-1:0]; arr_wmask = '1; mux = MUX_SA;
            end
            K_SHIFT: begin sa_shift = s_cnt != 8'd0; sa_right = s_dec.right; end
            K_EXT_BIT: begin sa_ext = 1'b1; sa_col = s_dec.addr; sa_w = s_dec.width; end
            default: ;
          endcase
        end
      end
      S_WB_RD: begin
        arr_rd_en = 1'b1; arr_ra = AW'(RESULT_ROW);
      end
      S_WB_WR: begin
        dc_csb = 1'b0; dc_web = 1'b0;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      req_q   <= '0;
      resp_q  <= '0;
      wptr    <= (AW+WPW)'(LOAD_BASE * WORDS);
      cmd_cnt <= '0;
      fresh   <= 1'b1;
      ovf_q   <= 1'b0;
      pc      <= '0;
      e_v     <= 1'b0;
      s_v     <= 1'b0;
      s_dec   <= '0;
      s_cnt   <= '0;
      src1_q  <= '0;
    end else begin
      if (resp_q.valid && resp_ready) resp_q.valid <= 1'b0;

      unique case (st)
        S_IDLE: if (accept) begin
          req_q <= req;
          unique case (req.nc)
            NC_SW_CNC: begin
              wptr   <= wptr + 1'b1;
              resp_q <= '{valid: 1'b1, nc: req.nc, core: req.core};
            end
            NC_RD_D2CNC, NC_LD_CMD: st <= S_DC_CHK;
            default: begin
              st <= S_ALG_RUN;
              pc <= '0; e_v <= 1'b0; s_v <= 1'b0;
            end
          endcase
        end

        S_DC_REQ: st <= S_DC_CHK;

        S_DC_CHK: begin
          if (dc_miss) st <= S_MISS_WAIT;
          else begin
            if (req_q.nc == NC_RD_D2CNC) begin
              wptr <= {blk_row + 1'b1, {WPW{1'b0}}};
            end else begin
              if (fresh) begin
                cmd_cnt <= CNT_W'(PER);
                ovf_q   <= 1'b0;
                fresh   <= 1'b0;
              end else if (ld_full) begin
                ovf_q   <= 1'b1;
              end else begin
                cmd_cnt <= cmd_cnt + CNT_W'(PER);
              end
            end
            resp_q <= '{valid: 1'b1, nc: req_q.nc, core: req_q.core};
            st     <= S_IDLE;
          end
        end

        S_MISS_WAIT: if (dc_miss_rsp) st <= S_DC_REQ;

        S_ALG_RUN: begin
          if (fetch) pc <= pc + 1'b1;
          if (!stall) begin
            e_v <= fetch;
            s_v <= e_v;
            if (e_v) begin
              s_dec <= e_dec;
              s_cnt <= e_dec.addr;
              if (e_dec.kind == K_ACT_ROW) src1_q <= e_dec.addr[AW-1:0];
            end
          end else begin
            s_cnt <= s_cnt - 1'b1;
          end
          if (pipe_empty) st <= S_WB_RD;
        end

        S_WB_RD:  st <= S_WB_WR;
        S_WB_WR:  st <= S_WB_CHK;
        S_WB_CHK: begin
          if (dc_miss) st <= S_WB_WAIT;
          else begin
            resp_q <= '{valid: 1'b1, nc: req_q.nc, core: req_q.core};
            wptr   <= (AW+WPW)'(LOAD_BASE * WORDS);
            fresh  <= 1'b1;
            st     <= S_IDLE;
          end
        end
        S_WB_WAIT: if (dc_miss_rsp) st <= S_WB_RD;
        default: st <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ checks
  assert property (@(posedge clk) disable iff (!rst_n)
                   resp_q.valid && !resp_ready |=> resp_q.valid && $stable(resp_q))
    else $error("cnc_ctrl: response dropped before it was taken");
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(arr_we && mux == MUX_WORD && $countones(arr_wmask) != 1))
    else $error("cnc_ctrl: word write must enable exactly one word");

endmodule
