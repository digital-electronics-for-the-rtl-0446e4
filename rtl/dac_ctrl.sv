// dac_ctrl: programs the threshold DACs of the eight analog boards.
//
// Each analog board carries one TLV5630 octuple 12-bit DAC. A table of 80
// 12-bit registers, written by the microcontroller, holds the 64 discriminator
// thresholds (entry 8b + c is channel c of board b) and 16 control registers
// (entries 64 + 2b and 65 + 2b are CTRL0 and CTRL1 of board b). On 'start'
// the FPGA sends all 80 registers in a row: for each board, CTRL0, CTRL1 and
// then DAC A..H, each as a 16-bit word {4-bit register address, 12-bit
// value}, MSB first. SCLK and DIN are common to all boards; the frame sync
// FS (active low) is separate per board, so no daisy chain is needed. DIN
// changes while SCLK is high and the DAC takes it on the falling edge.
// When the last word is sent, the common LDAC# is pulsed low so that all 64
// outputs change together. Table layout, 80 registers, per-board FS, common
// SCLK/DIN/LDAC# and the falling-edge sampling follow the paper; register
// addresses (0-7 DAC A-H, 8 CTRL0, 9 CTRL1) are those of the TLV5630 data
// sheet; the word order and SCLK rate (clk / (2*SCLK_HALF), 10 MHz) are
// this design's choices.
//
// Timing: one word takes 33 * SCLK_HALF cycles (FS high gap, FS set-up,
// 16 SCLK periods less the last high half); all 80 words and the LDAC#
// pulse take 80 * 33 * SCLK_HALF + SCLK_HALF cycles (10564, 132 us at 80 MHz).
module dac_ctrl #(
  parameter int N_BOARDS  = 8,
  parameter int N_REGS    = 80,
  parameter int SCLK_HALF = 4
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      tbl_we,
  input  logic [6:0]                tbl_waddr,
  input  logic [11:0]               tbl_wdata,
  input  logic [6:0]                tbl_raddr,
  output logic [11:0]               tbl_rdata,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,       // one-cycle pulse
  output logic                      sclk,
  output logic                      din,
  output logic [N_BOARDS-1:0]       fs_n,
  output logic                      ldac_n
);
  localparam int WPB = 10;                       // words per board
  localparam int DW  = $clog2(SCLK_HALF + 1);

  logic [11:0] tbl [N_REGS];

  typedef enum logic [2:0] {S_IDLE, S_FS, S_LO, S_HI, S_GAP, S_LDAC} state_t;
  state_t state;

  logic [DW-1:0] div;
  logic [3:0]    bitn;      // bit on DIN
  logic [2:0]    board;
  logic [3:0]    wnum;      // word of the board, 0..9
  logic [15:0]   word;

  // table index and register address of word wnum of board 'board'
  logic [6:0] idx;
  logic [3:0] radr;
  always_comb begin
    if (wnum < 4'd2) begin
      idx  = 7'(64 + 2 * board + wnum);
      radr = 4'd8 + wnum;
    end else begin
      idx  = 7'(8 * board) + 7'(wnum - 4'd2);
      radr = wnum - 4'd2;
    end
  end

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_waddr] <= tbl_wdata;
    tbl_rdata <= tbl[tbl_raddr];
  end

  wire tick = (div == DW'(SCLK_HALF - 1));

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state  <= S_IDLE;
      div    <= '0;
      bitn   <= '0;
      board  <= '0;
      wnum   <= '0;
      word   <= '0;
      sclk   <= 1'b1;
      din    <= 1'b0;
      fs_n   <= '1;
      ldac_n <= 1'b1;
    end else begin
      div <= tick ? '0 : div + DW'(1);
      unique case (state)
        S_IDLE: begin
          div <= '0;
          if (start) begin
            board <= '0;
            wnum  <= '0;
            state <= S_GAP;
          end
        end
        S_GAP: if (tick) begin            // FS high between words
          word         <= {radr, tbl[idx]};
          din          <= radr[3];
          bitn         <= 4'd15;
          fs_n[board]  <= 1'b0;
          state        <= S_FS;
        end
        S_FS: if (tick) begin             // FS set-up, then first falling edge
          sclk  <= 1'b0;
          state <= S_LO;
        end
        S_LO: if (tick) begin
          sclk <= 1'b1;
          if (bitn == 4'd0) begin
            fs_n <= '1;
            if (wnum == 4'(WPB - 1)) begin
              wnum <= '0;
              if (board == 3'(N_BOARDS - 1)) begin
                ldac_n <= 1'b0;
                state  <= S_LDAC;
              end else begin
                board <= board + 3'd1;
                state <= S_GAP;
              end
            end else begin
              wnum  <= wnum + 4'd1;
              state <= S_GAP;
            end
          end else begin
            bitn  <= bitn - 4'd1;
            din   <= word[bitn - 4'd1];
            state <= S_HI;
          end
        end
        S_HI: if (tick) begin
          sclk  <= 1'b0;
          state <= S_LO;
        end
        S_LDAC: if (tick) begin
          ldac_n <= 1'b1;
          done   <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // at most one DAC is selected at a time
  a_one_fs: assert property (@(posedge clk) disable iff (rst) $countones(~fs_n) <= 1);
endmodule
