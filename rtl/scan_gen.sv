// scan_gen: generator of the column-wise scan input pattern.
//
// Chain-NN computes K adjacent ofmap rows at once from an input pattern of
// 2K-1 ifmap rows and W columns. The pattern is streamed on two channels:
// OddIF carries the odd columns (1, 3, 5, ...) and EvenIF the even columns.
// Pixel (column c, row r), both counted from 1, is sent at timestamp
// K*(c-1) + r, so each channel sends one column of 2K-1 pixels every 2K
// cycles and the even channel starts K cycles after the odd one. With this
// order the K^2 pixels sent at timestamps t-K^2+1 .. t always form one KxK
// convolution window, scanned column by column, for every t from K^2 to
// K*W+K-1: one new window, hence one output per primitive, every cycle.
//
// The generator runs n_g * n_c patterns back to back (n_g output-channel
// groups, n_c ifmap channels each), each lasting T_p = K*W + K - 1 cycles.
// For each pattern it issues read requests to the two iMemory banks, which
// hold each channel's pixels in exactly this streaming order, so the read
// addresses simply count up; they restart at 0 with every new group. Along
// with the data it produces the window control for the chain: wv (the
// window ending now is a complete one), podd (its first column is odd) and
// kaddr (kbase plus the pattern number: the kMemory address of its weights).
//
// Timing: odd_re/even_re and their addresses are combinational from the
// counters in the cycle of a timestamp; ctrl_out is registered once, so it
// lines up with iMemory read data that arrives one cycle later. done pulses
// in the cycle after the last timestamp of the last pattern.
//
// Follows the paper: the timestamps of Fig. 5(b) and the 2K-1 row pattern
// (Sec. IV.C). This design's choices: bank layout, back-to-back patterns
// with K-1 idle window slots between them, and the control encoding.
module scan_gen
  import chain_nn_pkg::*;
#(
  parameter int unsigned IDEPTH = IMEM_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [K_W-1:0]   cfg_k,
  input  logic [W_W-1:0]   cfg_w,
  input  logic [CNT_W-1:0] n_c,
  input  logic [CNT_W-1:0] n_g,
  input  kaddr_t           kbase,
  output logic             odd_re,
  output logic [$clog2(IDEPTH)-1:0]  odd_addr,
  output logic             even_re,
  output logic [$clog2(IDEPTH)-1:0]  even_addr,
  output win_ctrl_t        ctrl_out,
  output logic             busy,
  output logic             done
);
  localparam int unsigned TW = 12;   // timestamp counter width

  logic [TW-1:0]      kk, tp, k2m1;
  logic [TW-1:0]      u;             // timestamp - 1 within the pattern
  logic [TW-1:0]      ph_o, ph_e;    // phase in the 2K-cycle channel period
  logic [W_W:0]       col_o, col_e;  // column carried by each channel
  logic [K_W-1:0]     s;             // row offset of the current window
  logic               podd;
  logic [CNT_W-1:0]   c_cnt, g_cnt;
  logic [CNT_W-1:0]   pat;
  logic [$clog2(IDEPTH)-1:0]    rp_o, rp_e;
  logic               wv;

  assign kk   = TW'(cfg_k) * TW'(cfg_k);
  assign tp   = TW'(cfg_k) * TW'(cfg_w) + TW'(cfg_k) - 1'b1;
  assign k2m1 = 2 * TW'(cfg_k) - 1'b1;

  assign odd_re    = busy && (col_o <= (W_W+1)'(cfg_w)) && (ph_o < k2m1);
  assign even_re   = busy && (col_e != '0) && (col_e <= (W_W+1)'(cfg_w)) && (ph_e < k2m1);
  assign odd_addr  = rp_o;
  assign even_addr = rp_e;
  assign wv        = busy && (u + 1'b1 >= kk);

  logic last_t;
  assign last_t = (u == tp - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; u <= '0;
      ph_o <= '0; ph_e <= '0; col_o <= '0; col_e <= '0;
      s <= '0; podd <= 1'b1; c_cnt <= '0; g_cnt <= '0; pat <= '0;
      rp_o <= '0; rp_e <= '0; ctrl_out <= '0;
    end else begin
      done     <= 1'b0;
      ctrl_out <= '{wv: wv, podd: podd, kaddr: kbase + kaddr_t'(pat)};
      if (start && !busy) begin
        busy <= 1'b1;
        c_cnt <= '0; g_cnt <= '0; pat <= '0;
        rp_o <= '0; rp_e <= '0;
        u <= '0; ph_o <= '0; ph_e <= TW'(cfg_k); col_o <= 1; col_e <= '0;
        s <= '0; podd <= 1'b1;
      end else if (busy) begin
        // channel counters
        if (odd_re)  rp_o <= rp_o + 1'b1;
        if (even_re) rp_e <= rp_e + 1'b1;
        if (ph_o == k2m1) begin ph_o <= '0; col_o <= col_o + (W_W+1)'(2); end
        else ph_o <= ph_o + 1'b1;
        if (ph_e == k2m1) begin ph_e <= '0; col_e <= col_e + (W_W+1)'(2); end
        else ph_e <= ph_e + 1'b1;
        // window counters
        if (wv) begin
          if (s == cfg_k - 1'b1) begin s <= '0; podd <= ~podd; end
          else s <= s + 1'b1;
        end
        u <= u + 1'b1;
        if (last_t) begin
          // next pattern
          u <= '0; ph_o <= '0; ph_e <= TW'(cfg_k); col_o <= 1; col_e <= '0;
          s <= '0; podd <= 1'b1;
          pat <= pat + 1'b1;
          if (c_cnt == n_c - 1'b1) begin
            c_cnt <= '0;
            rp_o <= '0; rp_e <= '0;
            if (g_cnt == n_g - 1'b1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
            g_cnt <= g_cnt + 1'b1;
          end else begin
            c_cnt <= c_cnt + 1'b1;
          end
        end
      end
    end
  end

endmodule
