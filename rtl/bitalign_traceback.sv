// bitalign_traceback: BitAlign traceback over the stored R[d] bitvectors.
//
// Starts at the first character of the window (i = 0), at the window's edit
// distance d and at the top pattern bit b = mbit. Each step re-creates, from
// the stored R[d] and R[d-1] of the successors j of character i (given by its
// HopBits) and from R_i[d-1], which of the four moves explains the 0 at bit b
// of R_i[d]:
//     match        PM[T_i] bit b = 0 and R_j[d]   bit b-1 = 0  -> (j, d,   b-1)
//     substitution                     R_j[d-1] bit b-1 = 0    -> (j, d-1, b-1)
//     insertion                        R_i[d-1] bit b-1 = 0    -> (i, d-1, b-1)
//     deletion                         R_j[d-1] bit b   = 0    -> (j, d-1, b)
// (a bit below 0 counts as 0, and a successor past the window end as all
// ones). The first move that holds in the order match, substitution,
// insertion, deletion is taken, the first successor first, and emitted as an
// edit operation. The walk ends when bit 0 has been consumed, or, in a
// window that is not the last, once stop_p pattern characters or stop_t text
// characters have been consumed (the overlap of the windows is recomputed by
// the next window). This is GenASM's traceback extended to hops, which the
// paper describes; the order of preference is this design's choice, the
// paper leaving the scoring function to the user.
//
// Timing: one read cycle plus one data cycle for the character and R_i[d-1],
// the same for every successor with a HopBits entry of 1, and one decision
// cycle per operation.
module bitalign_traceback
  import segram_pkg::*;
#(
  parameter int unsigned NPE       = 64,
  parameter int unsigned W         = 128,
  parameter int unsigned TW        = 128,
  localparam int unsigned IW = $clog2(TW),
  localparam int unsigned PW = $clog2(NPE),
  localparam int unsigned BW = $clog2(W)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [PW-1:0]       d0,
  input  logic [BW-1:0]       mbit,
  input  logic [IW:0]         nw,       // characters in the window
  input  logic [BW:0]         stop_p,
  input  logic [IW:0]         stop_t,
  input  logic [3:0][W-1:0]   pm,       // window pattern bitmasks per base
  // text of the window
  output logic [IW-1:0]       txt_addr,
  input  txt_entry_t          txt_data,
  // bitvector scratchpads
  output logic [PW-1:0]       pe_a,
  output logic [IW-1:0]       addr_a,
  input  logic [W-1:0]        data_a,
  output logic [PW-1:0]       pe_b,
  output logic [IW-1:0]       addr_b,
  input  logic [W-1:0]        data_b,
  // result
  output logic                op_valid,
  output edit_op_e            op,
  output logic                done,
  output logic                error,
  output logic [BW:0]         pcons,
  output logic [IW:0]         tcons,
  output logic                busy
);
  typedef enum logic [2:0] {T_IDLE, T_RD, T_RD2, T_SCAN, T_SCAN2, T_DEC} state_e;
  state_e state;

  logic [IW:0]              i;
  logic [PW-1:0]            d;
  logic [BW:0]              b;       // pattern bit, one extra bit for -1
  txt_entry_t               ent;
  logic [W-1:0]             ri_dm1;
  logic [HOP_LIMIT-1:0]     left;    // successors still to examine
  logic [3:0]               h;       // successor being examined
  logic                     m_ok, s_ok, d_ok;
  logic [IW:0]              jm, js, jd;
  logic [BW-1:0]            bl;
  logic                     pm_bit;
  logic [IW:0]              j;

  assign bl     = b[BW-1:0];
  assign pm_bit = pm[ent.base][bl];
  assign j      = i + (IW+1)'(h);

  // next successor with a HopBits entry of 1
  logic [3:0] hnext;
  logic       hany;
  always_comb begin
    hnext = '0;
    hany  = 1'b0;
    for (int k = HOP_LIMIT - 1; k >= 0; k--)
      if (left[k]) begin
        hnext = 4'(k + 1);
        hany  = 1'b1;
      end
  end

  always_comb begin
    txt_addr = IW'(i);
    pe_a     = d;
    addr_a   = IW'(i + (IW+1)'(hnext));
    pe_b     = (d == 0) ? PW'(1) : d - 1'b1;
    addr_b   = (state == T_RD) ? IW'(i) : IW'(i + (IW+1)'(hnext));
  end

  assign busy = (state != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      i        <= '0;
      d        <= '0;
      b        <= '0;
      ent      <= '0;
      ri_dm1   <= '1;
      left     <= '0;
      h        <= '0;
      {m_ok, s_ok, d_ok} <= '0;
      jm <= '0; js <= '0; jd <= '0;
      op_valid <= 1'b0;
      op       <= OP_MATCH;
      done     <= 1'b0;
      error    <= 1'b0;
      pcons    <= '0;
      tcons    <= '0;
    end else begin
      op_valid <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          i     <= '0;
          d     <= d0;
          b     <= {1'b0, mbit};
          pcons <= '0;
          tcons <= '0;
          error <= 1'b0;
          state <= T_RD;
        end
        T_RD: state <= T_RD2;
        T_RD2: begin
          ent    <= txt_data;
          ri_dm1 <= data_b;
          left   <= txt_data.hop;
          {m_ok, s_ok, d_ok} <= '0;
          if (b == 0) begin
            // last pattern character: it may end at any text position
            op_valid <= 1'b1;
            pcons    <= pcons + 1'b1;
            state    <= T_IDLE;
            done     <= 1'b1;
            if (!pm[txt_data.base][0]) begin
              op    <= OP_MATCH;
              tcons <= i + 1'b1;
            end else if (d != 0) begin
              op    <= OP_SUB;
              tcons <= i + 1'b1;
            end else begin
              op_valid <= 1'b0;
              error    <= 1'b1;
            end
          end else begin
            state <= T_SCAN;
          end
        end
        T_SCAN: begin
          if (hany && (i + (IW+1)'(hnext)) < nw) begin
            h     <= hnext;
            left[hnext - 4'd1] <= 1'b0;
            state <= T_SCAN2;
          end else begin
            state <= T_DEC;
          end
        end
        T_SCAN2: begin
          if (!m_ok && !pm_bit && !data_a[bl - 1'b1]) begin m_ok <= 1'b1; jm <= j; end
          if (d != 0 && !s_ok && !data_b[bl - 1'b1])  begin s_ok <= 1'b1; js <= j; end
          if (d != 0 && !d_ok && !data_b[bl])         begin d_ok <= 1'b1; jd <= j; end
          state <= T_SCAN;
        end
        T_DEC: begin
          op_valid <= 1'b1;
          state    <= T_RD;
          if (m_ok) begin
            op <= OP_MATCH; i <= jm; b <= b - 1'b1;
            pcons <= pcons + 1'b1; tcons <= jm;
          end else if (s_ok) begin
            op <= OP_SUB; i <= js; b <= b - 1'b1; d <= d - 1'b1;
            pcons <= pcons + 1'b1; tcons <= js;
          end else if (d != 0 && !ri_dm1[bl - 1'b1]) begin
            op <= OP_INS; b <= b - 1'b1; d <= d - 1'b1;
            pcons <= pcons + 1'b1;
          end else if (d_ok) begin
            op <= OP_DEL; i <= jd; d <= d - 1'b1; tcons <= jd;
          end else begin
            op_valid <= 1'b0;
            error    <= 1'b1;
            done     <= 1'b1;
            state    <= T_IDLE;
          end
          // stop in a window that is not the last one
          if (m_ok || s_ok || (d != 0 && !ri_dm1[bl - 1'b1])) begin
            if (pcons + 1'b1 >= stop_p) begin done <= 1'b1; state <= T_IDLE; end
          end
          if (m_ok && jm >= stop_t) begin done <= 1'b1; state <= T_IDLE; end
          else if (!m_ok && s_ok && js >= stop_t) begin done <= 1'b1; state <= T_IDLE; end
          else if (!m_ok && !s_ok && !(d != 0 && !ri_dm1[bl - 1'b1]) && d_ok && jd >= stop_t) begin
            done <= 1'b1; state <= T_IDLE;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
