// vector_lane: one lane of the SIMD vector processor.
//
// A lane works on one element of every vector. It has a 16-entry operand and
// accumulation scratchpad (32-bit), a LUT function unit, a MAC unit, an ALU
// and a special function unit (SFU), connected by a two-stage pipeline:
//   stage 1 (operand select): read the scratchpad, the forwarding unit
//           replaces an operand with the stage-2 result when stage 2 is about
//           to write the same entry, the broadcast bus may supply the second
//           MAC operand, and the LUT unit picks the segment weight and bias
//           for V_LUT from the preloaded table using the operand value;
//   stage 2 (execute): the MAC unit computes acc + (a*b >>> shift) (also the
//           linear interpolation w*x + b of V_LUT and the fixed-point multiply
//           V_MULQ), the ALU does add and max, the result is written back.
// V_EXP and V_RCP are handed to the SFU in stage 2 and take several cycles:
// exponent 17 cycles (x*log2(e) split into integer part n and 16-bit fraction
// f, 2^f formed by one multiply per fraction bit with the constants
// 2^(2^-j), then shifted by n), reciprocal 34 cycles (restoring division of
// 2^32 by |x|). sfu_busy and sfu_rd tell the lane controller which entry is
// still being produced; the SFU has its own scratchpad write port.
// Numbers for V_LUT, V_EXP, V_RCP and V_MULQ are signed Q16.16, results
// saturate to the 32-bit range.
// Interface: one instruction per cycle (iv/ins), ld_data is the input-buffer
// element for V_LD in the same cycle, bcast is the broadcast operand; V_ST
// shows its row and data on st_* one cycle after issue; the LUT table is
// written through lut_we/lut_idx/lut_w/lut_b.
//
// From the paper: the lane's units (operand/accumulation scratchpad,
// broadcast, forwarding unit, LUT function unit, MAC unit, ALU, special
// function unit with reciprocal and exponent units that take multiple
// cycles), LUT activation as weight/bias selection followed by a multiply-add
// in the MAC unit. This design's own: the instruction set, the pipeline
// depth, the number formats, the table size and indexing, and the SFU
// algorithms.
module vector_lane
  import hsv_pkg::*;
#(
  parameter int unsigned NSEG      = 16,  // LUT segments
  parameter int unsigned SEG_SHIFT = 16   // segment width 2^SEG_SHIFT in Q16.16 (1.0)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      iv,
  input  vinstr_t                   ins,
  input  logic [31:0]               ld_data,
  input  logic [31:0]               bcast,
  input  logic                      lut_we,
  input  logic [$clog2(NSEG)-1:0]   lut_idx,
  input  logic [31:0]               lut_w,
  input  logic [31:0]               lut_b,
  output logic                      st_valid,
  output logic [15:0]               st_row,
  output logic [31:0]               st_data,
  output logic                      sfu_busy,
  output logic [3:0]                sfu_rd
);
  localparam int unsigned LW = $clog2(NSEG);

  logic signed [31:0] sp [16];
  logic signed [31:0] lw [NSEG];
  logic signed [31:0] lb [NSEG];

  // ---------------- stage 2 registers ----------------
  logic               s2_v;
  vinstr_t            s2_i;
  logic signed [31:0] s2_a, s2_b, s2_c;   // operands (c: accumulator / bias)

  // stage-2 result (combinational)
  logic signed [63:0] prod;
  logic signed [63:0] macv;
  logic signed [31:0] s2_res;
  logic               s2_wr;

  function automatic logic signed [31:0] sat32(input logic signed [63:0] v);
    if (v > 64'sh7FFF_FFFF)       return 32'sh7FFF_FFFF;
    else if (v < -64'sh8000_0000) return 32'sh8000_0000;
    else                          return v[31:0];
  endfunction

  always_comb begin
    prod   = 64'(s2_a) * 64'(s2_b);
    macv   = 64'(s2_c) + (prod >>> s2_i.shift);
    s2_res = '0;
    s2_wr  = 1'b0;
    if (s2_v) begin
      unique case (s2_i.op)
        V_LD:   begin s2_res = s2_a; s2_wr = 1'b1; end
        V_MOVI: begin s2_res = s2_a; s2_wr = 1'b1; end
        V_ADD:  begin s2_res = sat32(64'(s2_a) + 64'(s2_b)); s2_wr = 1'b1; end
        V_MAX:  begin s2_res = (s2_a > s2_b) ? s2_a : s2_b; s2_wr = 1'b1; end
        V_MAC, V_LUT, V_MULQ: begin s2_res = sat32(macv); s2_wr = 1'b1; end
        default: ;
      endcase
    end
  end

  // ---------------- stage 1: operand select with forwarding ----------------
  function automatic logic signed [31:0] rd_sp(input logic [3:0] idx,
                                               input logic fw, input logic [3:0] fw_rd,
                                               input logic signed [31:0] fw_val,
                                               input logic sw, input logic [3:0] s_rd,
                                               input logic signed [31:0] s_val);
    if (fw && fw_rd == idx)     return fw_val;
    else if (sw && s_rd == idx) return s_val;
    else                        return sp[idx];
  endfunction

  logic               sfu_wr;
  logic signed [31:0] sfu_res;
  logic signed [31:0] op1, op2, opd;
  logic [LW-1:0]      seg;
  logic signed [31:0] seg_raw;

  always_comb begin
    op1 = rd_sp(ins.rs1, s2_wr, s2_i.rd, s2_res, sfu_wr, sfu_rd, sfu_res);
    op2 = rd_sp(ins.rs2, s2_wr, s2_i.rd, s2_res, sfu_wr, sfu_rd, sfu_res);
    opd = rd_sp(ins.rd,  s2_wr, s2_i.rd, s2_res, sfu_wr, sfu_rd, sfu_res);
    // LUT segment: floor(x / 2^SEG_SHIFT) + NSEG/2, clamped to the table
    seg_raw = (op1 >>> SEG_SHIFT) + $signed(32'(NSEG / 2));
    if (seg_raw < 0)                 seg = '0;
    else if (seg_raw >= 32'(NSEG))   seg = LW'(NSEG - 1);
    else                             seg = LW'(seg_raw);
  end

  // ---------------- special function unit ----------------
  localparam logic signed [31:0] LOG2E_Q16 = 32'sd94548;  // round(log2(e) * 2^16)

  function automatic logic [31:0] pow2_frac_const(input int j);  // 2^(2^-j) in Q2.30
    real c;
    c = 2.0 ** (1.0 / (2.0 ** j));
    return 32'($rtoi(c * 1073741824.0 + 0.5));
  endfunction

  typedef enum logic [1:0] {F_IDLE, F_EXP, F_RCP} sfu_e;
  sfu_e               f_st;
  logic [5:0]         f_cnt;
  logic [63:0]        f_acc;     // EXP: Q2.30 product; RCP: remainder
  logic [32:0]        f_quo;
  logic [31:0]        f_div;
  logic signed [31:0] f_n;
  logic [15:0]        f_frac;
  logic               f_neg;

  assign sfu_busy = (f_st != F_IDLE);

  // result of the finishing SFU operation
  always_comb begin
    sfu_wr  = 1'b0;
    sfu_res = '0;
    if (f_st == F_EXP && f_cnt == 6'd16) begin
      sfu_wr = 1'b1;
      if (f_n >= 15)       sfu_res = 32'sh7FFF_FFFF;
      else if (f_n < -17)  sfu_res = '0;
      else                 sfu_res = 32'(f_acc[31:0] >> (14 - f_n));
    end else if (f_st == F_RCP && f_cnt == 6'd33) begin
      sfu_wr = 1'b1;
      if (f_div == 0 || f_quo[32:31] != 2'b00) sfu_res = f_neg ? 32'sh8000_0001 : 32'sh7FFF_FFFF;
      else sfu_res = f_neg ? -$signed(f_quo[31:0]) : $signed(f_quo[31:0]);
    end
  end

  // ---------------- sequential ----------------
  logic signed [63:0] y_full;
  assign y_full = 64'(s2_a) * 64'(LOG2E_Q16);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_i <= '0; s2_a <= '0; s2_b <= '0; s2_c <= '0;
      st_valid <= 1'b0; st_row <= '0; st_data <= '0;
      f_st <= F_IDLE; f_cnt <= '0; f_acc <= '0; f_quo <= '0; f_div <= '0;
      f_n <= '0; f_frac <= '0; f_neg <= 1'b0; sfu_rd <= '0;
      for (int i = 0; i < 16; i++) sp[i] <= '0;
      for (int i = 0; i < int'(NSEG); i++) begin lw[i] <= '0; lb[i] <= '0; end
    end else begin
      if (lut_we) begin lw[lut_idx] <= lut_w; lb[lut_idx] <= lut_b; end

      // stage 1 -> stage 2
      s2_v <= iv;
      s2_i <= ins;
      s2_a <= op1;
      s2_b <= op2;
      s2_c <= opd;
      if (iv) begin
        unique case (ins.op)
          V_LD:   s2_a <= ld_data;
          V_MOVI: s2_a <= 32'(signed'(ins.imm));
          V_MAC:  if (ins.bcast) s2_b <= bcast;
          V_LUT:  begin s2_b <= lw[seg]; s2_c <= lb[seg]; end
          V_MULQ: s2_c <= '0;
          default: ;
        endcase
      end
      if (iv && ins.op == V_LUT) s2_i.shift <= 5'd16;
      if (iv && ins.op == V_MULQ) s2_i.shift <= 5'd16;

      // stores
      st_valid <= s2_v && s2_i.op == V_ST;
      st_row   <= s2_i.imm;
      st_data  <= s2_a;

      // write back (pipeline and SFU)
      if (s2_wr) sp[s2_i.rd] <= s2_res;
      if (sfu_wr) sp[sfu_rd] <= sfu_res;

      // SFU
      unique case (f_st)
        F_IDLE: if (s2_v && (s2_i.op == V_EXP || s2_i.op == V_RCP)) begin
          sfu_rd <= s2_i.rd;
          f_cnt  <= '0;
          if (s2_i.op == V_EXP) begin
            f_st   <= F_EXP;
            f_n    <= 32'(y_full >>> 32);
            f_frac <= y_full[31:16];
            f_acc  <= 64'd1 << 30;
          end else begin
            f_st  <= F_RCP;
            f_neg <= s2_a[31];
            f_div <= s2_a[31] ? 32'(-s2_a) : 32'(s2_a);
            f_acc <= '0;
            f_quo <= '0;
          end
        end
        F_EXP: begin
          f_cnt <= f_cnt + 1;
          if (f_cnt < 6'd16) begin
            // fraction bit 15-f_cnt weighs 2^-(f_cnt+1)
            if (f_frac[15 - f_cnt[3:0]])
              f_acc <= (f_acc * 64'(pow2_frac_const(int'(f_cnt) + 1))) >> 30;
          end
          if (f_cnt == 6'd16) f_st <= F_IDLE;
        end
        F_RCP: begin
          f_cnt <= f_cnt + 1;
          if (f_cnt < 6'd33) begin
            // dividend 2^32: bit 32 is one, all lower bits zero
            automatic logic [63:0] r = {f_acc[62:0], (f_cnt == 6'd0)};
            if (r >= 64'(f_div)) begin
              f_acc <= r - 64'(f_div);
              f_quo <= {f_quo[31:0], 1'b1};
            end else begin
              f_acc <= r;
              f_quo <= {f_quo[31:0], 1'b0};
            end
          end
          if (f_cnt == 6'd33) f_st <= F_IDLE;
        end
        default: f_st <= F_IDLE;
      endcase
    end
  end
endmodule
