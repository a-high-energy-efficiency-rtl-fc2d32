// conv_seq: loop and address generator for the weight-stationary convolutions.
//
// Both the FP engine (spikes * weights) and the BP engine (gradients *
// rotated weights) run the same loop nest: for every 16x16 weight tile
// (output block ob, input block ib, kernel row r, kernel column s) the 16
// weight rows are read once and loaded into the array, then every time step t
// and output position (oy, ox) is streamed through it, and each result is
// accumulated into the partial-sum buffer. Weights are thus read from SRAM
// only once per convolution.
// The input position is y = oy*stride + r - pad on a map whose rows are spaced
// by 'ins' (zero insertion, used by the backward convolution of a strided
// layer); positions that fall in padding or on an inserted zero are flagged
// 'pad' and read nothing. 'first' marks the first tile that touches an output
// word (cleared when the instruction asks to accumulate onto old partial
// sums).
// Buffer layout (this design's choice): word = base + ((t*NB + b)*H + y)*W + x,
// weights: ((((ob*IB + ib)*K + r)*K + s)*16 + row).
// Timing: one weight row or one position per cycle; 'done' is raised for a
// cycle DRAIN cycles after the last position, once the engine pipeline has
// written it.
module conv_seq #(
  parameter int DRAIN = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] in_h, in_w,
  input  logic [3:0]  k,
  input  logic [3:0]  pad,
  input  logic [3:0]  stride,
  input  logic [1:0]  ins_sh,      // zero insertion factor = 1 << ins_sh
  input  logic [7:0]  ob_n, ib_n,  // output / input 16-channel blocks
  input  logic [7:0]  t_n,
  input  logic [19:0] in_base, out_base,
  input  logic        acc,         // accumulate onto existing partial sums
  output logic        busy,
  output logic        done,
  output logic        w_req,
  output logic [19:0] w_addr,
  output logic [3:0]  w_row,
  output logic        x_req,
  output logic        x_pad,
  output logic [19:0] x_addr,
  output logic [19:0] o_addr,
  output logic        first
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_t;
  state_t st;

  logic [15:0] oh, ow;
  logic [7:0]  ob, ib, t;
  logic [3:0]  r, s, row;
  logic [15:0] oy, ox;
  logic [3:0]  drain;

  // output size of the (possibly zero-inserted) map
  logic [15:0] dil_h, dil_w;
  assign dil_h = ((in_h - 16'd1) << ins_sh) + 16'd1;
  assign dil_w = ((in_w - 16'd1) << ins_sh) + 16'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; oh <= '0; ow <= '0; ob <= '0; ib <= '0; t <= '0;
      r <= '0; s <= '0; row <= '0; oy <= '0; ox <= '0; drain <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          oh  <= (dil_h + 16'(2 * pad) - 16'(k)) / 16'(stride) + 16'd1;
          ow  <= (dil_w + 16'(2 * pad) - 16'(k)) / 16'(stride) + 16'd1;
          ob <= '0; ib <= '0; r <= '0; s <= '0; row <= '0;
          st  <= S_LOAD;
        end
        S_LOAD: begin
          row <= row + 4'd1;
          if (row == 4'd15) begin
            st <= S_STREAM; t <= '0; oy <= '0; ox <= '0;
          end
        end
        S_STREAM: begin
          if (ox + 16'd1 < ow) ox <= ox + 16'd1;
          else begin
            ox <= '0;
            if (oy + 16'd1 < oh) oy <= oy + 16'd1;
            else begin
              oy <= '0;
              if (t + 8'd1 < t_n) t <= t + 8'd1;
              else begin
                // next tile
                st <= S_LOAD;
                if (s + 4'd1 < k) s <= s + 4'd1;
                else begin
                  s <= '0;
                  if (r + 4'd1 < k) r <= r + 4'd1;
                  else begin
                    r <= '0;
                    if (ib + 8'd1 < ib_n) ib <= ib + 8'd1;
                    else begin
                      ib <= '0;
                      if (ob + 8'd1 < ob_n) ob <= ob + 8'd1;
                      else begin
                        st <= S_DRAIN; drain <= '0;
                      end
                    end
                  end
                end
              end
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 4'd1;
          if (drain == 4'(DRAIN)) st <= S_IDLE;
        end
      endcase
    end
  end

  assign busy  = (st != S_IDLE);
  assign done  = (st == S_DRAIN) && (drain == 4'(DRAIN));
  assign w_req = (st == S_LOAD);
  assign w_row = row;
  assign w_addr = 20'((((32'(ob) * 32'(ib_n) + 32'(ib)) * 32'(k) + 32'(r)) * 32'(k) + 32'(s)) * 32'd16 + 32'(row));
  assign x_req = (st == S_STREAM);
  assign first = !acc && (ib == '0) && (r == '0) && (s == '0);

  always_comb begin
    int y, x, sy, sx;
    y = int'(oy) * int'(stride) + int'(r) - int'(pad);
    x = int'(ox) * int'(stride) + int'(s) - int'(pad);
    x_pad = (y < 0) || (x < 0) || (y >= int'(dil_h)) || (x >= int'(dil_w)) ||
            ((y & ((1 << ins_sh) - 1)) != 0) || ((x & ((1 << ins_sh) - 1)) != 0);
    sy = (y < 0) ? 0 : (y >> ins_sh);
    sx = (x < 0) ? 0 : (x >> ins_sh);
    x_addr = 20'(int'(in_base) + ((int'(t) * int'(ib_n) + int'(ib)) * int'(in_h) + sy) * int'(in_w) + sx);
    o_addr = 20'(int'(out_base) + ((int'(t) * int'(ob_n) + int'(ob)) * int'(oh) + int'(oy)) * int'(ow) + int'(ox));
  end

endmodule
