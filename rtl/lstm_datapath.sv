// lstm_datapath: one LSTM cell update, c' = sig(f)*c + sig(i)*tanh(g) and
// h = sig(o)*tanh(c'), computed with a single shared multiplier.
//
// Formats (all int8): gate pre-activations i,f,g,o and the cell state c are
// Q3.4 (value/16); sigmoid outputs are 0..127 (value/128) and tanh outputs and
// the hidden state h are Q0.7 (value/128).  tanh comes from the 38-entry table
// in steps of 1/8 with linear interpolation between neighbours:
//   tanh(v/16):     idx = |v|>>1, frac = |v|&1, y = T[idx] + ((T[idx+1]-T[idx])*frac >> 1)
//   sigmoid(v/16) = (128 + tanh(v/32)) >> 1, tanh(v/32) with idx = |v|>>2, frac = |v|&3 (>>2)
// and the sign of v restored.  The cell arithmetic is
//   c' = sat8((sf*c + ((si*tg) >>> 3) + 64) >>> 7),   h = sat8((so*tc + 64) >>> 7)
// where tc = tanh(c').  The interpolation products and the four cell products
// all go through the same 10x10-bit multiplier, one per cycle: steps 0-3 the
// activations of i, f, g, o, step 4 sf*c, step 5 si*tg and c', step 6 tanh(c'),
// step 7 so*tc and h.  done is high in the 9th cycle after the cycle that
// samples start (8 steps plus the start cycle), with c_out and h_out
// valid until the next start.  The table size, interpolation and the shared
// multiplier are the paper's; the number formats are this design's choices.
module lstm_datapath
  import sleep_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  act_t i_pre,
  input  act_t f_pre,
  input  act_t g_pre,
  input  act_t o_pre,
  input  act_t c_in,
  output act_t c_out,
  output act_t h_out,
  output logic done
);

  logic [2:0] step;
  logic       active;

  // activations, 0..127 for sigmoid, -127..127 for tanh
  logic signed [8:0] s_i, s_f, t_g, s_o, t_c;
  logic signed [19:0] fc;

  // ---- shared table lookup and multiplier
  act_t        lut_v;     // value whose activation is taken this step
  logic        lut_sig;   // sigmoid (argument halved) or tanh
  logic [8:0]  mag;
  logic [7:0]  idx;
  logic [1:0]  frac;
  logic [6:0]  y0, y1;
  logic signed [9:0]  ma, mb;
  logic signed [19:0] prod;
  logic signed [8:0]  act_res;  // interpolated activation with sign
  logic signed [19:0] sum;

  always_comb begin
    unique case (step)
      3'd0:    begin lut_v = i_pre; lut_sig = 1'b1; end
      3'd1:    begin lut_v = f_pre; lut_sig = 1'b1; end
      3'd2:    begin lut_v = g_pre; lut_sig = 1'b0; end
      3'd3:    begin lut_v = o_pre; lut_sig = 1'b1; end
      default: begin lut_v = c_out; lut_sig = 1'b0; end  // step 6: tanh(c')
    endcase
    mag  = lut_v[7] ? 9'(-$signed({lut_v[7], lut_v})) : 9'(lut_v);
    idx  = lut_sig ? 8'(mag >> 2) : 8'(mag >> 1);
    frac = lut_sig ? mag[1:0] : {1'b0, mag[0]};
  end

  tanh_lut u_lut (.idx(idx), .y0(y0), .y1(y1));

  always_comb begin
    unique case (step)
      3'd4:    begin ma = 10'(s_f); mb = 10'(c_in); end
      3'd5:    begin ma = 10'(s_i); mb = 10'(t_g);  end
      3'd7:    begin ma = 10'(s_o); mb = 10'(t_c);  end
      default: begin ma = $signed({3'b0, y1}) - $signed({3'b0, y0}); mb = $signed({8'b0, frac}); end
    endcase
    prod = ma * mb;
  end

  always_comb begin
    logic signed [9:0] yabs, ysgn;
    yabs = $signed({3'b0, y0}) + 10'(lut_sig ? (prod >>> 2) : (prod >>> 1));
    ysgn = lut_v[7] ? -yabs : yabs;
    act_res = lut_sig ? 9'((ysgn + 10'sd128) >>> 1) : 9'(ysgn);
    sum = fc + (prod >>> 3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= '0; active <= 1'b0; done <= 1'b0;
      s_i <= '0; s_f <= '0; t_g <= '0; s_o <= '0; t_c <= '0; fc <= '0;
      c_out <= '0; h_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= 1'b1;
        step   <= 3'd0;
      end else if (active) begin
        step <= step + 3'd1;
        unique case (step)
          3'd0: s_i <= act_res;
          3'd1: s_f <= act_res;
          3'd2: t_g <= act_res;
          3'd3: s_o <= act_res;
          3'd4: fc  <= prod;
          3'd5: c_out <= sat8(40'(sum + 20'sd64) >>> 7);
          3'd6: t_c <= act_res;
          3'd7: begin
            h_out  <= sat8(40'(prod + 20'sd64) >>> 7);
            active <= 1'b0;
            done   <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
