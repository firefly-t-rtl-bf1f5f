// config_regs: layer configuration registers written by the host.
//
// Register map (wr_addr, 64-bit wr_data):
//   0  [7:0] fh, [15:8] fw, [23:16] ci_blk
//   1  [1:0] kh, [3:2] kw, [5:4] pad, [12:6] co, [13] res_en, [14] pool_en,
//      [18:15] leak_sh, [19] res_store
//   2  [VW-1:0] vth (signed)
//   3  [1:0] role, [10:2] seq_len, [10+CW:11] thr_s, [10+2CW:11+CW] thr_o
//   4  writing any value pulses start for one cycle
// The registers hold their value across runs, so a layer that differs from the
// previous one in a single field needs one write.  Everything written takes
// effect with the next start.  The map is this design's own; the paper only
// says that the orchestrator's configuration is loaded before a layer.
module config_regs
  import fft_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [2:0]    wr_addr,
  input  logic [63:0]   wr_data,
  output layer_cfg_t    cfg,
  output logic          res_store,
  output logic          start
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; res_store <= 1'b0; start <= 1'b0;
    end else begin
      start <= 1'b0;
      if (wr_en) begin
        case (wr_addr)
          3'd0: begin cfg.fh <= wr_data[7:0]; cfg.fw <= wr_data[15:8]; cfg.ci_blk <= wr_data[23:16]; end
          3'd1: begin
            cfg.kh <= wr_data[1:0]; cfg.kw <= wr_data[3:2]; cfg.pad <= wr_data[5:4];
            cfg.co <= wr_data[12:6]; cfg.res_en <= wr_data[13]; cfg.pool_en <= wr_data[14];
            cfg.leak_sh <= wr_data[18:15]; res_store <= wr_data[19];
          end
          3'd2: cfg.vth <= $signed(wr_data[VW-1:0]);
          3'd3: begin
            cfg.role <= attn_role_e'(wr_data[1:0]); cfg.seq_len <= wr_data[10:2];
            cfg.thr_s <= wr_data[10+CW:11]; cfg.thr_o <= wr_data[10+2*CW:11+CW];
          end
          3'd4: start <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
