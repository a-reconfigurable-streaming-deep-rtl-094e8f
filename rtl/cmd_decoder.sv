// cmd_decoder: the command decoder and layer sequencer.
//
// Commands are 16-bit words, a 4-bit opcode over a 12-bit payload (see
// cnn_pkg::opcode_e). Configuration commands set the coming layer: sizes,
// channel and feature counts, mode bits (1x1 or 3x3, stride, ReLU, max
// pool and its size, input set, padding). Shift commands build the list
// of sub-filter shift addresses of a decomposed kernel. RUN executes the
// layer:
//
//   for each output feature f (two at a time in 1x1 mode)
//     for each sub-filter shift (a, b) in the list (one (0,0) if empty)
//       for each channel pair (2cp, 2cp+1)
//         wait for the pre-fetched weight packet, update the CU weights,
//         stream the pass, wait for the pipeline to drain
//     wait until the post side is free, then swap the ping-pong buffer and
//     hand the finished feature(s) to pooling and readout
//   wait until the last post job is done
//
// The first pass of each feature adds the bias and overwrites the
// scratchpad, so the scratchpad needs no separate clear. The two waits
// (weights not yet fetched, post side still busy) are the stalls. They
// are counted in `stat_wstall` and `stat_pstall`. Feature-by-feature
// order, weight updates between channels and the ping-pong swap follow the
// paper. The command set, its encoding and the loop order over shifts and
// channels are this design's own choices.
//
// Timing: one command is decoded per cycle when idle. `busy` is high from
// RUN to the end of the layer's last readout; the host may use the buffer
// bank only while it is low. `halted` is set by END.
module cmd_decoder
  import cnn_pkg::*;
#(
  parameter int unsigned DRAIN = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  // command FIFO
  input  logic        cmd_valid,
  input  logic [15:0] cmd_data,
  output logic        cmd_ready,
  // pre-fetch controller
  input  logic        w_ready,
  output logic        w_update,
  // row fetch
  output logic        pass_start,
  output pass_cfg_t   pass_cfg,
  input  logic        pass_done,
  // ACCU buffer
  input  logic        post_busy,
  output logic        swap,
  output logic        job_two,
  output logic        job_pool,
  output logic        job_pool3,
  output logic        job_relu,
  output logic        job_bank_a,
  output logic [BANK_AW-1:0] job_base_a,
  output logic        job_bank_b,
  output logic [BANK_AW-1:0] job_base_b,
  // status
  output logic        busy,
  output logic        halted,
  output logic [31:0] stat_wstall,
  output logic [31:0] stat_pstall,
  output logic [31:0] stat_passes
);
  typedef enum logic [2:0] {S_FETCH, S_WAIT_W, S_PASS, S_DRAIN, S_SWAP, S_FINISH, S_HALT} state_e;
  state_e st;

  dim_t  in_h, in_w, out_h, out_w, nch, nfeat;
  mode_t mode;
  logic [4:0] sh_a [MAX_SHIFTS];
  logic [4:0] sh_b [MAX_SHIFTS];
  logic [6:0] nshift;
  int f, sh, cp, ncp, nsh_eff;
  int dcnt;

  opcode_e op;
  assign op = opcode_e'(cmd_data[15:12]);
  assign cmd_ready = (st == S_FETCH);

  // Pooled (stored) output size and bank slot size of one feature.
  int fh, fw, slot;
  always_comb begin
    fh = mode.pool_en ? int'(out_h) / (mode.pool3 ? 3 : 2) : int'(out_h);
    fw = mode.pool_en ? int'(out_w) / (mode.pool3 ? 3 : 2) : int'(out_w);
    slot = ((fh + 7) >>> 3) * fw;
  end

  always_comb begin
    pass_cfg.k1x1   = mode.k1x1;
    pass_cfg.stride = mode.stride;
    pass_cfg.in_h   = in_h;
    pass_cfg.in_w   = in_w;
    pass_cfg.out_h  = out_h;
    pass_cfg.out_w  = out_w;
    pass_cfg.nch    = nch;
    pass_cfg.cpair  = dim_t'(cp);
    pass_cfg.in_set = mode.in_set;
    pass_cfg.sr     = crd_t'(int'(mode.pad) - int'(sh_a[sh[5:0]]));
    pass_cfg.sc     = crd_t'(int'(mode.pad) - int'(sh_b[sh[5:0]]));
    pass_cfg.first  = (sh == 0) && (cp == 0);
  end

  always_comb begin
    job_two    = mode.k1x1 && (f + 1 < int'(nfeat));
    job_pool   = mode.pool_en;
    job_pool3  = mode.pool3;
    job_relu   = mode.relu;
    job_bank_a = 1'(f);
    job_base_a = BANK_AW'((f >>> 1) * slot);
    job_bank_b = 1'(f + 1);
    job_base_b = BANK_AW'(((f + 1) >>> 1) * slot);
  end

  assign w_update   = (st == S_WAIT_W) && w_ready;
  assign pass_start = w_update;
  assign swap       = (st == S_SWAP) && !post_busy;
  assign busy       = (st != S_FETCH) && (st != S_HALT);
  assign halted     = (st == S_HALT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_FETCH;
      in_h <= '0; in_w <= '0; out_h <= '0; out_w <= '0; nch <= '0; nfeat <= '0;
      mode <= '0; nshift <= '0;
      f <= 0; sh <= 0; cp <= 0; ncp <= 0; nsh_eff <= 0; dcnt <= 0;
      stat_wstall <= '0; stat_pstall <= '0; stat_passes <= '0;
      for (int i = 0; i < MAX_SHIFTS; i++) begin
        sh_a[i] <= '0;
        sh_b[i] <= '0;
      end
    end else begin
      case (st)
        S_FETCH: if (cmd_valid) begin
          case (op)
            OP_IN_H:      in_h  <= cmd_data[11:0];
            OP_IN_W:      in_w  <= cmd_data[11:0];
            OP_OUT_H:     out_h <= cmd_data[11:0];
            OP_OUT_W:     out_w <= cmd_data[11:0];
            OP_NCH:       nch   <= cmd_data[11:0];
            OP_NFEAT:     nfeat <= cmd_data[11:0];
            OP_MODE:      mode  <= mode_t'(cmd_data[11:0]);
            OP_CLR_SHIFT: nshift <= '0;
            OP_SHIFT: if (nshift < 7'(MAX_SHIFTS)) begin
              sh_a[nshift[5:0]] <= cmd_data[4:0];
              sh_b[nshift[5:0]] <= cmd_data[9:5];
              nshift <= nshift + 1'b1;
            end
            OP_RUN: begin
              f <= 0; sh <= 0; cp <= 0;
              ncp <= (int'(nch) + 1) >>> 1;
              nsh_eff <= (nshift == 0) ? 1 : int'(nshift);
              if (nshift == 0) begin
                sh_a[0] <= '0;
                sh_b[0] <= '0;
              end
              st <= (nch == 0 || nfeat == 0) ? S_FETCH : S_WAIT_W;
            end
            OP_END:  st <= S_HALT;
            default: ;
          endcase
        end
        S_WAIT_W: begin
          if (w_ready) st <= S_PASS;
          else stat_wstall <= stat_wstall + 1;
        end
        S_PASS: if (pass_done) begin
          st <= S_DRAIN;
          dcnt <= DRAIN;
          stat_passes <= stat_passes + 1;
        end
        S_DRAIN: begin
          if (dcnt > 0) dcnt <= dcnt - 1;
          else if (cp + 1 < ncp) begin
            cp <= cp + 1; st <= S_WAIT_W;
          end else if (sh + 1 < nsh_eff) begin
            cp <= 0; sh <= sh + 1; st <= S_WAIT_W;
          end else begin
            st <= S_SWAP;
          end
        end
        S_SWAP: begin
          if (!post_busy) begin
            cp <= 0; sh <= 0;
            f  <= f + (mode.k1x1 ? 2 : 1);
            st <= (f + (mode.k1x1 ? 2 : 1) >= int'(nfeat)) ? S_FINISH : S_WAIT_W;
          end else begin
            stat_pstall <= stat_pstall + 1;
          end
        end
        S_FINISH: if (!post_busy && !swap) st <= S_FETCH;
        S_HALT: ;
        default: st <= S_FETCH;
      endcase
    end
  end
endmodule
