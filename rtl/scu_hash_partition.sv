// scu_hash_partition: example SCU that hash-partitions a table across GPUs.
//
// A table arrives over RDMA column by column, each 512-bit beat holding
// LANES = 16 consecutive 32-bit values of one column (row r is lane r % 16 of
// beat r / 16 of the column). A batch of cfg_rows rows (at most
// LANES * BUF_DEPTH) consists of cfg_key_cols key columns followed by
// cfg_data_cols data columns.
//
//  1. Key phase. Every key beat updates one word of the on-chip hash buffer
//     (BUF_DEPTH words of LANES hashes = 16 x 2^16 hashes):
//       first key column:  h = fmix32(key)
//       further columns:   h = fmix32(h ^ key)      (hash folding)
//     fmix32 is the MurmurHash3 finaliser.
//  2. Data phase. Row r belongs to GPU h[r] mod N_GPU. For each GPU a
//     pipeline selects the lanes of that GPU, packs them densely into a
//     staging word and appends full words to its output buffer. When an
//     output buffer holds FLUSH_BYTES (64 kB), it is written to the GPU with
//     one DMA write (command, then 1024 beats). At the end of a data column
//     every GPU's remainder is flushed too (last beat with partial keep).
//     Output of GPU g, data column c goes to
//       cfg_gpu_base[g] + c * cfg_col_stride + out_bytes[g][c]
//     and out_bytes keeps growing over batches until `clear`, so a table
//     larger than the buffer is processed as consecutive batches.
//
// From the paper: the hash buffer size, hash folding over composite keys,
// one pipeline and output buffer per GPU, 64 kB flushes, batching. The hash
// function, the column order, the address layout and the flush policy (input
// stalls while a buffer is flushed, no double buffering) are this design's
// choices. The paper's batch threshold (2^19 rows) is smaller than its
// buffer (2^20 hashes); here a batch may use the whole buffer.
// Timing: one input beat per cycle in both phases except during flushes;
// a flush takes 1 + ceil(bytes/64) output cycles.
module scu_hash_partition
  import scenic_pkg::*;
#(
  parameter int LANES       = 16,
  parameter int BUF_DEPTH   = 65536,
  parameter int N_GPU       = 4,
  parameter int FLUSH_BYTES = 65536,
  parameter int MAX_DCOLS   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // control registers (host)
  input  logic        start,
  input  logic        clear,
  input  logic [31:0] cfg_rows,
  input  logic [3:0]  cfg_key_cols,
  input  logic [3:0]  cfg_data_cols,
  input  logic [63:0] cfg_gpu_base [N_GPU],
  input  logic [63:0] cfg_col_stride,
  output logic        busy,
  output logic        done,
  input  logic [$clog2(N_GPU)-1:0]     rd_gpu,
  input  logic [$clog2(MAX_DCOLS)-1:0] rd_col,
  output logic [31:0] rd_out_bytes,
  output logic [31:0] flush_count,
  // column data from the network
  input  axis_beat_t  in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  // DMA writes to GPU memory
  output dma_cmd_t    dma_cmd,
  output logic        dma_cmd_valid,
  input  logic        dma_cmd_ready,
  output axis_beat_t  dma_beat,
  output logic        dma_valid,
  input  logic        dma_ready
);
  localparam int FB   = FLUSH_BYTES / 64;            // beats per full buffer
  localparam int FBW  = $clog2(FB) + 1;
  localparam int BW   = $clog2(BUF_DEPTH);
  localparam int GW   = $clog2(N_GPU > 1 ? N_GPU : 2);
  localparam int SW   = $clog2(LANES) + 1;

  function automatic logic [31:0] fmix32(input logic [31:0] k);
    logic [31:0] h;
    h = k;
    h = h ^ (h >> 16);
    h = h * 32'h85EBCA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2AE35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // ---------------- storage ----------------
  logic [LANES*32-1:0] hbuf [BUF_DEPTH];
  logic [511:0]        obuf_rd [N_GPU];       // output buffer word at the flush pointer
  logic [FBW-1:0]      ocnt [N_GPU];          // full beats in the output buffer
  logic [16:0]         obytes [N_GPU];        // bytes in the output buffer
  logic [31:0]         stage_w [N_GPU][LANES];
  logic [SW-1:0]       stage_n [N_GPU];
  logic [31:0]         out_bytes [N_GPU][MAX_DCOLS];

  // ---------------- control ----------------
  typedef enum logic [2:0] {S_IDLE, S_KEY, S_DATA, S_COLEND, S_FCMD, S_FDATA} state_e;
  state_e        state;
  logic [3:0]    col;            // column within the phase
  logic [BW:0]   beat;           // beat within the column
  logic [BW:0]   nbeats;
  logic [GW-1:0] fg;             // GPU being flushed
  logic [FBW-1:0] frd;           // beat being flushed
  logic          col_end_flush;  // flushing because a data column ended
  logic          ret_colend;     // return to S_COLEND after a full-buffer flush

  assign busy = (state != S_IDLE);
  assign rd_out_bytes = out_bytes[rd_gpu][rd_col];

  // lanes of this beat that hold real rows
  logic [LANES-1:0] lane_ok;
  always_comb begin
    for (int l = 0; l < LANES; l++)
      lane_ok[l] = (32'(beat) * 32'(LANES) + 32'(l)) < cfg_rows;
  end

  wire [LANES*32-1:0] hword = hbuf[beat[BW-1:0]];

  // per-GPU selection and packing of the current data beat. Lane l of GPU g
  // goes to position prefix[g][l] (number of earlier lanes of that GPU);
  // written as AND-OR selection with constant indices only.
  logic [LANES-1:0] sel    [N_GPU];
  logic [SW-1:0]    prefix [N_GPU][LANES];
  logic [31:0]      comp   [N_GPU][LANES];
  logic [SW-1:0]    comp_n [N_GPU];
  logic [31:0]      merged [N_GPU][2*LANES];
  logic [SW:0]      merged_n [N_GPU];
  always_comb begin
    for (int g = 0; g < N_GPU; g++) begin
      logic [SW-1:0] n;
      n = '0;
      for (int l = 0; l < LANES; l++) begin
        sel[g][l]    = lane_ok[l] && (GW'(hword[l*32 +: 32]) == GW'(g));
        prefix[g][l] = n;
        n = n + SW'(sel[g][l]);
      end
      comp_n[g] = n;
      for (int p = 0; p < LANES; p++) begin
        comp[g][p] = '0;
        for (int l = p; l < LANES; l++)
          if (sel[g][l] && prefix[g][l] == SW'(p)) comp[g][p] = comp[g][p] | in_beat.data[l*32 +: 32];
      end
      for (int j = 0; j < 2*LANES; j++) begin
        merged[g][j] = '0;
        if (j < LANES && SW'(j) < stage_n[g]) merged[g][j] = stage_w[g][j];
        for (int k = 0; k < LANES; k++)
          if (k <= j && SW'(k) < comp_n[g] && (SW+1)'(stage_n[g]) + (SW+1)'(k) == (SW+1)'(j))
            merged[g][j] = merged[g][j] | comp[g][k];
      end
      merged_n[g] = (SW+1)'(stage_n[g]) + (SW+1)'(comp_n[g]);
    end
  end

  logic any_full;
  always_comb begin
    any_full = 1'b0;
    for (int g = 0; g < N_GPU; g++) if (ocnt[g] == FBW'(FB)) any_full = 1'b1;
  end

  assign in_ready = ((state == S_KEY) || (state == S_DATA && !any_full));
  wire   in_fire  = in_valid && in_ready;
  wire   col_last = (beat + 1 == nbeats);

  // flush output
  wire [31:0] flen = 32'(obytes[fg]);
  wire [31:0] fbeats = (flen + 32'd63) >> 6;
  wire        f_last = (32'(frd) + 1 == fbeats);
  logic [3:0] dcol;
  assign dcol = col;

  always_comb begin
    dma_cmd.addr  = cfg_gpu_base[fg] + 64'(dcol) * cfg_col_stride + 64'(out_bytes[fg][dcol[$clog2(MAX_DCOLS)-1:0]]);
    dma_cmd.len   = flen;
    dma_cmd_valid = (state == S_FCMD) && (flen != 0);
    dma_beat.data = obuf_rd[fg];
    dma_beat.last = f_last;
    dma_beat.keep = '1;
    if (f_last && flen[5:0] != 0) dma_beat.keep = KEEP_W'({KEEP_W{1'b1}}) >> (7'(KEEP_W) - 7'(flen[5:0]));
    dma_valid = (state == S_FDATA);
  end

  // lowest GPU whose buffer is full, and lowest GPU holding any data
  logic [GW-1:0] full_g, data_g;
  logic          any_data;
  always_comb begin
    full_g = '0; data_g = '0; any_data = 1'b0;
    for (int g = N_GPU - 1; g >= 0; g--) begin
      if (ocnt[g] == FBW'(FB)) full_g = GW'(g);
      if (obytes[g] != 0) begin data_g = GW'(g); any_data = 1'b1; end
    end
  end
  wire           need_flush = col_end_flush ? any_data : any_full;
  wire [GW-1:0]  next_flush = col_end_flush ? data_g : full_g;

  // new hash word (key phase) and the word appended to each output buffer
  logic [LANES*32-1:0] hnew;
  logic [511:0]        oword [N_GPU];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] k;
      k = in_beat.data[l*32 +: 32];
      hnew[l*32 +: 32] = (col == 0) ? fmix32(k) : fmix32(hword[l*32 +: 32] ^ k);
    end
    for (int g = 0; g < N_GPU; g++)
      for (int j = 0; j < LANES; j++)
        oword[g][j*32 +: 32] = (state == S_COLEND) ? stage_w[g][j] : merged[g][j];
  end

  // hash buffer update (key phase)
  always_ff @(posedge clk) begin
    if (state == S_KEY && in_fire) hbuf[beat[BW-1:0]] <= hnew;
  end

  // one output buffer memory per GPU (data phase and column end writes)
  for (genvar g = 0; g < N_GPU; g++) begin : g_obuf
    logic [511:0] mem [FB];
    wire we = (state == S_DATA && in_fire && merged_n[g] >= (SW+1)'(LANES)) ||
              (state == S_COLEND && !any_full && stage_n[g] != 0);
    always_ff @(posedge clk) begin
      if (we) mem[ocnt[g][FBW-2:0]] <= oword[g];
    end
    assign obuf_rd[g] = mem[frd[FBW-2:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; col <= '0; beat <= '0; nbeats <= '0; fg <= '0; frd <= '0;
      col_end_flush <= 1'b0; ret_colend <= 1'b0; done <= 1'b0; flush_count <= '0;
      for (int g = 0; g < N_GPU; g++) begin
        ocnt[g] <= '0; obytes[g] <= '0; stage_n[g] <= '0;
        for (int j = 0; j < LANES; j++) stage_w[g][j] <= '0;
        for (int c = 0; c < MAX_DCOLS; c++) out_bytes[g][c] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (clear && state == S_IDLE)
        for (int g = 0; g < N_GPU; g++) for (int c = 0; c < MAX_DCOLS; c++) out_bytes[g][c] <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          nbeats <= (BW+1)'((cfg_rows + 32'(LANES - 1)) / 32'(LANES));
          col    <= '0;
          beat   <= '0;
          state  <= (cfg_key_cols != 0) ? S_KEY : S_IDLE;
        end
        S_KEY: if (in_fire) begin
          beat <= col_last ? '0 : beat + 1'b1;
          if (col_last) begin
            if (col + 1 == cfg_key_cols) begin
              col   <= '0;
              state <= (cfg_data_cols != 0) ? S_DATA : S_IDLE;
              done  <= (cfg_data_cols == 0);
            end else col <= col + 1'b1;
          end
        end
        S_DATA: begin
          if (in_fire) begin
            for (int g = 0; g < N_GPU; g++) begin
              if (merged_n[g] >= (SW+1)'(LANES)) begin
                ocnt[g]   <= ocnt[g] + 1'b1;
                obytes[g] <= obytes[g] + 17'd64;
                stage_n[g] <= SW'(merged_n[g] - (SW+1)'(LANES));
                for (int j = 0; j < LANES; j++) stage_w[g][j] <= merged[g][LANES + j];
              end else begin
                stage_n[g] <= SW'(merged_n[g]);
                for (int j = 0; j < LANES; j++) stage_w[g][j] <= merged[g][j];
              end
            end
            beat <= col_last ? '0 : beat + 1'b1;
            if (col_last) state <= S_COLEND;
          end else if (any_full) begin
            fg <= full_g; frd <= '0; col_end_flush <= 1'b0; state <= S_FCMD;
          end
        end
        S_COLEND: if (any_full) begin
          // a buffer filled up with the column's last beat: flush it first
          fg <= full_g; frd <= '0; col_end_flush <= 1'b0; ret_colend <= 1'b1; state <= S_FCMD;
        end else begin
          // move every staging remainder into its buffer, then flush all
          for (int g = 0; g < N_GPU; g++)
            if (stage_n[g] != 0) begin
              ocnt[g]    <= ocnt[g] + 1'b1;
              obytes[g]  <= obytes[g] + 17'(stage_n[g]) * 17'd4;
              stage_n[g] <= '0;
            end
          col_end_flush <= 1'b1;
          state <= S_FCMD;
          fg    <= '0;
          frd   <= '0;
        end
        S_FCMD: begin
          if (flen == 0) begin
            // nothing in this buffer: go to the next one or leave
            if (need_flush) fg <= next_flush;
            else if (col_end_flush) begin
              if (col + 1 == cfg_data_cols) begin state <= S_IDLE; done <= 1'b1; end
              else begin col <= col + 1'b1; state <= S_DATA; end
            end else begin
              state      <= ret_colend ? S_COLEND : S_DATA;
              ret_colend <= 1'b0;
            end
          end else if (dma_cmd_ready) state <= S_FDATA;
        end
        S_FDATA: if (dma_ready) begin
          frd <= frd + 1'b1;
          if (f_last) begin
            out_bytes[fg][dcol[$clog2(MAX_DCOLS)-1:0]] <= out_bytes[fg][dcol[$clog2(MAX_DCOLS)-1:0]] + flen;
            ocnt[fg]    <= '0;
            obytes[fg]  <= '0;
            flush_count <= flush_count + 1;
            frd         <= '0;
            state       <= S_FCMD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
