// a3f_model_pkg: reference model of the accelerator's job semantics for the
// testbenches. It keeps its own copy of each half's input, weight and
// fuseLink buffers and computes a job the way the hardware is specified to:
// per pixel and output column, start from zero or the fuseLink value, add
// x*w row by row for each pass (single-precision rounding after every
// multiply and add, through fp_ref_pkg), then ReLU, max-pool over groups of
// POOL_WIN pixels, and write to the own input buffer (NWB words per output
// pixel) or to the other half's fuseLink buffer.
package a3f_model_pkg;
  import fp_ref_pkg::*;
  import a3f_pkg::*;

  class a3f_model;
    int rows, cols, idepth, fdepth, nwb;
    logic [31:0] ibuf [2][int][];   // [half][addr] -> ROWS values
    logic [31:0] wbuf [2][int][];   // [half][addr] -> ROWS values
    logic [31:0] fbuf [2][int][];   // [half][addr] -> COLS values

    function new(int rows, int cols, int idepth, int fdepth);
      this.rows = rows; this.cols = cols; this.idepth = idepth; this.fdepth = fdepth;
      nwb = (cols + rows - 1) / rows;
    endfunction

    function automatic void run_job(int h, job_t jb, logic keep_link);
      int          np, nout, o;
      logic        fuse;
      logic [31:0] acc [][];
      logic [31:0] x [], w [];
      logic [31:0] outv [][];
      real         best;
      np   = (jb.n_pass == 0) ? 1 : int'(jb.n_pass);
      fuse = (jb.role == ROLE_CONSUME) && keep_link;
      if (jb.role == ROLE_PRODUCE && !keep_link) return;
      acc = new[jb.n_pix];
      for (int p = 0; p < int'(jb.n_pix); p++) begin
        acc[p] = new[cols];
        for (int c = 0; c < cols; c++)
          acc[p][c] = fuse ? fbuf[h][(int'(jb.fl_base) + p) % fdepth][c] : 32'h0;
        for (int k = 0; k < np; k++) begin
          x = ibuf[h][(int'(jb.in_base) + k * int'(jb.n_pix) + p) % idepth];
          for (int c = 0; c < cols; c++)
            for (int r = 0; r < rows; r++) begin
              w = wbuf[h][int'(jb.w_base) + k * cols + (cols - 1 - c)];
              acc[p][c] = ref_add(acc[p][c], ref_mul(x[r], w[r]));
            end
        end
        if (jb.relu_en)
          for (int c = 0; c < cols; c++) if (acc[p][c][31]) acc[p][c] = 32'h0;
      end
      if (jb.pool_en) begin
        nout = int'(jb.n_pix) / POOL_WIN;
        outv = new[nout];
        for (int q = 0; q < nout; q++) begin
          outv[q] = new[cols];
          for (int c = 0; c < cols; c++) begin
            outv[q][c] = acc[q * POOL_WIN][c];
            best = to_real(outv[q][c]);
            for (int g = 1; g < POOL_WIN; g++)
              if (to_real(acc[q * POOL_WIN + g][c]) > best) begin
                best = to_real(acc[q * POOL_WIN + g][c]);
                outv[q][c] = acc[q * POOL_WIN + g][c];
              end
          end
        end
      end else begin
        nout = int'(jb.n_pix);
        outv = acc;
      end
      for (int q = 0; q < nout; q++) begin
        if (jb.role == ROLE_PRODUCE) begin
          fbuf[1 - h][(int'(jb.out_base) + q) % fdepth] = outv[q];
        end else begin
          for (int k = 0; k < nwb; k++) begin
            o = (int'(jb.out_base) + k * nout + q) % idepth;
            ibuf[h][o] = new[rows];
            for (int r = 0; r < rows; r++)
              ibuf[h][o][r] = (k * rows + r < cols) ? outv[q][k * rows + r] : 32'h0;
          end
        end
      end
    endfunction
  endclass

endpackage
