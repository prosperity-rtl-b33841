// detector -- ProSparsity Detector (spatial and temporal detection).
// Pre-load (step 0/1): after pl_start, P rows of the chosen k-column tile are
// read from the spike buffer per cycle and written into the idle TCAM bank,
// while P popcount units count their ones (NO) into that bank's NO vector.
// M/P cycles; pl_done pulses in the last one.
// Detection (steps 2-4): after det_start the rows of the searched bank are
// issued one per cycle. Step 2 reads the row from the TCAM, step 3 masks it
// (every 1 becomes don't-care X, every 0 must match 0), step 4 searches all M
// entries at once; the returned match vector is the Subset Index (SI): entry j
// matches exactly when row j is a subset of the query row. Each step is one
// pipeline register, so row r's SI leaves at s4_* three cycles after its read.
// The Prefix-row read port (pf_*) of the searched bank serves the Pruner.
// Counting the ones during pre-load rather than alongside steps 2-6 is this
// design's choice: the Pruner needs every row's NO from the first row on.
module detector #(
  parameter int unsigned M    = 256,
  parameter int unsigned K    = 16,
  parameter int unsigned P    = 8,
  parameter int unsigned KBUF = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // pre-load
  input  logic                        pl_start,
  input  logic                        pl_bank,
  input  logic [$clog2(KBUF/K)-1:0]   pl_kt,
  output logic                        pl_done,
  output logic [$clog2(M/P)-1:0]      sb_grp,
  output logic [$clog2(KBUF/K)-1:0]   sb_kt,
  input  logic [P-1:0][K-1:0]         sb_rows,
  // detection
  input  logic                        det_start,
  input  logic                        det_bank,
  output logic                        s4_valid,
  output logic [$clog2(M)-1:0]        s4_idx,
  output logic [K-1:0]                s4_row,
  output logic [M-1:0]                s4_si,
  // number-of-ones vectors of both banks
  output logic [$clog2(K+1)-1:0]      no_vec [2][M],
  // Prefix row read (searched bank)
  input  logic [$clog2(M)-1:0]        pf_addr,
  output logic [K-1:0]                pf_row
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned CW = $clog2(K+1);
  localparam int unsigned GW = $clog2(M/P);

  // ---------------- pre-load ----------------
  logic          pl_busy, pl_bank_q;
  logic [GW-1:0] pl_grp;
  logic [$clog2(KBUF/K)-1:0] pl_kt_q;
  logic [P-1:0][CW-1:0] pc;

  for (genvar p = 0; p < P; p++) begin : g_pc
    popcount #(.W(K)) u_pc (.bits(sb_rows[p]), .count(pc[p]));
  end

  assign sb_grp  = pl_grp;
  assign sb_kt   = pl_kt_q;
  assign pl_done = pl_busy && (pl_grp == GW'(M/P - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pl_busy <= 1'b0; pl_grp <= '0; pl_bank_q <= 1'b0; pl_kt_q <= '0;
    end else if (pl_start) begin
      pl_busy <= 1'b1; pl_grp <= '0; pl_bank_q <= pl_bank; pl_kt_q <= pl_kt;
    end else if (pl_busy) begin
      pl_grp <= pl_grp + 1'b1;
      if (pl_done) pl_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (pl_busy)
      for (int p = 0; p < P; p++) no_vec[pl_bank_q][int'(pl_grp) * P + p] <= pc[p];
  end

  // ---------------- detection pipeline ----------------
  logic          run, bank_q;
  logic [AW-1:0] rd_idx;
  logic [K-1:0]  rda_row;
  logic          s2_v, s3_v;
  logic [AW-1:0] s2_idx, s3_idx;
  logic [K-1:0]  s2_row, s3_row, s3_care;
  logic [M-1:0]  match;

  tcam #(.M(M), .K(K), .P(P)) u_tcam (
    .clk, .wr_en(pl_busy), .wr_bank(pl_bank_q), .wr_grp(pl_grp), .wr_rows(sb_rows),
    .srch_bank(bank_q), .q_val('0), .q_care(s3_care), .match,
    .rda_bank(bank_q), .rda_addr(rd_idx), .rda_row,
    .rdb_bank(bank_q), .rdb_addr(pf_addr), .rdb_row(pf_row)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; bank_q <= 1'b0; rd_idx <= '0;
      s2_v <= 1'b0; s3_v <= 1'b0; s4_valid <= 1'b0;
      s2_idx <= '0; s3_idx <= '0; s4_idx <= '0;
      s2_row <= '0; s3_row <= '0; s3_care <= '0; s4_row <= '0; s4_si <= '0;
    end else begin
      if (det_start) begin
        run <= 1'b1; bank_q <= det_bank; rd_idx <= '0;
      end else if (run) begin
        rd_idx <= rd_idx + 1'b1;
        if (rd_idx == AW'(M - 1)) run <= 1'b0;
      end
      // step 2: read
      s2_v   <= run && !det_start;
      s2_idx <= rd_idx;
      s2_row <= rda_row;
      // step 3: mask (ones -> X)
      s3_v    <= s2_v;
      s3_idx  <= s2_idx;
      s3_row  <= s2_row;
      s3_care <= ~s2_row;
      // step 4: match
      s4_valid <= s3_v;
      s4_idx   <= s3_idx;
      s4_row   <= s3_row;
      s4_si    <= match;
    end
  end
endmodule
