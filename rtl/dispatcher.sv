// dispatcher -- ProSparsity Dispatcher.
// Holds the meta information of two tiles: the spatial information in the
// double-buffered product sparsity table (written by the Pruner) and the
// temporal information, the execution order, in a double-buffered vector
// filled by the stable sorter from the Detector's NO counts (step 7). While
// one tile's meta information is being built, the other tile's is issued to
// the Processor (step 8): after iss_start, row indices are taken from the
// temporal vector in order, their table entries looked up, and one task
// {row, prefix, has_prefix, pattern} offered per cycle on a valid/ready
// handshake. iss_done pulses when the M-th task is accepted; sort_done pulses
// once the sorted order has been stored. The table lookup is combinational, so
// a task is offered in the cycle its index is selected.
module dispatcher #(
  parameter int unsigned M = 256,
  parameter int unsigned K = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // spatial information from the Pruner
  input  logic                     tw_en,
  input  logic                     tw_bank,
  input  logic [$clog2(M)-1:0]     tw_idx,
  input  logic [$clog2(M)-1:0]     tw_prefix,
  input  logic [K-1:0]             tw_pattern,
  // temporal information: sort the NO counts of a tile
  input  logic                     sort_start,
  input  logic                     sort_bank,
  input  logic [$clog2(K+1)-1:0]   no_in [M],
  output logic                     sort_done,
  // issue to the Processor
  input  logic                     iss_start,
  input  logic                     iss_bank,
  output logic                     task_valid,
  input  logic                     task_ready,
  output logic [$clog2(M)-1:0]     task_row,
  output logic [$clog2(M)-1:0]     task_prefix,
  output logic                     task_has_prefix,
  output logic [K-1:0]             task_pattern,
  output logic                     iss_done
);
  localparam int unsigned AW = $clog2(M);

  logic [AW-1:0] sorted_idx [M];
  logic          srt_busy, srt_done, sort_bank_q;
  logic [AW-1:0] tv [2][M];

  stable_sorter #(.M(M), .K(K)) u_sorter (
    .clk, .rst_n, .start(sort_start), .no_in, .busy(srt_busy), .done(srt_done), .sorted_idx
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sort_bank_q <= 1'b0;
    else if (sort_start) sort_bank_q <= sort_bank;
  end

  always_ff @(posedge clk) begin
    if (srt_done) tv[sort_bank_q] <= sorted_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sort_done <= 1'b0;
    else sort_done <= srt_done;
  end

  // issue
  logic          issuing, iss_bank_q;
  logic [AW-1:0] ptr;
  logic [AW-1:0] rd_prefix;

  ps_table #(.M(M), .K(K)) u_table (
    .clk, .wr_en(tw_en), .wr_bank(tw_bank), .wr_idx(tw_idx), .wr_prefix(tw_prefix),
    .wr_pattern(tw_pattern), .rd_bank(iss_bank_q), .rd_idx(task_row),
    .rd_prefix, .rd_pattern(task_pattern)
  );

  assign task_valid      = issuing;
  assign task_row        = tv[iss_bank_q][ptr];
  assign task_prefix     = rd_prefix;
  assign task_has_prefix = rd_prefix != task_row;
  assign iss_done        = issuing && task_ready && (ptr == AW'(M - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; iss_bank_q <= 1'b0; ptr <= '0;
    end else if (iss_start) begin
      issuing <= 1'b1; iss_bank_q <= iss_bank; ptr <= '0;
    end else if (issuing && task_ready) begin
      ptr <= ptr + 1'b1;
      if (iss_done) issuing <= 1'b0;
    end
  end
endmodule
