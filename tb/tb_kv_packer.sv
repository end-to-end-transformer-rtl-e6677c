// tb_kv_packer: the int2 matrix of the CPQ figure with its keep mask, taken as
// one 16-element record in row order, must produce the printed index,
// label (1 0 0 0 1 1 1 0) and data (-1 -1 1 -2). Random records follow,
// checked against a procedural packer, including the compressed length.
module tb_kv_packer;
  localparam int CH = 16, QB = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_keep, rec_valid;
  logic signed [QB-1:0] in_q;
  logic [CH-1:0] rec_index, rec_label;
  logic [CH*QB-1:0] rec_data;
  logic [$clog2(CH+1)-1:0] rec_nkept, rec_nnz;
  logic [$clog2(CH*(QB+2)+1)-1:0] rec_bits;
  int checks = 0, failures = 0;

  kv_packer #(.CH(CH), .QB(QB)) dut (.*);

  int q2   [16] = '{0, 0, 0, -1, 0, 0, 0, 0, 0, 0, -1, 1, 0, -2, 0, 0};
  int keep [16] = '{0, 0, 0, 1, 1, 1, 1, 0, 0, 0, 1, 1, 0, 1, 1, 0};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_and_check(input int kk [16], input int qq [16]);
    logic [CH-1:0] e_idx, e_lab;
    logic [CH*QB-1:0] e_dat;
    int nk, nz;
    e_idx = '0; e_lab = '0; e_dat = '0; nk = 0; nz = 0;
    for (int i = 0; i < CH; i++) begin
      if (kk[i] != 0) begin
        e_idx[i] = 1;
        if (qq[i] != 0) begin
          e_lab[nk] = 1;
          e_dat[nz*QB +: QB] = QB'(qq[i]);
          nz++;
        end
        nk++;
      end
    end
    for (int i = 0; i < CH; i++) begin
      @(negedge clk);
      in_valid = 1; in_keep = (kk[i] != 0); in_q = QB'(qq[i]);
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!rec_valid || rec_index != e_idx || rec_label != e_lab || rec_data != e_dat
        || rec_nkept != 5'(nk) || rec_nnz != 5'(nz) || rec_bits != 7'(CH + nk + QB * nz)) begin
      failures++;
      $display("FAIL record: idx %h/%h lab %h/%h dat %h/%h", rec_index, e_idx, rec_label, e_lab, rec_data, e_dat);
    end
  endtask

  initial begin
    in_valid = 0; in_keep = 0; in_q = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    send_and_check(keep, q2);
    // figure values, spelled out
    checks += 3;
    if (rec_index != 16'b0110_1100_0111_1000) begin failures++; $display("FAIL index"); end
    if (rec_label[7:0] != 8'b0111_0001) begin failures++; $display("FAIL label"); end
    if (rec_data[7:0] != {2'sb10, 2'sb01, 2'sb11, 2'sb11}) begin failures++; $display("FAIL data"); end
    for (int r = 0; r < 20; r++) begin
      int kk [16], qq [16];
      for (int i = 0; i < 16; i++) begin
        kk[i] = $urandom_range(1);
        qq[i] = kk[i] ? $urandom_range(3) - 2 : 0;
      end
      send_and_check(kk, qq);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
