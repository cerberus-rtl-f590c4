// cerberus_tb_pkg: reference model shared by the Cerberus testbenches.
//
// REF_H holds the 288 columns of H_S-ECC as fixed numbers, written out once from the code
// construction (column i = {lower 16 rows, H2 rows}); they do not come from the RTL package's
// functions, so a testbench that compares against them checks the RTL's elaborated matrix too.
// Also: reference syndromes, error-pattern helpers and random 256/288-bit values.
package cerberus_tb_pkg;

  localparam logic [287:0][31:0] REF_H = {
    32'h45cb89f3, 32'h916fe656, 32'h63cbafcb, 32'ha39d11bc, 32'h849331b7, 32'h8403aba9,
    32'h896e1dcb, 32'hbfd5df28, 32'h94313f91, 32'h0446b898, 32'h5372e407, 32'hcb243784,
    32'hb1cba7de, 32'hae384305, 32'h205ba1ed, 32'hea599ac2, 32'h3a5e8987, 32'h49aa869f,
    32'h49c4762e, 32'h8f0d5b22, 32'h7d24ce14, 32'h527ce9b7, 32'h85cd53cb, 32'h4a9b66e6,
    32'h253533fb, 32'h3f4bfe8e, 32'hd3357399, 32'h778ea48b, 32'h4ef2e15e, 32'h0e652bda,
    32'h6a5f8bc1, 32'hff2b9ebe, 32'h0053cb99, 32'hafd7a040, 32'h9c3de9a9, 32'ha6007175,
    32'h491c5d60, 32'hab8eed5d, 32'h0391114c, 32'hdbba2066, 32'h69b83788, 32'hcc7e2f72,
    32'h9b0baa91, 32'h80e85345, 32'h6ec28d64, 32'h190a9e7e, 32'h14bc8341, 32'hbcd609b6,
    32'h2b5f3cce, 32'he2398ef2, 32'ha87072bf, 32'h8c6dee64, 32'hfffae0a9, 32'h6560128a,
    32'h7ac1a860, 32'h9c64f59d, 32'h327a8624, 32'hce476190, 32'hfb04ae7b, 32'h178fa015,
    32'h3faa548e, 32'h83bb4702, 32'hb0691432, 32'habc54fd4, 32'hcafa303d, 32'h8fa3c086,
    32'h343ccbe7, 32'h2aff5b2d, 32'hc9fa5193, 32'h90daed29, 32'h6f6e82ae, 32'he1e9208b,
    32'h909a5fba, 32'h46f02f7d, 32'hc7ee172c, 32'hfa2da0f7, 32'h487c34aa, 32'h8c486d55,
    32'h187ec5ce, 32'h38aaf269, 32'h7ee434ac, 32'hb4b6ac5e, 32'h167b8593, 32'hee86c448,
    32'he5fe131b, 32'h3c6cc3ef, 32'h98a03b14, 32'h916244d3, 32'ha9d4cc57, 32'h9a0a6501,
    32'he05c8c4e, 32'hbd197577, 32'h930a3cb3, 32'h31f9f24b, 32'hb1b05adf, 32'h85e19242,
    32'h7341857b, 32'h041833d9, 32'h89b05482, 32'h04783718, 32'h022d31c3, 32'h62d05002,
    32'h80057185, 32'hd962025c, 32'h6919a4fc, 32'hc4d2f6e3, 32'hb891e07b, 32'hf092e6e1,
    32'h4876169f, 32'hc387b4bf, 32'h9cb8c1bd, 32'h050b239a, 32'h9ee85c7c, 32'h7eaf3748,
    32'h1f625871, 32'h2a0915b4, 32'hf250517e, 32'h0d3b305d, 32'h1c441137, 32'h249cdb2f,
    32'h04217d16, 32'hc6c3dcb4, 32'hf4ba1fa3, 32'h604511b9, 32'h957a34de, 32'h6278facb,
    32'h4af67419, 32'h7025b095, 32'h1a6d72ce, 32'hdc547125, 32'hc1b7810d, 32'habe1ac97,
    32'h0eaf17f1, 32'h3110500d, 32'hcd8e5ba9, 32'hc6a56af8, 32'h4a03796a, 32'h9b9f4f2d,
    32'h7150e880, 32'h67f65f54, 32'h65e3a733, 32'hb5bb65a1, 32'hcec4ef96, 32'hefb16dee,
    32'ha0ce506d, 32'h875d1572, 32'h0dbbafb0, 32'hd55ca463, 32'h95587bbf, 32'h68543026,
    32'h8832a8f9, 32'h25bfb366, 32'he48dc8b2, 32'h53b86575, 32'h7d1eaae5, 32'hde395bbe,
    32'ha2eb3cbc, 32'h8c4fd8fe, 32'hea8c1cbd, 32'h3940053e, 32'h6f6372ba, 32'hf1fd11ec,
    32'h3c4858e8, 32'hf1ede609, 32'h78f1e852, 32'h10d81213, 32'h47fd15a9, 32'h246fd336,
    32'h6b877500, 32'hd1de093b, 32'h4c3b7f1e, 32'hd83ecc5b, 32'hec10e1b3, 32'ha8bb0d7e,
    32'h3a34c5ba, 32'h79806992, 32'hf5ab50f4, 32'h5118e2c7, 32'h6ed3a338, 32'h1bbc3310,
    32'hbad8510a, 32'h66f9cbf6, 32'hd2867d79, 32'hc53d065b, 32'ha44ae67b, 32'h00e892cf,
    32'h033d1bdf, 32'h1330c0dc, 32'h6299859f, 32'h7d670d71, 32'he1211449, 32'h7d6e09cd,
    32'haec7af2c, 32'h494979a5, 32'h96441a6f, 32'h17935bc0, 32'h89baca67, 32'ha4275c8a,
    32'h3daccca1, 32'hc45b6e1d, 32'he76f3f07, 32'h80a56910, 32'hb2fb1ba4, 32'h812cee83,
    32'h25cfcbeb, 32'ha337dc14, 32'h1398ef0f, 32'hdfde9ab6, 32'h7b53e123, 32'h1bdb7d40,
    32'h98607229, 32'h30c3c040, 32'h502f73d2, 32'h530c581b, 32'hcc5837e8, 32'h0eee40d4,
    32'ha5408ed0, 32'hc051012d, 32'h497b77ea, 32'h2fc0534a, 32'h8ec9afb3, 32'h68fd4b85,
    32'h030b8f2b, 32'h9a45b815, 32'hfdf57624, 32'h8a5e8606, 32'h40608d68, 32'hb707a01f,
    32'hf3c5e437, 32'h1ce57ac3, 32'hbb0ca493, 32'h081606c2, 32'hed98a874, 32'h84fd05c7,
    32'hfc92cec9, 32'h483c5b53, 32'hf12f7e4f, 32'h967e2752, 32'hda2fc12b, 32'h58140920,
    32'h1feac362, 32'h0aff7559, 32'hdda1120d, 32'h15a4cc2a, 32'hf8668467, 32'ha495c7e8,
    32'h25b957b8, 32'h77e72415, 32'h43cd5332, 32'h62f9dc59, 32'ha31c399e, 32'h63a91d45,
    32'hc2055c7a, 32'hd973feb8, 32'h38d0c558, 32'h51a9d8d3, 32'he4c076bd, 32'hd44971b3,
    32'h27b081e0, 32'hccdc376c, 32'ha693ce82, 32'h3fc58113, 32'h92b37113, 32'h8c33b3ff,
    32'hfc4e86bd, 32'h3139f27d, 32'haa6e7ff3, 32'hb540c031, 32'he449c76c, 32'h18eef2dd,
    32'h45f1c9df, 32'hceae05d3, 32'h42e15874, 32'h7e3aac25, 32'h02771a8d, 32'h17ff1da2,
    32'hdde33943, 32'h2ac1e54b, 32'haa487d0d, 32'h74800a4a, 32'h4f82c032, 32'h16816172,
    32'h59fb35fb, 32'h632a5f5b, 32'h2be485e4, 32'hf68eb05a, 32'h4cdce3fc, 32'h9141dc4d
  };

  function automatic logic [31:0] ref_syn32(input logic [287:0] c);
    logic [31:0] s;
    s = '0;
    for (int i = 0; i < 288; i++) if (c[i]) s ^= REF_H[i];
    return s;
  endfunction

  function automatic logic [255:0] rand256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [287:0] rand288();
    logic [287:0] v;
    for (int i = 0; i < 9; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [287:0] bit_err(input int unsigned i);
    logic [287:0] e;
    e = '0;
    e[i] = 1'b1;
    return e;
  endfunction

  // Random non-zero pattern inside symbol a.
  function automatic logic [287:0] sym_err(input int unsigned a);
    logic [287:0] e;
    logic [15:0]  p;
    p = 16'($urandom_range(1, 65535));
    e = '0;
    e[a*16 +: 16] = p;
    return e;
  endfunction

  // Two bits in two different symbols.
  function automatic logic [287:0] dbl_err();
    int unsigned i, j;
    i = $urandom_range(0, 287);
    do j = $urandom_range(0, 287); while (j / 16 == i / 16);
    return bit_err(i) | bit_err(j);
  endfunction

endpackage
