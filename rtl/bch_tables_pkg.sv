// bch_tables_pkg: constant tables of the BCH(9088, 8192, 64) decoder over GF(2^14)
// with the field polynomial x^14 + x^10 + x^6 + x + 1, pre-computed so that no
// elaboration-time field arithmetic is needed.
//  * SYN_A32[j]:  multiply-by-alpha^(32 J) matrix, J = 2j + 1 (syndrome Horner step)
//  * SYN_WM[j]:   row k, bit i = bit k of alpha^(J i): the word term of syndrome S_J
//  * CH_STEP[i]:  multiply-by-alpha^i matrix (Chien step of coefficient i)
//  * CH_INIT[i]:  alpha^(-9087 i), so the Chien search starts at stream bit 0
// A matrix m is used as y[k] = ^(m[k] & x). The tables are generated from the field
// definition by a small script kept with the design documents.
package bch_tables_pkg;
  import kvnand_pkg::*;
  typedef logic [GF_M-1:0][31:0] gf_wmat_t;
  localparam gf_mat_t SYN_A32 [64] = '{
    196'ha2b1456a8ad515889b1136226c44fa39f473e8e7d1cfa1158,
    196'h6748ce999d133ac13f827704ee093b5a76b4ed69da53b73a4,
    196'he811d023a04740e691cd2b9a7734067a0cfc19f8337067408,
    196'hb7516eaadd55ba9c2538427084e13e927d2cfa59f4b3e9ba9,
    196'hdd81bb037606ecd059a0b3414682d085a103422684cd0aec1,
    196'h7700ee01dc03b87072e0e5c1eb832006400c8019003203b80,
    196'h6334c6698cf31985050a02142428ab6556c2ada55b4ab719b,
    196'h512aa25d449a89e43bc87f90df216f68ded9bdb37be6f6894,
    196'h85cf0b9e173c2efd91fb23f667ecca179427284e501ca02e7,
    196'h82a1054a0ab415ea8bd51faa3f54fc09f813f007e00fc0150,
    196'hfac3f587eb2fd6256e4ad495892be897d127a24f441e8bd61,
    196'hae4b5c9eb93d7254aea95d52baa55b00b6096c32d8e5b1724,
    196'hb2d565aacb7596d9fbb3f767eecfef49de9bbd177aaef596b,
    196'h81b5036a06d40da9af5356a6ad4d5b2cb6516c82d905b00db,
    196'h5c0eb81d701ae0e9cfd397a72f4e829105220a6414c82ae06,
    196'h7038e079c0f381973b2e7e5cfcb90948129825104a209781c,
    196'h685ad0bda15b425edebdbd7b7af61db63b6c76f8ed71db42d,
    196'h69c4d389a7334e0f581eb83d507a4932926d24fa4974934e3,
    196'h0c4c18983130626c8ad915b20b649a85350a6a14d429a8626,
    196'hca47948f293e5236e26dc4db89b7d92bb25f649ec9bd92523,
    196'he891d123a24744e61bcc37986f3036f26decdbf9b7736f449,
    196'h3c947920f241e4bf5d7eb2fd45fab7616ec2dd85bb8b75e4b,
    196'h572cae515ca2b9925f24be497c922e0a5c1cb83970f2e2b97,
    196'hc21d843b0856106e3cdc71b8c371c4fd89f313c6278c4e10e,
    196'hd443a887510ea2c905920324264898d331ae637cc6f98ea21,
    196'h49ce939d273a4e3d507aa0f541ea4a1a943d285a50b4a24e7,
    196'h6800d009a033408e811d0a3a347400ea01dc03b807700f401,
    196'hd5e1abc357a6af18be317462c8c5c46b88df11be23fc46af0,
    196'h10e421c043a08751eaa3dd479a8f25f84bf897f12f625c872,
    196'h6d38da79b4d3694be897d12f825fe985d30ba6374c6e9b69d,
    196'h3eb27d6cfaf9f54d589ab135626a7a64f4c1e983d387a5f58,
    196'h7274e4e9c9f39315502aa85550aad321a64b4c96992d3393b,
    196'h02ac05500aa015c287850f0a3e14fe85fd03fa07f40fe8156,
    196'h06200c48189031a6414c829925324c469885310a6214c4310,
    196'h82b705660acc159a9f353e6a7cd4fb1df633ec47d80fb015b,
    196'hcc2d985b30b66120ec41d083a1078e211c4a389471a8e2617,
    196'h87790efa1df43b6f0ede1dbc1b78318a6314c6098c13183bd,
    196'h7d46fa8df51bea4a9095212a4254f9edf3d3e787cf0f9fea2,
    196'h2188431086010c2392472c8e791c53b0a7614ee29dc5390c5,
    196'h9f973f267e4cfc866d0cd219843317f02fe05fe0bf417cfca,
    196'h38347060e0c1c13bb6776ceed9dd0b8e17142e085c90b9c1a,
    196'hbe637cc6f98df3a5854b0a96352c5438a87150c2a18541f30,
    196'hdee3bdcf7bbef7a30f461e8c1d1864d0c9a1936326c64ef71,
    196'h0030006800d001a031406280c5010a30146028c05100a0018,
    196'hf38be71fce3f9c0cb0196832f0659341268a4d149a29379c4,
    196'hb3fd67f2cfc59f38c2718ce319c6807100ea01d403a8059ff,
    196'hfbe7f7c7ef8fdfe45bc8bf917f2285a30b46168c2d185bdf2,
    196'h1b3036606cc0d91a82350c6a18d4aa9b5536aa6d545aa8d99,
    196'h85250a421484298d751aea35f46bedf3dbe7b7cf6f1edc292,
    196'h46ca8d951b0a36d2a5a54b4a96956be2d7c5af8b5f96be365,
    196'hdf3bbe7f7cdef962cac59d8b3b1629145220a46148c292f9c,
    196'h47ce8f951f0a3ed3b1a7634ee69d0af615e42bc85790ae3e6,
    196'hc8b1916b22f645243a487c90f9213af275ecebd9d7b3ae459,
    196'h5294a5214a429457bcaf795ed2bdf7edefdbdfb7bfef7e94a,
    196'ha28b451e8a1d1418a2314462a8c5f301e603cc2798cf31144,
    196'h3c7e78fcf1f9e3cfb99f7b3ed67d908521024204848909e3e,
    196'h9347268e4d1c9aaa7154eaa9d553b9e173cae7b5cf6b9c9a2,
    196'he7e5cfc39fa73f29985338a6714c057e0af415e82b50573f3,
    196'h3dc67b8cf739ee4e1a9c3d387a70c92592432486498c91ee3,
    196'h33aa675cceb99dc091812b0256049fa13f4a7e94fda9f99d5,
    196'hbb217642eca5d97092e125c24b84ac2b5856b08d619ac1d90,
    196'h2b6456c0ada15be9d3d3a7a74f4eb5fb6bfed7fdaffb5d5b2,
    196'h5ca2b94572aae5096812d825b04bbc357862f0e5e1cbc2e50,
    196'h96252c4a5894b1bf477e86fd2dfa4dd29bad377a6e74dcb12
  };
  localparam gf_wmat_t SYN_WM [64] = '{
    448'h2e022000170110000b80880085c04400ece2020076710100bb388080dd9c404040cc00202066001090330008c8198004e40cc0025c044001,
    448'hceaea200c48a591011e18b20675751002ceb8e88cc7a9c80224a23a09675c7442893ec4055af48c0dadb68821449f620aad7a46023c31641,
    448'h5494e6a08ec744203ab80ea8b974b90474c00240a48d37707ddbacb82428be50287a5ec2b4a7450068fe951007996f583240bbc840a9c9c1,
    448'h0434262071a50dd00071fba02539a0c4db7b6a08caa84b18e67109ba2723b3d4e3a9ece04a90b6c8f4edd9d8c88415c0ba1b69a4cc01e435,
    448'h9d1c76e8e698cc10f8d881a80e439d5075bd3aaa31ab16b01b89b0089dc708eccdc5a2247f252dc468c5d600e1ab483857f81a6470f1311d,
    448'hae282000cff20698801c49eac9750774b4c9d6cc3cbb39dc82abf4f0dcffa360e3fd04bc2e7a321c857cecc88bebb3602a2c27f00fae3071,
    448'h155f7ffe41e70444a0b2b090453561e4505716d484f98c7416936e280c4f6ce4ee3612982cef0fd0d4f9490874398d78021508acf2f8cb95,
    448'h2b38146846fcd240512e328a9d4183f0a41e5c0c82bb605cb92bcf22e14208bc9e54429c2297c0c0562d4ef09f0f690ee037903ed58f74a5,
    448'h8581315e2d786d7cbef1b5508fb1061ce012a0de741a9f18bc45bc281896ff840319607c58ddf97ee3c9003ab151da50aed3c4c8f401cc09,
    448'hc744ba486d6ec24c582c9a70963854d086808fc8e4beaaf86b9ccb7a7ab86876a1134de2d447781c7ffeace8c4a1fe7ed7f45fc6a31ce875,
    448'h51e0d8c85b2eadc4667bf0b80dba69a42ec0178a5009be8ad2309c82056d19bc7eb52da452c13e3ed91dacf680d92e541b8dda000e517e21,
    448'h09b2146800d4afbcee57677aec6210023dad0b2e8d58bbe06fdd6f746d4b0e023ef01b9aa5a6e4a8c4cf76ace6785ef497aa070c7244ba7d,
    448'he149995eeb359f2649f70436f10a0218c97914c0f9009586c3f92fde7f5c048c81a2fd94e371da84cb1fc15ce6d18d3444ae3aa862ec2849,
    448'h49c59b5ec63b4c2012da062264b38a344bf115daa6810998f09e8332c2db7b4621a5f76861563fc4c22d4678f8548d8208734d9ca8210c93,
    448'hc2418916120a029020a66320ba9045a8d4e68f3eba5f4b76b89f85eae39d80f4dcf829fcfbc5ab76a05e53f47b963700c007d8aede8a635d,
    448'ha34e1a489f554a2c10c62e5023da9d36a71a89c23ad8e4acfb3789c66c10cb4ae61deb8427d90120bfe369cedeeb9a82a1ce90da7d4fe1d1,
    448'h7264ca800f031f8aab57e046414827cc0c6cf83ef9190a962d4210b4cac7eeec83e8bdc2dd0fd29a0e7191e6c41debbca4ac8acc7bebfbd5,
    448'h9ccd6b96f40eabc4cee5f29ab9111918cbc1a0f02cf44ae0ef2edb72ff1368a81926bcee3ec4e47c998f574871ca38c409828bb2e083914f,
    448'h151d77fed16219f4014bff1a2a9680a84a68fe329c94a6f8c143b3d0ab8610ac82a124c0f4e7c898ac16b1028473eaac25440bd206641051,
    448'he721b15e79d4b5c44f9b78b0002eddc4da497c5c4334b0a41ce0200a4d896a4408b25eda606832cc1ed9348278f18ca6f6fba0424c2b4ca9,
    448'hd3c0d8c845212e6084fc340222785728fc50d0e69295133097cbbae03ae454b0f43274ba9be8ef863292816241f8bc56edacd876659c04e5,
    448'hb481619676ed6e78947c1f4a1010a400355453d0cf64623cd8e61d6ad62c867e1a7849ee455e0266f2be077a984cf290acf78cf8b1f873f1,
    448'h36656b96568ef4fc5db2ddda1165332c453c98520779e0867ab753a84e6f9d0218314a4a3774586471a5ccccd4553b42c6283cf246590d51,
    448'hcc1fa736f7a30c48aaf830e827f20946619f51d4c3390a1aaa13a0741a42504c94a907f8f5b1018608071b525a48942eb13ccb3ea809576d,
    448'hbb3656e87b3433baafa7cf6e50164bca69e348bc39efbcac1deab70a5c7b0faa4817dbae44363582f7bd3c1e7c5421a2ce69197654a249c5,
    448'ha0230116bb10db865147eab451cf338adcef44266aa4143a764a8a72bc8e9a78c6f66106d6f54e76ae1d45028b33413cd27f3226dda73c23,
    448'h6e58ac20d96a42c6182c5834e4ee6908ff9a0b92131e8e4004c552541a52b82c310f4e16ce1445745e17926acba9f518f5b376bc1b00a5db,
    448'hfeb4e6a04f02a1f4e483d712af9f21d68f09470c261550904a0a0cae6bd5a7da638aabf6581c67303501b21c3d6556aa6e510aa604e58623,
    448'h0199157efc48d7ee733d76fcd5ee28943687e82e4765cceed5df176ea686e68441f45904f3043c527c3237e618c14cbe5eceaddcb10db965,
    448'hfe82e0802483d030792005a8546df3b8f4b926cabf1d30dc0427404a2d8f21a8ae059e86afb951025aad9698f64516b248962800964befb7,
    448'h9e6e6a80290126940434e11ab9920618e0ef6b46b474fa18842048da964fa72a4a66b1f00325195edf5802a0bb5599023a43a350f8078a19,
    448'h7473edb6f2f547e4b03dd4b20698e380ad638a1af1eee43a6e30b4b0ed6081d239feeec02456e41aa29dcf64e672700c5127ab7855c32a19,
    448'hf8efcb96a2747ac43764d0988de00a520bef80d444c4f21e150a4136de0c4d86918218f03c1749845de8985034f737de8a649732ace62079,
    448'h137c5ee83b4614922910c186b0ae987ecb5d9efe7b04d51ae250fc7280bec50413d535c02ed600fe32d9b63abb4b717625f814ba59e5e7d9,
    448'h920d4396c3f5f06adf00b64ee3ea1690fd9b53cae6a3433cf49cf74cd49b6f08543b6a9af88301e2b131e45a9d58249c5e9d298a57e71c7f,
    448'hdcebe9967b506c5c9e7a915063bc813a154afa34e59cc0b87c733414ee8c99dc16c7b69a36a48fc09221688ea83c095c263d479cb0a36613,
    448'h082e02008473b91647e3891e2345d0cc6a4f0bdcc8613a643ee9d94cfbf3ac24ea0ef08e06f4e8fcf66c6468ae85ac4c7b20c982ef796d21,
    448'h46d1ad362be6cff85add7fc059a1050af10c77945d9bb7307266d58ed44ccf42224219b09b5a95b8c5262f66ab365420aadfa4da7385dcc7,
    448'h4136966848c4202a8eaa24c6752120a84f0e46d67d6675baa002402e43a549f8960423aa6ed71d48b1bb038e83fccd68c3884baaa2c59bc9,
    448'he9f59f7edf7d2c502670312adba9a4104cdeb9ba3dd06af048623082d20c26f262e863a2e5d71c38dafe5c2a15ba37f4a99eba9e502fd5b3,
    448'ha115177e435f7c803fd0e808f25414a8d5f73f967f564802bc60ac68c822bc1cd935e1fef7815d5c915a6cce0bde2660c2984282cc562a81,
    448'h00960620255c8d3060d1878864d8a67ee00b6cc012d5eabcaec5b0dc48cb5f985eef106aca5c82ecb852788670e56542f1ce877afa1e1c51,
    448'h2ca020001d629b96c9cf4b3c44064934944d25583b9d805cdb26ee8ec4d9439c9ef4bcb269ddf55a7a6394e20b62f198fecfd1bcd0ec21cd,
    448'h6c72ac20e22f20088c2808c828c0020266b854ea18e75a4c0ea68a66d02a5564b37006861dedb76cb1ea905c27302758b7046c7227584e0f,
    448'h7130d4e8385c4ae6126cfc1e8bf7979484eadf967329c6ec795bb72ed5d216680c0dca48bff8a82439299d4a7e625f8ae57ab98844451721,
    448'he23d87369d21bda84d7bec6a6cef8a4eb6ef9172c2ea0f88a79f7694489f44663fd90b6ae47566aac033d09c3936d2b8b620d302c40cc25f,
    448'h8d83315e24be034aa0a5184c8c8951308ee3212404e50a22198c17e4bbbe1e2e2d431c68ce9f5900bbe7038647a69eb82a17e976990a5765,
    448'h379074e8ab8502c8202ed04ad01d48346c12ee2c7e8ec25a32647dfae9cba7720d5c1c162d7fcc40e2cc34feaa7901ce56378774541b023b,
    448'h96e96996e59aa8704c42b588d80bbcde71d883562464bdca03104656a9cbc8200716f3565fe2f7728a0ba1b8bcc8ce2244f869b478fb6105,
    448'h5310d4e8e874cb1a586d03647dde850e5bbdeaf25d6e5f08b0568310530bce6e5c4161b42f71f77a51cc22b4bdced46ae5d3a0eed10c6fbd,
    448'ha8fa0c203b03a2126c2c83a68e190f22c8ffe094504ab94264f907a0d70a4674b6a50f042bacf1be6716b68ac19d71e45ce521ba567c0527,
    448'ha8bb0536b4a06712b6bd0b84a12f29fcaa74c5ac2cd8b6f4b874dedc37c8b464da54a462dca1bdd46bfd28c222f52f56817c90367485fdb3,
    448'h8fe63a486867f46c7d3836fa87f0f31220706724cc5502cca89f97fc0ff44702b90353f646585266f523f35ec3aefd14f0ec6328c4966c37,
    448'hda71cdb6e3b70cc20af0f084d82e83b825f90f242dd08cd2c2d5b5e6307eda8e7d5746028e5a0e7400d7b6cca90ed38eb7171db8f6d99a31,
    448'h22fe0e20651cb800676882022e8adee44058248eea0a9136161c7e18b42b9156e63e6ad0fd1643a610f5530c426a501e399ac714ab344233,
    448'h0783315e2179dd94db7bc93a4d223262f7e01eb86430626edcdfd53c815d9352d3154084d0970ce211880a700e2110aa57ec714c3fce80d5,
    448'hd46be9965052176283b5348e11e708fa73f38348e05b3b1e03d741ead8a209924f95d09cf05a63aaad85f4b8eb107b562467a73abd115ed9,
    448'h74ebe996c28c931eeb078bf6d3f5ad40b40434822c4ea59aadf4137648af5d44c7d73d304846408e2ac873c64bf035f6da7694a42e36e8eb,
    448'h5693e5b60c22077488353710c9f1d0f4f90cce16524f05f0d31562820d38c70cf7e32a9e4157cc9efb11aa101de966a0b2c1aca4c01fce83,
    448'h786eca803a18d06cf9003cd8b9cb3488d7bc3bc245bf6b90feb0fcb0120a35b6209f83e444201ed4317da9602062a7742a595726e1d592b5,
    448'h69289048e5764a0c9244885294c7204483e08b4ce805fb0ab64490603f8b9fcc228fa97c731c4084f14590563eb7d59c48cdbcb8fc126fd9,
    448'hae992536f84cad8cec7968d06919d09ab8f95e345616c05837f3893c359782d08f3efc928367bba8a122f82489b52db4ff8c07f43a75bd45,
    448'hc96c9a483a88ea7e5ec4b5d6daa409402c5569d44e5f1e4cfc0f8ff44b752ef4f9d2880c307097f8299f007846eb907e3ddabe4257d48261,
    448'h3e236196679c3690adbec108e02464a64ea0c15c9dd365dc39a4259cfa4284beaa083130fd24dc5a8a011f46ed04f2b8c291b3bed52d76b3
  };
  localparam gf_mat_t CH_STEP [65] = '{
    196'h8001000200040008001000200040008001000200040008001,
    196'h4000800100220004000800102020004000800100028006000,
    196'h20004008801100020004080810100020004000a001c001000,
    196'h1002200440088001020204040808001000280070006000800,
    196'h8801100220044080810102020404000a001c0018003000400,
    196'h440088011002204040808101220280070006000c009802200,
    196'h220044008801102020404880b101c0018003002600cc01100,
    196'h110022004400881012202c4078806000c0098033006600880,
    196'h08801100220044880b101e201c403002600cc019803300440,
    196'h04400880112022c4078807100e2098033006600cc01980220,
    196'h0220044808b011e201c403882710cc0198033006600cc0110,
    196'h0112022c0478087100e209c433886600cc019803300660088,
    196'h808b011e021c043882710ce219c433006600cc01980330044,
    196'hc0478087012e029c433886712ce2198033006600cc819a022,
    196'he021c04b809701ce219c4b38b6710cc0198033206640cf011,
    196'h7012e025c04b806712ce2d9c7b3806600cc81990332067808,
    196'hb8097012e005c0b38b671ece1d9c033206640cc8199031c04,
    196'h5c04b8017002e0d9c7b387672ece8199033206640cc81ae02,
    196'h2e005c00b82170ece1d9cbb3b76740cc8199033206e40d701,
    196'h17002e085c30b87672ecedd9dbb3206640cc81b9037204b80,
    196'h0b82170c2e185cbb3b7676eccdd99033206e40dc8139005c0,
    196'h85c30b86172c2edd9dbb337666ecc81b9037204e401c802e0,
    196'hc2e185cb0b96176eccdd99bb1376e40dc8139007208e42170,
    196'h6172c2e585eb0b37666ec4dd89bb7204e401c8239047230b8,
    196'hb0b9617ac2d5859bb137626ec4dd39007208e411c8a39185c,
    196'h585eb0b5614ac24dd89bb137626e1c8239047228e4d1cac2e,
    196'hac2d5852b0856126ec4dd89b91378e411c8a393472e8e5617,
    196'h5614ac215862b0137626e44dc89b47228e4d1cba39f472b0b,
    196'h2b085618ac115889b9137226c44da393472e8e7d1cfa39585,
    196'h15862b045628ac44dc89b1136226d1cba39f473e8e7d1cac2,
    196'h8ac1158a2b1456226c44d889b113e8e7d1cfa39f473e8c561,
    196'h45628ac515aa2b1136226c44d889f473e8e7d1cfa39f462b0,
    196'ha2b1456a8ad515889b1136226c44fa39f473e8e7d1cfa1158,
    196'h515aa2b5454a8ac44d889b1116227d1cfa39f473e8e7d28ac,
    196'ha8ad5152a2a5456226c445888b113e8e7d1cfa39f4f3e9456,
    196'h5454a8a95172a2b1116222c465889f473e8e7d3cfaf9f6a2b,
    196'h2a2a545ca8b9515888b1196232c4cfa39f4f3ebe7dfcf9515,
    196'h95172a2e545ca82c46588cb13962e7d3cfaf9f7f3e7e7ca8a,
    196'hca8b95172a2e5496232c4e589cb1f3ebe7dfcf9f9fbf3e545,
    196'he545ca8b95172acb1396272c4e58f9f7f3e7e7efcf5f9f2a2,
    196'h72a2e545ca8b95e589cb1396072cfcf9f9fbf3d7e72fcf951,
    196'hb95172a2e565ca72c4e581cb23967e7efcf5f9cbf397e5ca8,
    196'h5ca8b95972b2e5396072c8e5b1cbbf3d7e72fce5f9cbf2e54,
    196'h2e565cacb959721cb2396c72f8e55f9cbf397e72fce5f972a,
    196'h972b2e565c8cb98e5b1cbe395c722fce5f9cbf397e72fcb95,
    196'hcb9597232e465cc72f8e571cae3997e72fce5f9cbfb97e5ca,
    196'h65c8cb9197032ee395c72b8e571ccbf397e72fee5f5cbf2e5,
    196'h32e465c0cba19771cae395c72b8ee5f9cbfb97d72fae5d972,
    196'h197032e865d0cbb8e571cae3b5c772fee5f5cbeb97572ccb9,
    196'h0cba197432e8655c72b8ed71dae3b97d72fae5d5cb2b9465c,
    196'h865d0cba195432ae3b5c76b8ed715cbeb97572cae515c832e,
    196'h432e86550c8a19d71dae3b5c76b8ae5d5cb2b945728ae6197,
    196'ha195432286650c6b8ed71dae3b5c572cae515ca2b9c5710cb,
    196'h50c8a199433286b5c76b8ed73dae2b945728ae715ce2ba865,
    196'h286650cca1b943dae3b5cf6b9ed715ca2b9c5738aef15d432,
    196'h9433286e50fca1ed73dae7b5cf6b8ae715ce2bbc5778aca19,
    196'hca1b943f285e50f6b9ed73dac7b5c5738aef15de2bbc5650c,
    196'he50fca17940f287b5cf6b1ed43dae2bbc5778aef155e2b286,
    196'hf285e503ca27943dac7b50f681edf15de2bbc5578a2f17943,
    196'h7940f289e533ca1ed43da07b40f678aef155e28bc5178bca1,
    196'h3ca2794cf299e50f681ed03d807bbc5578a2f145e28bc5e50,
    196'h9e533ca6794cf207b40f601ee03d5e28bc5178a2f145e0f28,
    196'hcf299e533ca67903d807b80f701e2f145e28bc5178a2f2794,
    196'h6794cf299e733c01ee03dc07b80f178a2f145e28bc517b3ca,
    196'h33ca679ccf199e80f701ee03dc078bc5178a2f145ea8bd9e5
  };
  localparam gf_t CH_INIT [65] = '{
    14'h0001,
    14'h3f6a,
    14'h2844,
    14'h29cd,
    14'h2063,
    14'h3fca,
    14'h356d,
    14'h138d,
    14'h2346,
    14'h0395,
    14'h2807,
    14'h09f4,
    14'h2f12,
    14'h1423,
    14'h09ad,
    14'h1a54,
    14'h3628,
    14'h18f4,
    14'h142d,
    14'h24ce,
    14'h3066,
    14'h1564,
    14'h076f,
    14'h3f8e,
    14'h21c4,
    14'h09e5,
    14'h1909,
    14'h12b9,
    14'h162e,
    14'h1e1f,
    14'h0a93,
    14'h0c1e,
    14'h2e7c,
    14'h11f0,
    14'h0aa3,
    14'h178d,
    14'h195d,
    14'h0f61,
    14'h2298,
    14'h121e,
    14'h3f97,
    14'h3146,
    14'h1810,
    14'h1dad,
    14'h04e6,
    14'h090c,
    14'h3817,
    14'h242c,
    14'h321c,
    14'h0811,
    14'h066e,
    14'h1f72,
    14'h0abd,
    14'h339f,
    14'h1db1,
    14'h1a63,
    14'h192b,
    14'h3acc,
    14'h1b1a,
    14'h2119,
    14'h0205,
    14'h312b,
    14'h07a8,
    14'h2111,
    14'h249c
  };
endpackage
