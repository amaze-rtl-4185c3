0000000000000000000000000000000000000000000000000000000000000000
1571ae79a73cc0f7e4c88b89d2ddc87921d759cafedd3a3a197144d47d816c44
19dff01264a4e2505c77568c277f114f880b55737cf66658d90ba8e4ff6a2d0c
237a7f85139f711b19eb32c00bee44d7d89420c320e81a435ba0170adcff62b4
1d1e8c0af5cbdd644fc0f5050108566ef4235d40b27b1f3b2413a989266e52bb
01065247d397a5522963dd59f245888db3ac347f889c4c147c458bb223dd4834
1f557c214fcc4b63d096a942b7dead33965b7d0127c926d26cc4524493be107c
0ec9fbbf7f4248786daa332f8ba1580be7ba38b642210470559eff435d33c454
0db8af8109e3e8389e1533699f6fe701660d52f231b540da5df9c2b50331415d
0421464f2db0f5d920b595f77997a58881ade924206611f9053e3f9123d20ed4
08673f0f712f04cbaeb252d9616e2a8eea1aeb0a721509e890d44ed3ec95cba9
2fbc715e918efb1f54f93fc335135c9ba847e40b8725e994f8c97d294ef75ef5
166a5d081444501e9a8002a02bcce5fe6456efb3f78da95cc4f48def03438bde
2fb30308fecae7c7f77b99d2d308c14b4f4510aab9e39b0c982930b0d8ce4e11
24497f5cd347294e5e375bad619bf6d06fdb94f21a2306b5ca8905db8de3aa1b
28593a44e4d6fc71f29bdc4de52cd6835bdc61b8a48cfc6c48acdb03bae776e1
10966c2cf3fbfd07378e2923781ff5b1d2f060228639de10d5d3d65d3b2851db
04230e84ee7e52644db19dd6696ac34fe1e4122e1edd24f6d3d461f49c39d3cb
1f74c0685224dfd46b3baec5d8368d37ee659505599ed90a5de83ca2b1d76833
0804c259d50b7e8cdc3959e6ca5ce234cb38efff37758a34e272f5a26fa9ce54
2a873b7b151197b88901a04b0e27e210b045b54fe0fd9f5b68151a8873d78360
2877b237142037d0f5a62b3edff52a74dbc6d141e7e15ccde91da86cc7af4317
213a5082c5c5e190e8e1cc294905321e3e7094042003c5cd445b6194f744be52
1ef95c8ab2696acaabad6be7adf8e2dfbd8d0149dff35f50fb529ae42286d7eb
057875d6cd3aff9ee292a60d49342b0ebef91c1ca3c6926ac9ccb0c0a649a4bc
12ca781443a3a34966f23f27e477936fb8db3bdd62e9edf26834c94abdac384d
083a50e05a231bca9b64b12ff1f8caafa9fb9350148bf0938cdb008251c7185b
2f90497304ea5388b43f85a2493a0d43bbf63b58c99be05515ae9e764aaff715
0e2de974e1b73458eaf4883f5c5e2d9163e8167c2f1a5d66cd8828edcf9a340d
055b898e10d8017776bde79add3e4d82fb5c2020da1d84bba8fcc3fc662277f3
1f73e3128b34bd690d5eba252274f71c0a3562cbe893244c839c2f589c350e08
0ebe2bc242baa8566229c75f21e4db27b47ffbfaa237af95da0745d6d561e50e
10fd605713267f0439f1678ce226716934d68ff6786df18683113c6f6a98f573
042d312ce895e75d45e9da62dda4f024e6e7cd1e88bc8188cd4ef910b2f7e190
0f035b8be4783aaa703442cdf6676af0e37ab366ad45dc3dc41efc5fa0b66b13
20a995d385e6d8857f6728c967a6385e4f45f988ca4f4958ef14f29faa16cb1e
2aa0e9c825d011890f8498ab32f511760e32e143b0a367a7141cf84d21af3de7
2021ed4979a25a8555f99a4ef66331d3117a2088126d0c890c6d2f1fc48726d5
0febce0064665487de1d158575675345bfce640ffb1d36df1ccc67ba0e7d37a5
0ee23ad3f26c1046583857872b82401b604a0620d3cfa1fe3cd7267b92f59b7c
27a6063a58be898e2a31d76f27f6b5c9c8fcf825e98430e3e48f167d1e578c10
2349d93a13fe757d9809104a95e8666f39f57ac9f061ee724de44dc3c52018ff
1c28711b5e8562d8796a0f853d26d658dc88fc5b661c3161285b54b4934728d0
0001f25bd84cc1a82bf59dae585a3362ac4ebf0f3f10e83129141dfda4b227d2
098478653edaf8511c494194943b7d4e537046133af8a358c126b4b5abab047a
28651ea0cf9ebfe4f5d04aecbb8c570a968605fa870759c905f620155c057a3a
008e410d316161aaf3dcb3478e3aeac9254769b06748872af9d0bb27a9f10b7b
0f9c89364c3b589d2189cf24f9e1a354c40288d07c9030808ff71c61134b9874
21a0a8fa8b0e32a773ffb8a9eef0a824b80daacecfe536e2383ca1828ef6cfc6
15f63b43e3714f44373f19c1a2bca823060cb3696e2784c20e3465ee1f2119cc
1396b321675fb58999229b891e19f1320ea35025c88da436f1f89f0d98f9e1a2
122f8772e92c9eb0efb62a6d4105c783285a33f2ed4093d2e0afb677362646b7
04a58d0acca0bf9dcf07cace9384c87c2250804424b7868995357a9cf595293b
0a4843cacf7d7dae012c7065c02746c13454b8d212852053dc45972c86e96576
063bc36b7abb9aade346822d5d2cc4ea83fce8470780dfaab4e24739cbd656cd
162a9e2db5bbffd0b992cc855f6f1cee42af2a348e2492541054fd9b4a603404
08fedbfc49d61a719f20928f2aa8eb8201bbf5c12d1741febcf1a72bfd3186ee
1109c1b5d9109a13eda7ba09402ac9e5da5b1b93b04a5c568cc9cd1cf520b83f
0190cb97ba0d91d2aedfb761b33bfe957fbcd336075f7bf9c83b7167a5b533c7
20720512a2eb715feac5bb362d3c9db9bbd5cc1c85f1a538bba576b23633eb27
06648ef504336b5929fec328ac41299796be16f1a6df1e9b79e20896631f4f0c
072e56636acfa0a96821b5fc6ded4064a4c081f5e8c1cea551dcdc0652ca3861
2c3d08e2670edc2a815eb4e9b5bb68bb4411cf072e4508024a262ccc69916d1d
2517d14519b37251cc8777ead175c606af2d3532cc4ca9c83e31b20b115dbe20
0a48d899d433f7f022d7b348902285878c2b47fe84c684b985e0c79fe119458a
2974c8603818dd4e4ef2d6574d8bc98efb6eca0e6d73f437dd6f0750afe69617
1c83d9f8d76b5013b7cca4b1354850a4bf3d10cb2470e8dfde591bcd9d62b02f
137a1159456ade4329c60f766a0d359f8282665986f498e39d4ec2826ee1c434
1c387d50140f44678cbc8b81fb568e3dff23a0c81908729c5bb2fd85ecc3782a
2f89b472b31a9821987b9aa08d16286548abc420eec7aba5866b5ac6e82bea02
0ec2cbb9c5462a876e98f780956db84af98c492ec4290b65607f855d290e482c
06f0244d4f5b5672dcddf4d755695e36885945ef7bad111a91d770c707215838
0b173db4fe333c59aa20b344e73fcace650ca4f896d8a33cb21b6ca37a83b881
080cc9966c24283f84150c2dafec9f6fc91e1f2d217217711ff8aafc58eb06a5
26a68ff7a68a337abe60ec2feca86595fa4dcad122eb0271cff3555e718dc07a
25efe95320ce9ae3878902f04dd72a9b832e56d52bfd6ac19472ff668cdb2b63
0fe679151df219d63c032a64c7992d05f64f693221d180ad39c306c496ecf3d5
0d252c723c6f8b942ac4b173a14a2d30388fc785b99608ddb959d08661044747
19d425d65b6a764d9037e2ddd0de1490bf20a081bf43cdcc325a6dcb5b354849
04adbc04f39fb828fcaddac37587afa813f371938a648ebe5ecaf07dcb7d506f
0ca231acb1fc5144ce7366878e18239d579637cff69bbe290d36aa9ad3bf2423
1eb7cb086a04cce9b62727f3d8eb37ee98d3911af309a6459108e1298b1c67a0
16d0aec3b386f4617891c070eb3717e655b4aaa79dc75954bc37ec32f8657ac2
027efb6a194c2bd463976ee4349c80e48e3c9fcb6180af9d4c557d3a71205468
09646883a0c967dd09e5a3db70aef66efd629a0085762cbe96ad3b9dcf9ead44
01dab4e87e616157147699d8334ea4ab116aba36585c724d5170be995ef5c043
0b7ebe06383b7a1ba6ec9475037ea8c1a7552e5868e68216e1d8aa157d7df898
21d38cc82845db4e2ba343338c35d924bb0de0a90f7e12a704bd0dfeec95aee7
0361a7a777818f013851f162472fed442813efa93f4dea4f4423664fa7c7559d
21c2e3e656fab3001fcfd4a23a277cd5760bb1cc4982b29a89ed0cad2c9a0596
0c79021ee9cd800af235dd1ab4d5a7e0d040748f8332c103d41963c78368c2b8
0000000000000000000000000000000000000000000000000000000000000000
