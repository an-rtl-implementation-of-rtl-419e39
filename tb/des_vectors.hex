133457799bbcdff10123456789abcdef85e813540f0ab405
0e329232ea6d0d7387878787878787870000000000000000
000000000000000000000000000000008ca64de9c1b123a7
ffffffffffffffffffffffffffffffff7359b2163e4edc58
3c7d749b75df08537107f8188d2d2f963f441afc21a29be1
ddebb89f945999c48b62c062795f9afe94aca35c300e7c76
41cc3a37213ad253a2154033e76968840efa915e68025c53
c3505cbfb97f16afc96e2bcf5ea8941580bce8c0093e93e3
0de082f5fe8a549f39bc59ab5abd6ae24773d5750cf171cf
caadf35ea79c5d554b18b3643278391b1c427e364f38dc5c
84e617b6549e992bd468c3f1083c7cc1f61a624c4b6d8c25
b011ff4573a86c30da47315431057170c22d0dba6bb2e48b
c0b7dde801dfa1414f7d1ea72cb8f117ab190ec3d5428e82
e07439f78edcfcbaa63a5b81d99b18dc2e0fc9a3f6564b58
6465ca1c5038308516f90e65c824a067b7c98964b3ce8823
b6eb8204796eae788110e65dff61fbd53cd56d6f201ad990
77549615d0e24bc26aad3c920147d3368150dcb2f2aee4e0
e4063a21360ceee07139459211d1dd89ea54911b89fd8102
f1aadfe59dd9022b993311befa20dc8b49a91136c3069df5
c9ede55130efa60086247da20c354f7809b2b7c09e207c76
805897e9584d267a07b14213f9d65f704a423fd89c7d6741
fe7cc83afd6d62fc8f810534f2bd2df473ec8c10d005bcac
56af8c88cfd42536bf48c1af9987bb6e1fd8a33f0907765e
e202cc5144e3e9af4961c9b76dc00e06414078e8c2278fc9
f869147b283d219ac92b651f37fc8fbb3fd969f1bd74fed4
8d7b353f2e7eed91d14949e4c6389b8d5501d953d7a07f0f
820a4414fd9b77bbf740c9608a2d4cd2b13b1c6413aa84a7
f22a4f31aaecc09867e26c6a7bc87e3926f7e6787dfeaa4e
719a34465c13b80caa46b036385dc5e2036ca809aaab327e
7b048f8ba53ae0412d6d0cae9de1a091cf7e3da37cda0834
6f6315f8276d07d692076e21fb944008707a04d230ce9f24
c186a5b0b48cee815573af596539f38d0966f0e21f681925
95ecd08eff9732d8073628699e2e13f4509d6b905d135285
03349a228278aa062dadf039b63c92a80703cedca4359104
971bcacb49fd40dbad8055329298b7472d6fea27ae39d073
4edaa1998c74cf2086a3fef0ec3eb7fa4881f581340a2d9a
b0f3bc85f4618e0325b96029553f11a07867302d44a73c7c
ebba2ba5fc62e15ea95520a1de05c0d83b672213c8e50aff
6126cd50349067b837ccd320f9808482e738d72b837e3a0b
283f4f8a27ed3723fa90b4287298cc2b5b0565d3d63fe519
068d00020e44319be33752db18a8b43459c2b0069419793d
6d3302426dcb817debbde91856d814aaf9daa72d09e13a16
f49ff08b7c192ef674041dfdc8deb12e2c3152a487d07425
69a4f0cc7f31393cbb3c385077e60874f977599a125919a4
924daf1fe31e24fc7fceb52b7e44acb650f1305a83da987f
f6729969d11390d7575adbe0aaae61f3c4ca1708bee1f47d
1e55c6e4b654fd1fdd3ead1f523a9ed07329b84c24fe6da2
7e564a010d83bf131588be57cafb544cb9c4148d5099654c
ea445241ac1e478cdfddb32df2042365e61f807b9bc08e65
cab6e170033d33b4fa4c1dc1ae152edc313badc4ddf44fa8
9f6689ec9d047f23a812c797b8ae41a6d38ae2f4b365fd28
439781af5011ed51562bbd7bcb4b97198e9f0fd8e646e004
1b14bd623bad2a0f50dc255a18ad5fdf7ca78b00ed5735fe
af96ec8d364413776af1a8b453e1ad11c7cc2fbd265f35b9
ab5ccfdb766e65cf3675fee0272e121488a9d06cb5ea215b
ae12adacecaa3872a91789b87db6af14066bcfcbfb518122
076cc7bdf6c10a13b9a4f1af87ec72b61ebf164401403931
005bfd8e8e17d104e4ba29e20528818f5627bbf50218107e
d3ff5c82102d1f0624852bcfd8fb935df031b5dfb2f7b74e
ff930382b8f148b47b346f701235af29deda5450fbc89a50
b3ab0408c037deede52678811a8b106b29e5db9979b6b415
8b5a4da5a5ab0026427f7148dd4fe9aad17f50a348f57787
76b61ca63b5ef58c2ba0b9d4bbacd26b4c61bba5ef7c0b72
03a6d91abe8656053ec3676c9a2f4cdd331d33569c018076
c05b69853efdababcfbba827cbca583f90ab1ca53710951c
24f6c082474b38bf31dd0c4173be7acaa6043cc546904b1e
eeb7a44170ea81d297e1fd9aaa9c83ce758c5e5761da9716
b1a97d3ee4ddbe99b6b9aeedaa8a7e2234bb621320e2e443
87f017662944e7981eac360f8ac2620902808e387d9dcfc2
dd3d4f4f9ca889b98e06d82835c0c08331f184f454aa605b
6f1d92780fe071da7b48d623627d88eef8a62a28dae1fff9
40d7e012b06396b1c2084312f9c4be1eb5214c6cbf99dc46
1422c0a2a4a9b491a0112ec6fb406877b13409938d178fa4
914fe48d6861217b141d4725a2a0d14d4f9ff5e52a944570
21ca81eff0d4b6f31d50c89e3c6b306ba9ed80a048c131f2
297498f72174e40b6a6220d5ca4a9a943f79a7eb004f2574
f7580e575c18ccdf800ff227908f4f71f5ed705006a8f4a8
dd282acd4886d699f0c8350208d9fe690be60f4a5b7ded8d
98d5472093380b449cefd2c4bce97c887f370b20c6cd9bc9
8bd8a4686c55dc984d0b6bbe858ecd17a1ac579ca19c934b
c3ef1a64502f5229f2b3a81d05a10e25e2c9ee8c02123a18
c1794e56677cf9a4802de494e57b7f3880f4dc05a6393b63
d549d4d7d075818cf33d91836e08a71529935903b24162f9
28ca789769ecdd39865b6dcf944c0cee44217e9f1362ffd1
d67b8b5056cce968853c4a78aa25a08b722968e501f943b1
0ae27668309654a5e1e10d1222c3ce0afc760d75c2345a0a
f186b9ea3d451390a465c1a56ad58bc9e67b789d3c81bdd7
7e18906b89d2612ab15e7c4aad6f5076e45d1ac9567e1501
6f701a79cf998f13f5c7c6fe79265b05c51ecc93ac5b4b95
64f2b965cb193b56bc12c1758796a35799b8813561341305
9cdf02b2b5e7b092032c73650e78fb4f83466a6622635494
57263d1784038576e292be2ddb36d836c02b52543883cdb9
bdaf316e90a300c190638ca67307c758faf81c0af57ba355
cd1b7375d003deaf9aee9f1f70b198896dacaa6e32662643
7943aa53f9ba4521ac77a1d649bfb3eefee1b2a8787d0255
4f2bbd65802b6e98e20ce55459d8b45e57262f4b0109dde1
7b9795cee9fe86cc6a5c8e24ce5aa82362f57a4258730b7b
da96186a0e0d4386e45299f9604a0b8f1ee40488e4913b8e
d11d9f665b5f6efa8bd6e6d6a30d87040361c0fa55f39dfd
5bf158f8faebdba1b769216648ac55206146144c7d717288
