3f80
3f91
3fa4
3fba
3fd3
3fef
4007
401a
402e
4045
405f
407d
408f
40a3
40b8
40d1
40ec
4106
4118
412c
4143
415d
417a
418e
41a1
41b6
41ce
41ea
4204
4216
422a
4241
425a
4277
428c
429f
42b4
42cc
42e7
4303
4314
4328
433f
4358
4375
438b
439d
43b2
43ca
43e5
4402
4413
4426
443c
4456
4472
4489
449b
44b0
44c7
44e2
4500
4511
4524
453a
4553
456f
4588
459a
45ae
45c5
45df
45fd
460f
4623
4638
4651
466d
4686
4698
46ac
46c3
46dd
46fa
470e
4721
4736
474e
476a
4785
4796
47aa
47c1
47da
47f8
480c
481f
4834
484c
4867
4883
4894
48a8
48bf
48d8
48f5
490b
491d
4932
494a
4965
4982
4993
49a6
49bc
49d6
49f2
4a09
4a1b
4a30
4a48
4a62
4a80
4a91
4aa4
4aba
4ad3
4aef
33f2
3409
341b
3430
3447
3462
3480
3491
34a4
34ba
34d3
34ef
3507
3519
352e
3545
355f
357d
358f
35a2
35b8
35d1
35ec
3606
3618
362c
3643
365d
367a
368e
36a1
36b6
36ce
36ea
3704
3716
372a
3741
375a
3777
378c
379f
37b4
37cc
37e7
3803
3814
3828
383e
3858
3875
388b
389d
38b2
38ca
38e4
3901
3913
3926
393c
3955
3972
3989
399b
39b0
39c7
39e2
3a00
3a11
3a24
3a3a
3a53
3a6f
3a87
3a99
3aae
3ac5
3adf
3afd
3b0f
3b22
3b38
3b51
3b6c
3b86
3b98
3bac
3bc3
3bdd
3bfa
3c0e
3c21
3c36
3c4e
3c6a
3c84
3c96
3caa
3cc1
3cda
3cf7
3d0c
3d1f
3d34
3d4c
3d67
3d83
3d94
3da8
3dbe
3dd8
3df5
3e0b
3e1d
3e32
3e4a
3e64
3e81
3e93
3ea6
3ebc
3ed5
3ef2
3f09
3f1b
3f30
3f47
3f62
